// sha3_engine_variants_tb -- the engine configurations compared in the
// evaluation: round-based with z-sheet, c-plane and no protection, and
// z-sheet with 2, 4, 6, 8, 12 and 24 rounds unrolled per cycle.  Each one is
// driven by its own engine_runner; the results are summed.
module sha3_engine_variants_tb;
  import sha3_pkg::*;

  localparam int N = 9;
  logic clk = 0, rst_n = 0;
  logic fin [N];
  int   chk [N], fl [N];
  int checks, failures;

  always #5 clk = ~clk;

  engine_runner #(.PROTECTION(PROT_ZSHEET), .UNROLL(1))  r0 (.clk_i(clk), .rst_ni(rst_n), .finished_o(fin[0]), .checks_o(chk[0]), .failures_o(fl[0]));
  engine_runner #(.PROTECTION(PROT_CPLANE), .UNROLL(1))  r1 (.clk_i(clk), .rst_ni(rst_n), .finished_o(fin[1]), .checks_o(chk[1]), .failures_o(fl[1]));
  engine_runner #(.PROTECTION(PROT_NONE),   .UNROLL(1))  r2 (.clk_i(clk), .rst_ni(rst_n), .finished_o(fin[2]), .checks_o(chk[2]), .failures_o(fl[2]));
  engine_runner #(.PROTECTION(PROT_ZSHEET), .UNROLL(2))  r3 (.clk_i(clk), .rst_ni(rst_n), .finished_o(fin[3]), .checks_o(chk[3]), .failures_o(fl[3]));
  engine_runner #(.PROTECTION(PROT_ZSHEET), .UNROLL(4))  r4 (.clk_i(clk), .rst_ni(rst_n), .finished_o(fin[4]), .checks_o(chk[4]), .failures_o(fl[4]));
  engine_runner #(.PROTECTION(PROT_ZSHEET), .UNROLL(6))  r5 (.clk_i(clk), .rst_ni(rst_n), .finished_o(fin[5]), .checks_o(chk[5]), .failures_o(fl[5]));
  engine_runner #(.PROTECTION(PROT_ZSHEET), .UNROLL(8))  r6 (.clk_i(clk), .rst_ni(rst_n), .finished_o(fin[6]), .checks_o(chk[6]), .failures_o(fl[6]));
  engine_runner #(.PROTECTION(PROT_ZSHEET), .UNROLL(12)) r7 (.clk_i(clk), .rst_ni(rst_n), .finished_o(fin[7]), .checks_o(chk[7]), .failures_o(fl[7]));
  engine_runner #(.PROTECTION(PROT_ZSHEET), .UNROLL(24)) r8 (.clk_i(clk), .rst_ni(rst_n), .finished_o(fin[8]), .checks_o(chk[8]), .failures_o(fl[8]));

  function automatic bit all_done();
    foreach (fin[i]) if (!fin[i]) return 0;
    return 1;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    checks = 0; failures = 1;
    foreach (chk[i]) begin checks += chk[i]; failures += fl[i]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!all_done()) @(posedge clk);
    checks = 0; failures = 0;
    foreach (chk[i]) begin checks += chk[i]; failures += fl[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
