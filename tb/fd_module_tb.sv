// fd_module_tb -- drives a z-sheet and a c-plane instance with the same model
// state register: random values are written (load), optionally some bits of
// the modelled register are flipped afterwards, and the theta-layer parities
// of the (possibly faulty) register are presented one cycle later, as the
// Keccak round does.  Expected outcome per fault pattern:
//   none: no flag; 1 or 3 flips: both flag; 2 flips in one column: only
//   z-sheet flags; 2 random flips: z-sheet flags; 4 flips on a rectangle in
//   one sheet (same two lanes, same two slices): neither flags (the limit of
//   the scheme).  Also checks that error_o is sticky, cleared by clear_err_i,
//   and that a held register (no load) is checked against the held parities.
// Finally single bits of the z-sheet instance's own C', F' and C'_F'
// registers are flipped; each must be flagged (the C'_F' bits are caught only
// by the parity check of the F' register).
module fd_module_tb;
  import sha3_pkg::*;
  import sha3_ref_pkg::*;

  logic clk = 0, rst_n = 0, load = 0, clr = 0;
  logic [1599:0] sd, sreg;
  logic [319:0] cpl;
  logic [24:0]  fsl;
  logic err_z, mis_z, err_c, mis_c;
  int checks = 0, failures = 0;

  fd_module #(.PROTECTION(PROT_ZSHEET)) dut_z (
    .clk_i(clk), .rst_ni(rst_n), .load_i(load), .state_d_i(sd), .c_plane_i(cpl),
    .f_slice_i(fsl), .clear_err_i(clr), .error_o(err_z), .mismatch_o(mis_z));
  fd_module #(.PROTECTION(PROT_CPLANE)) dut_c (
    .clk_i(clk), .rst_ni(rst_n), .load_i(load), .state_d_i(sd), .c_plane_i(cpl),
    .f_slice_i(fsl), .clear_err_i(clr), .error_o(err_c), .mismatch_o(mis_c));

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (load) sreg <= sd;
  assign cpl = c_plane(sreg);
  assign fsl = f_slice(sreg);

  function automatic logic [1599:0] rand_state();
    logic [1599:0] v;
    for (int i = 0; i < 50; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  function automatic int idx(int x, int y, int z);
    return 64 * (5 * y + x) + z;
  endfunction

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // write a random value, then flip the given pattern and check the flags
  task automatic trial(int kind, logic exp_z, logic exp_c, string name);
    int x, y, z, x2, y2, z2;
    @(negedge clk);
    sd = rand_state(); load = 1;
    @(negedge clk);
    load = 0;
    x = $urandom_range(0, 4); y = $urandom_range(0, 4); z = $urandom_range(0, 63);
    y2 = (y + $urandom_range(1, 4)) % 5; z2 = (z + $urandom_range(1, 63)) % 64;
    x2 = $urandom_range(0, 4);
    case (kind)
      1: sreg[idx(x, y, z)] = ~sreg[idx(x, y, z)];
      2: begin  // same column
        sreg[idx(x, y, z)]  = ~sreg[idx(x, y, z)];
        sreg[idx(x, y2, z)] = ~sreg[idx(x, y2, z)];
      end
      3: begin  // three distinct random bits
        int a, b, c;
        a = $urandom_range(0, 1599);
        b = (a + $urandom_range(1, 799)) % 1600;
        c = (a + $urandom_range(800, 1599)) % 1600;
        sreg[a] = ~sreg[a]; sreg[b] = ~sreg[b]; sreg[c] = ~sreg[c];
      end
      4: begin  // rectangle in sheet x
        sreg[idx(x, y, z)]   = ~sreg[idx(x, y, z)];
        sreg[idx(x, y2, z)]  = ~sreg[idx(x, y2, z)];
        sreg[idx(x, y, z2)]  = ~sreg[idx(x, y, z2)];
        sreg[idx(x, y2, z2)] = ~sreg[idx(x, y2, z2)];
      end
      5: begin  // two random bits in different columns
        sreg[idx(x, y, z)]   = ~sreg[idx(x, y, z)];
        sreg[idx(x2, y2, z2)] = ~sreg[idx(x2, y2, z2)];
      end
      default: ;
    endcase
    #1;
    check({name, " z-sheet"}, mis_z == exp_z);
    check({name, " c-plane"}, mis_c == exp_c);
    // the flag is sticky, clear it for the next trial
    @(negedge clk);
    check({name, " sticky z"}, err_z == exp_z);
    check({name, " sticky c"}, err_c == exp_c);
    // rewrite the register with a clean value while clearing the flag
    clr = 1; sd = rand_state(); load = 1;
    @(negedge clk);
    clr = 0; load = 0;
    check("cleared", !err_z && !err_c);
  endtask

  // flip one bit of C' (0), F' (1) or C'_F' (2) of the z-sheet instance
  task automatic reg_fault(int which);
    int b;
    @(negedge clk);
    sd = rand_state(); load = 1;
    @(negedge clk);
    load = 0;
    case (which)
      0: begin b = $urandom_range(0, 319); dut_z.c_q[b] = ~dut_z.c_q[b]; end
      1: begin b = $urandom_range(0, 24);  dut_z.f_q[b] = ~dut_z.f_q[b]; end
      default: begin b = $urandom_range(0, 4); dut_z.cf_q[b] = ~dut_z.cf_q[b]; end
    endcase
    #1 check($sformatf("fault in check register %0d bit %0d flagged", which, b), mis_z);
    @(negedge clk);
    clr = 1; sd = rand_state(); load = 1;
    @(negedge clk);
    clr = 0; load = 0;
    check("cleared after register fault", !err_z);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sd = '0; sreg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check("no check before first load", !mis_z && !mis_c);
    // clean writes, some with held cycles in between
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      sd = rand_state(); load = ($urandom_range(0, 2) != 0);
      #1 check("clean", !mis_z && !mis_c && !err_z && !err_c);
    end
    for (int i = 0; i < 40; i++) trial(0, 1'b0, 1'b0, "no fault");
    for (int i = 0; i < 40; i++) trial(1, 1'b1, 1'b1, "1 flip");
    for (int i = 0; i < 40; i++) trial(2, 1'b1, 1'b0, "2 flips one column");
    for (int i = 0; i < 40; i++) trial(5, 1'b1, 1'b1, "2 flips two columns");
    for (int i = 0; i < 40; i++) trial(3, 1'b1, 1'b1, "3 flips");
    for (int i = 0; i < 10; i++) trial(4, 1'b0, 1'b0, "4 flips rectangle");
    // faults in the check registers themselves
    for (int i = 0; i < 10; i++) reg_fault(0);
    for (int i = 0; i < 10; i++) reg_fault(1);
    for (int i = 0; i < 10; i++) reg_fault(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
