// engine_runner -- test harness for one parameter set of sha3_shake_engine.
//
// Runs a fixed list of hashes (all six modes, one- and multi-block messages,
// a SHAKE output longer than the rate) on its own engine instance, compares
// each digest with the reference model, and checks that every rate block
// costs 168 + 24/UNROLL cycles with back-to-back input.  It then flips one
// state bit during a permutation: with protection the error flag must rise
// and the output must be zero, without protection no flag may rise.  Results
// are reported on its ports when finished_o rises.
module engine_runner
  import sha3_pkg::*;
  import sha3_ref_pkg::*;
#(
  parameter protection_e PROTECTION = PROT_ZSHEET,
  parameter int unsigned UNROLL     = 1
) (
  input  logic clk_i,
  input  logic rst_ni,
  output logic finished_o,
  output int   checks_o,
  output int   failures_o
);

  logic start = 0, in_valid = 0, in_keep = 1, in_last = 0, out_ready = 1;
  hash_mode_e mode = MODE_SHA3_256;
  logic [15:0] out_len = 0;
  logic [7:0]  in_data = 0, out_data;
  logic busy, done, in_ready, out_valid, out_last, error;
  int cycle = 0;

  sha3_shake_engine #(.PROTECTION(PROTECTION), .UNROLL(UNROLL)) dut (
    .clk_i, .rst_ni, .start_i(start), .mode_i(mode), .out_len_i(out_len),
    .busy_o(busy), .done_o(done), .in_valid_i(in_valid), .in_data_i(in_data),
    .in_keep_i(in_keep), .in_last_i(in_last), .in_ready_o(in_ready),
    .out_valid_o(out_valid), .out_data_o(out_data), .out_last_o(out_last),
    .out_ready_i(out_ready), .error_o(error));

  always @(posedge clk_i) cycle <= cycle + 1;

  task automatic check(string what, logic cond);
    checks_o++;
    if (!cond) begin
      failures_o++;
      $display("FAIL [UNROLL=%0d PROT=%0d]: %s", UNROLL, PROTECTION, what);
    end
  endtask

  task automatic run(int m, int len, int olen, int fault_at);
    byte unsigned msg [$], got [$], exp [$];
    int sent = 0, t0 = -1, t1 = -1, blocks, pos;
    for (int i = 0; i < len; i++) msg.push_back(8'($urandom));
    exp = hash(m, msg, olen);
    @(negedge clk_i);
    mode = hash_mode_e'(m); out_len = 16'(olen); start = 1;
    @(negedge clk_i);
    start = 0;
    fork
      begin
        while (sent < len) begin
          in_valid = 1; in_keep = 1; in_last = (sent == len - 1); in_data = msg[sent];
          @(posedge clk_i);
          if (in_ready) begin
            if (t0 < 0) t0 = cycle;
            sent++;
          end
          @(negedge clk_i);
        end
        in_valid = 0; in_last = 0;
      end
      begin
        while (!done) begin
          @(posedge clk_i);
          if (out_valid && t1 < 0) t1 = cycle;
          if (out_valid && out_ready) got.push_back(out_data);
          @(negedge clk_i);
        end
      end
      begin
        if (fault_at >= 0) begin
          repeat (fault_at) @(negedge clk_i);
          pos = $urandom_range(0, 1599);
          #2 dut.u_state.state_q_o[pos] = ~dut.u_state.state_q_o[pos];
        end
      end
    join
    if (fault_at < 0) begin
      blocks = len / rate_of(m) + 1;
      check($sformatf("mode %0d len %0d digest", m, len), got == exp && !error);
      check($sformatf("mode %0d latency %0d", m, t1 - t0),
            t1 - t0 == blocks * (168 + 24 / UNROLL));
    end else if (PROTECTION == PROT_NONE) begin
      check("unprotected engine raises no flag", !error);
    end else begin
      bit zero = 1;
      foreach (got[i]) if (got[i] != 0) zero = 0;
      check("fault flagged", error);
      check("faulty output masked", zero);
    end
  endtask

  initial begin
    finished_o = 0; checks_o = 0; failures_o = 0;
    @(posedge rst_ni);
    for (int m = 0; m < 6; m++) run(m, 7, 40, -1);
    run(4, 400, 500, -1);
    run(3, 150, 0, -1);
    run(1, 10, 0, 60);    // bit flip while the message is absorbed
    run(1, 10, 0, -1);    // and the engine recovers
    finished_o = 1;
  end
endmodule
