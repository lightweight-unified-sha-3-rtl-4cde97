// sha3_shake_engine_tb -- end-to-end test of the engine at its default
// parameters (round-based, z-sheet protection).
//
// Hashes messages in all six modes and compares every output byte with the
// reference model; checks published test vectors for "" and "abc"; checks
// that every rate block costs 192 cycles when bytes arrive back to back.
// Faults are injected by flipping one to three bits of the state register
// in the middle of a hash (absorb, permutation or squeeze): the error flag
// must rise and every hash byte after it must be zero; the next hash must be
// correct again.  Every mechanism is counted and must occur at least once:
// each mode, an empty message, the merged 0x86/0x9F pad byte, padding in an
// extra block, multi-block absorb, the zero fill of bytes r_mode..167,
// squeezing beyond one rate, input gaps, output back-pressure, a mode switch
// and a detected fault with masked output.
module sha3_shake_engine_tb;
  import sha3_pkg::*;
  import sha3_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0, in_valid = 0, in_keep = 1, in_last = 0, out_ready = 0;
  hash_mode_e mode;
  logic [15:0] out_len;
  logic [7:0]  in_data, out_data;
  logic busy, done, in_ready, out_valid, out_last, error;
  int checks = 0, failures = 0;

  sha3_shake_engine dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .mode_i(mode), .out_len_i(out_len),
    .busy_o(busy), .done_o(done), .in_valid_i(in_valid), .in_data_i(in_data),
    .in_keep_i(in_keep), .in_last_i(in_last), .in_ready_o(in_ready),
    .out_valid_o(out_valid), .out_data_o(out_data), .out_last_o(out_last),
    .out_ready_i(out_ready), .error_o(error));

  always #5 clk = ~clk;

  // mechanism counters
  int n_mode [6];
  int n_empty, n_merged_pad, n_extra_pad_block, n_multi_absorb, n_fill, n_multi_squeeze;
  int n_in_gap, n_out_stall, n_mode_switch, n_fault_masked;
  int last_mode = -1;
  int n_after_err, n_nonzero_after_err;  // hash bytes handed out while error is set
  int cycle = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (busy && in_ready && !in_valid) n_in_gap++;
    if (out_valid && !out_ready) n_out_stall++;
  end

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // fault injection: flip nflips distinct bits of the state register
  task automatic inject(int nflips);
    int pos [3];
    pos[0] = $urandom_range(0, 1599);
    pos[1] = (pos[0] + $urandom_range(1, 799)) % 1600;
    pos[2] = (pos[0] + $urandom_range(800, 1599)) % 1600;
    for (int i = 0; i < nflips; i++)
      dut.u_state.state_q_o[pos[i]] = ~dut.u_state.state_q_o[pos[i]];
  endtask

  // one hash; returns the output bytes
  task automatic run(int m, byte unsigned msg [$], int olen, bit gaps,
                     int fault_at, int nflips, output byte unsigned got [$], output int lat);
    int sent, t0, t1, rate, n;
    bit faulted;
    got.delete();
    rate = rate_of(m);
    n = (m < 4) ? digest_of(m) : olen;
    n_mode[m]++;
    if (last_mode >= 0 && last_mode != m) n_mode_switch++;
    last_mode = m;
    if (msg.size() == 0) n_empty++;
    if (msg.size() % rate == rate - 1) n_merged_pad++;
    if (msg.size() > 0 && msg.size() % rate == 0) n_extra_pad_block++;
    if (msg.size() + 1 > rate) n_multi_absorb++;
    if (rate < 168) n_fill++;
    if (n > rate) n_multi_squeeze++;
    @(negedge clk);
    mode = hash_mode_e'(m); out_len = 16'(olen); start = 1;
    @(negedge clk);
    start = 0;
    t0 = -1; t1 = -1; sent = 0; faulted = 0;
    fork
      begin : feed
        while (sent < msg.size() || (msg.size() == 0 && sent == 0)) begin
          in_valid = !gaps || ($urandom_range(0, 3) != 0);
          in_keep  = (msg.size() != 0);
          in_last  = (msg.size() == 0) || (sent == msg.size() - 1);
          in_data  = (msg.size() != 0) ? msg[sent] : 8'h00;
          @(posedge clk);
          if (in_valid && in_ready) begin
            if (t0 < 0) t0 = cycle;
            sent = (msg.size() == 0) ? 1 : sent + 1;
          end
          @(negedge clk);
        end
        in_valid = 0; in_last = 0;
      end
      begin : drain
        while (!done) begin
          out_ready = !gaps || ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (out_valid && t1 < 0) t1 = cycle;
          if (out_valid && out_ready) begin
            got.push_back(out_data);
            if (error) begin
              n_after_err++;
              if (out_data != 0) n_nonzero_after_err++;
            end
          end
          @(negedge clk);
        end
        out_ready = 0;
      end
      begin : fault
        if (fault_at >= 0) begin
          repeat (fault_at) @(negedge clk);
          #2 inject(nflips);
        end
      end
    join
    lat = t1 - t0;
  endtask

  task automatic hash_check(int m, int len, int olen, bit gaps);
    byte unsigned msg [$], got [$], exp [$];
    int lat, blocks;
    for (int i = 0; i < len; i++) msg.push_back(8'($urandom));
    exp = hash(m, msg, olen);
    run(m, msg, olen, gaps, -1, 0, got, lat);
    check($sformatf("mode %0d len %0d out %0d digest", m, len, olen), got == exp && !error);
    blocks = len / rate_of(m) + 1;
    if (!gaps && exp.size() > 0)
      check($sformatf("mode %0d len %0d latency %0d = 192 x %0d blocks", m, len, lat, blocks),
            lat == 192 * blocks);
  endtask

  task automatic kat(int m, string s, int olen, logic [511:0] expv, int nbytes);
    byte unsigned msg [$], got [$];
    int lat;
    bit ok = 1;
    for (int i = 0; i < s.len(); i++) msg.push_back(s[i]);
    run(m, msg, olen, 0, -1, 0, got, lat);
    if (got.size() != nbytes) ok = 0;
    else for (int i = 0; i < nbytes; i++) if (got[i] != expv[8*(nbytes-1-i) +: 8]) ok = 0;
    check($sformatf("test vector mode %0d \"%s\"", m, s), ok);
  endtask

  task automatic fault_check(int m, int len, int olen, int at, int nflips);
    byte unsigned msg [$], got [$];
    int lat;
    for (int i = 0; i < len; i++) msg.push_back(8'($urandom));
    n_after_err = 0; n_nonzero_after_err = 0;
    run(m, msg, olen, 0, at, nflips, got, lat);
    check($sformatf("fault (%0d flips at cycle %0d) flagged", nflips, at), error);
    check($sformatf("hash masked after the fault (%0d of %0d bytes)", n_after_err, got.size()),
          n_after_err > 0 && n_nonzero_after_err == 0);
    if (error && n_after_err > 0 && n_nonzero_after_err == 0) n_fault_masked++;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_data = 0; mode = MODE_SHA3_256; out_len = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // published test vectors
    kat(1, "",    0, 512'ha7ffc6f8bf1ed76651c14756a061d662f580ff4de43b49fa82d80a4b80f8434a, 32);
    kat(1, "abc", 0, 512'h3a985da74fe225b2045c172d6bd390bd855f086e3e9d525b46bfe24511431532, 32);
    kat(3, "abc", 0, 512'hb751850b1a57168a5693cd924b6b096e08f621827444f70d884f5d0240d2712e10e116e9192af3c91a7ec57647e3934057340b4cf408d5a56592f8274eec53f0, 64);
    kat(4, "",   32, 512'h7f9c2ba4e88f827d616045507605853ed73b8093f6efbc88eb1a6eacfa66ef26, 32);

    for (int m = 0; m < 6; m++) begin
      automatic int r = rate_of(m);
      hash_check(m, 5, 32, 0);
      hash_check(m, 0, 16, 1);
      hash_check(m, r - 1, 24, 1);
      hash_check(m, r, 24, 0);
      hash_check(m, 2 * r + 7, 2 * r + 9, 1);
    end

    // faults during absorb, during the permutation and during squeeze
    fault_check(1, 20, 0, 10, 1);
    fault_check(5, 20, 64, 180, 2);
    fault_check(0, 20, 0, 175, 3);
    fault_check(4, 20, 64, 195, 1);
    // the engine works again after a fault
    hash_check(1, 40, 0, 0);

    for (int m = 0; m < 6; m++) check($sformatf("mode %0d exercised", m), n_mode[m] > 0);
    check("empty message",            n_empty > 0);
    check("merged pad byte",          n_merged_pad > 0);
    check("padding in extra block",   n_extra_pad_block > 0);
    check("multi-block absorb",       n_multi_absorb > 0);
    check("zero fill beyond r_mode",  n_fill > 0);
    check("multi-block squeeze",      n_multi_squeeze > 0);
    check("input gaps",               n_in_gap > 0);
    check("output back-pressure",     n_out_stall > 0);
    check("mode switch",              n_mode_switch > 0);
    check("fault detected and masked", n_fault_masked > 0);
    $display("mechanisms: empty=%0d merged_pad=%0d extra_pad_block=%0d multi_absorb=%0d fill=%0d multi_squeeze=%0d in_gap=%0d out_stall=%0d mode_switch=%0d fault_masked=%0d",
             n_empty, n_merged_pad, n_extra_pad_block, n_multi_absorb, n_fill, n_multi_squeeze,
             n_in_gap, n_out_stall, n_mode_switch, n_fault_masked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
