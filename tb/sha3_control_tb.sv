// sha3_control_tb -- runs the control unit on its own and records what it
// makes the datapath do: every state update (the byte XORed into S[7:0],
// message or padding, decided as the update unit decides it) and every Keccak
// round (its number).  The recorded sequence is compared with one built
// independently from the sponge definition: for every absorbed block the rate
// bytes of the padded message followed by 168 - r_mode zero bytes and rounds
// 0..23; for squeezing one zero-byte update per output byte and, after each
// full rate of output, the zero fill and another permutation.  Also checks
// handshake counts, out_last, done, and the 192-cycle block latency.
module sha3_control_tb;
  import sha3_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0, in_valid = 0, in_keep = 1, in_last = 0, out_ready = 0, error = 0;
  hash_mode_e mode;
  logic [15:0] out_len;
  logic busy, done, in_ready, out_valid, out_last, mask, clear, force_pad, fd_load;
  state_sel_e sel;
  pad_sel_e psel;
  logic [7:0] rcnt, rate, in_data;
  logic [4:0] rbase;
  int checks = 0, failures = 0;

  sha3_control dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .mode_i(mode), .out_len_i(out_len),
    .busy_o(busy), .done_o(done), .in_valid_i(in_valid), .in_keep_i(in_keep),
    .in_last_i(in_last), .in_ready_o(in_ready), .out_valid_o(out_valid),
    .out_last_o(out_last), .out_ready_i(out_ready), .error_i(error), .mask_o(mask),
    .clear_o(clear), .state_sel_o(sel), .force_pad_o(force_pad), .pad_sel_o(psel),
    .ratecount_o(rcnt), .rate_o(rate), .round_base_o(rbase), .fd_load_o(fd_load));

  always #5 clk = ~clk;

  byte unsigned PADB [6] = '{8'h00, 8'h80, 8'h06, 8'h86, 8'h1F, 8'h9F};
  int RATES [6] = '{144, 136, 104, 72, 168, 136};
  int DIGEST [6] = '{28, 32, 48, 64, 0, 0};

  int events [$];     // recorded: 0..255 update byte, 256+r round r
  int outs, lasts, cycle, first_in_cycle, first_out_cycle;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && busy) begin
      if (sel == SEL_UPDATE) begin
        if (force_pad || rcnt >= rate) events.push_back(PADB[psel]);
        else begin
          events.push_back(in_data);
          checks++;
          if (!(in_valid && in_ready && in_keep)) begin
            failures++; $display("FAIL: message byte used without handshake");
          end
        end
      end else if (sel == SEL_ROUND) events.push_back(256 + rbase);
      if (in_valid && in_ready && in_keep && first_in_cycle < 0) first_in_cycle = cycle;
      if (out_valid && first_out_cycle < 0) first_out_cycle = cycle;
      if (out_valid && out_ready) begin
        outs++;
        if (out_last) lasts++;
      end
    end
  end

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(int m, int len, int olen, bit gaps);
    int exp [$];
    byte unsigned p [$];
    byte unsigned msg [$];
    int r = RATES[m];
    int n, sent;
    for (int i = 0; i < len; i++) msg.push_back(8'($urandom));
    // expected event sequence
    p = msg;
    p.push_back((m >= 4) ? 8'h1F : 8'h06);
    while (p.size() % r != 0) p.push_back(8'h00);
    p[p.size()-1] |= 8'h80;
    for (int b = 0; b < p.size() / r; b++) begin
      for (int i = 0; i < r; i++) exp.push_back(p[b*r+i]);
      for (int i = r; i < 168; i++) exp.push_back(0);
      for (int k = 0; k < 24; k++) exp.push_back(256 + k);
    end
    n = (m < 4) ? DIGEST[m] : olen;
    for (int i = 0; i < n; i++) begin
      exp.push_back(0);
      if ((i + 1) % r == 0 && i + 1 < n) begin
        for (int j = r; j < 168; j++) exp.push_back(0);
        for (int k = 0; k < 24; k++) exp.push_back(256 + k);
      end
    end
    events.delete(); outs = 0; lasts = 0; first_in_cycle = -1; first_out_cycle = -1;
    @(negedge clk);
    mode = hash_mode_e'(m); out_len = 16'(olen); start = 1;
    @(negedge clk);
    start = 0;
    sent = 0;
    // message stream; an empty message is a single last beat without a byte
    while (sent < len || (len == 0 && sent == 0)) begin
      in_valid = !gaps || ($urandom_range(0, 3) != 0);
      in_keep  = (len != 0);
      in_last  = (len == 0) || (sent == len - 1);
      in_data  = (len != 0) ? msg[sent] : 8'h00;
      @(posedge clk);
      if (in_valid && in_ready) sent++;
      if (len == 0 && in_valid && in_ready) sent = 1;
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    while (!done) begin
      out_ready = !gaps || ($urandom_range(0, 2) != 0);
      @(negedge clk);
    end
    out_ready = 0;
    check($sformatf("event sequence mode %0d len %0d (%0d vs %0d)", m, len, events.size(), exp.size()),
          events == exp);
    check("output count", outs == n);
    check("one out_last", lasts == (n > 0 ? 1 : 0));
    if (!gaps && len > 0 && len < r && n > 0)
      check($sformatf("first byte to first output = 192 cycles (%0d)", first_out_cycle - first_in_cycle),
            first_out_cycle - first_in_cycle == 192);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cycle = 0; in_data = 0; mode = MODE_SHA3_256; out_len = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 6; m++) begin
      run(m, 3, 40, 0);                  // one block, latency check
      run(m, 0, 20, 1);                  // empty message
      run(m, RATES[m] - 1, 20, 1);       // combined first/last pad byte
      run(m, RATES[m], 20, 1);           // padding in an extra block
      run(m, RATES[m] + 5, 2 * RATES[m] + 3, 1);  // two blocks, long SHAKE output
    end
    run(4, 10, 0, 0);                    // SHAKE with no output
    @(negedge clk);
    check("idle at the end", !busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
