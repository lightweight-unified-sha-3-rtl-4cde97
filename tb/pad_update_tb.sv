// pad_update_tb -- checks the byte-wise in-place update against a byte-array
// model of the state: the new top rate byte (byte 167) must be input XOR old
// byte 0, bytes 0..166 must be old bytes 1..167, the capacity bytes 168..199
// unchanged.  Covers every pad byte, the message path, and the ratecount >=
// r_mode comparator for all six rates; also checks that 168 updates with zero
// bytes restore the original state.
module pad_update_tb;
  import sha3_pkg::*;

  logic [1599:0] s_in, s_out;
  logic [7:0]    msg, rcount, rate;
  logic          force_pad;
  pad_sel_e      psel;
  int checks = 0, failures = 0;

  pad_update dut (.state_i(s_in), .msg_i(msg), .force_pad_i(force_pad), .pad_sel_i(psel),
                  .ratecount_i(rcount), .rate_i(rate), .state_o(s_out));

  // expected pad bytes, indexed by select code
  byte unsigned PADB [6] = '{8'h00, 8'h80, 8'h06, 8'h86, 8'h1F, 8'h9F};
  byte unsigned RATES [6] = '{144, 136, 104, 72, 168, 136};

  function automatic logic [1599:0] rand_state();
    logic [1599:0] v;
    for (int i = 0; i < 50; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic expect_shift(byte unsigned b);
    logic ok = 1'b1;
    if (s_out[1343:1336] != (b ^ s_in[7:0])) ok = 1'b0;
    for (int i = 0; i < 167; i++) if (s_out[8*i +: 8] != s_in[8*(i+1) +: 8]) ok = 1'b0;
    for (int i = 168; i < 200; i++) if (s_out[8*i +: 8] != s_in[8*i +: 8]) ok = 1'b0;
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: force=%0b sel=%0d rc=%0d rate=%0d msg=%h", force_pad, psel, rcount, rate, msg);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1599:0] orig;
    // forced padding bytes
    for (int p = 0; p < 6; p++) begin
      s_in = rand_state(); msg = 8'($urandom); force_pad = 1'b1; psel = pad_sel_e'(p);
      rcount = 8'd3; rate = 8'd136;
      #1 expect_shift(PADB[p]);
    end
    // comparator: message below r_mode, zero byte from r_mode on
    for (int m = 0; m < 6; m++) begin
      for (int k = 0; k < 40; k++) begin
        s_in = rand_state(); msg = 8'($urandom); force_pad = 1'b0; psel = PAD_ZERO;
        rate = RATES[m];
        rcount = (k < 4) ? 8'(RATES[m] - 2 + k) : 8'($urandom_range(0, 167));
        #1 expect_shift((rcount < rate) ? msg : 8'h00);
      end
    end
    // a full pass of 168 zero-byte updates is the identity
    orig = rand_state(); s_in = orig; force_pad = 1'b1; psel = PAD_ZERO; rate = 8'd72;
    for (int i = 0; i < 168; i++) begin
      rcount = 8'(i);
      #1 s_in = s_out;
    end
    checks++;
    if (s_in != orig) begin failures++; $display("FAIL: 168 rotations not identity"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
