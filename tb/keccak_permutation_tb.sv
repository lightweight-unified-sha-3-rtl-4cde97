// keccak_permutation_tb -- runs the full Keccak-f[1600] permutation through the
// round-based datapath (UNROLL = 1, 24 steps) and an unrolled one (UNROLL = 4,
// 6 steps), each step fed back as the registered state would be, and compares
// with the reference model.  Also checks the published first two lanes of
// Keccak-f[1600] applied to the all-zero state.
module keccak_permutation_tb;
  import sha3_ref_pkg::*;

  logic [1599:0] s1_in, s1_out, s4_in, s4_out;
  logic [4:0]    b1, b4;
  logic [319:0]  c1, c4;
  logic [24:0]   f1, f4;
  int checks = 0, failures = 0;

  keccak_permutation #(.UNROLL(1)) dut1 (.state_i(s1_in), .round_base_i(b1), .state_o(s1_out),
                                         .c_plane_o(c1), .f_slice_o(f1));
  keccak_permutation #(.UNROLL(4)) dut4 (.state_i(s4_in), .round_base_i(b4), .state_o(s4_out),
                                         .c_plane_o(c4), .f_slice_o(f4));

  function automatic logic [1599:0] rand_state();
    logic [1599:0] v;
    for (int i = 0; i < 50; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1599:0] start, exp;
    for (int t = 0; t < 6; t++) begin
      start = (t == 0) ? '0 : rand_state();
      exp   = keccak_f(start);
      s1_in = start;
      for (int r = 0; r < 24; r++) begin
        b1 = 5'(r);
        #1;
        if (r == 0) check("UNROLL=1 taps", c1 == c_plane(start) && f1 == f_slice(start));
        s1_in = s1_out;
      end
      check("UNROLL=1 permutation", s1_in == exp);
      s4_in = start;
      for (int r = 0; r < 24; r += 4) begin
        b4 = 5'(r);
        #1;
        check("UNROLL=4 taps of first round", c4 == c_plane(s4_in) && f4 == f_slice(s4_in));
        s4_in = s4_out;
      end
      check("UNROLL=4 permutation", s4_in == exp);
      if (t == 0) begin
        check("Keccak-f(0) lane 0", s1_in[63:0]   == 64'hF1258F7940E1DDE7);
        check("Keccak-f(0) lane 1", s1_in[127:64] == 64'h84D5CCF933C0478A);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
