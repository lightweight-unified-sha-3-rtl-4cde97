// keccak_round_tb -- checks one combinational round against the reference
// model for all 24 round numbers on random states, and checks the c-plane and
// f-slice parity taps.
module keccak_round_tb;
  import sha3_ref_pkg::*;

  logic [1599:0] s_in, s_out;
  logic [4:0]    rnd;
  logic [319:0]  c;
  logic [24:0]   f;
  int checks = 0, failures = 0;

  keccak_round dut (.state_i(s_in), .round_i(rnd), .state_o(s_out), .c_plane_o(c), .f_slice_o(f));

  function automatic logic [1599:0] rand_state();
    logic [1599:0] v;
    for (int i = 0; i < 50; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 10; t++) begin
      for (int r = 0; r < 24; r++) begin
        s_in = (t == 0) ? '0 : rand_state();
        rnd  = 5'(r);
        #1;
        checks++;
        if (s_out !== round_vec(s_in, r)) begin
          failures++;
          $display("round %0d mismatch (trial %0d)", r, t);
        end
        checks++;
        if (c !== c_plane(s_in) || f !== f_slice(s_in)) begin
          failures++;
          $display("parity tap mismatch round %0d", r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
