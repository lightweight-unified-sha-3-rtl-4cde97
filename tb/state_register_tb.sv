// state_register_tb -- checks reset, synchronous clear, and the three inputs
// of the state multiplexer (update unit, Keccak round, hold), including that
// state_d_o always equals the value loaded at the next clock edge.
module state_register_tb;
  import sha3_pkg::*;

  logic clk = 0, rst_n = 0, clear;
  state_sel_e sel;
  logic [1599:0] upd, rnd, d, q, model;
  int checks = 0, failures = 0;

  state_register dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .sel_i(sel),
                      .update_i(upd), .round_i(rnd), .state_d_o(d), .state_q_o(q));

  always #5 clk = ~clk;

  function automatic logic [1599:0] rand_state();
    logic [1599:0] v;
    for (int i = 0; i < 50; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; sel = SEL_HOLD; upd = '0; rnd = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++; if (q != '0) begin failures++; $display("FAIL: reset"); end
    rst_n = 1;
    model = '0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      upd = rand_state(); rnd = rand_state();
      sel = state_sel_e'($urandom_range(0, 2));
      clear = ($urandom_range(0, 9) == 0);
      if (clear) model = '0;
      else case (sel)
        SEL_UPDATE: model = upd;
        SEL_ROUND:  model = rnd;
        default:    model = q;
      endcase
      #1;
      checks++; if (d != model) begin failures++; $display("FAIL: state_d sel=%0d", sel); end
      @(posedge clk); #1;
      checks++; if (q != model) begin failures++; $display("FAIL: q sel=%0d clear=%0b", sel, clear); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
