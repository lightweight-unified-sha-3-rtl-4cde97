// state_register -- the 1600-bit Keccak state register and its input mux.
//
// Each clock the register loads S', chosen by sel_i from the padding and state
// update unit (SEL_UPDATE), the Keccak round output (SEL_ROUND) or its own
// contents (SEL_HOLD).  clear_i overrides the mux with zero to start a new hash
// (synchronous; an active-low asynchronous reset also clears it).  S' is
// exported on state_d_o because the fault-detection module computes its
// reference parities from exactly the value being written.
//
// The three-input multiplexer is the published structure; the clear input and
// the reset value are this design's choice (the source does not say how the
// state is initialised).  Timing: one register stage, S' is combinational.
module state_register
  import sha3_pkg::*;
(
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               clear_i,
  input  state_sel_e         sel_i,
  input  logic [STATE_W-1:0] update_i,
  input  logic [STATE_W-1:0] round_i,
  output logic [STATE_W-1:0] state_d_o,
  output logic [STATE_W-1:0] state_q_o
);

  always_comb begin
    if (clear_i) state_d_o = '0;
    else begin
      case (sel_i)
        SEL_UPDATE: state_d_o = update_i;
        SEL_ROUND:  state_d_o = round_i;
        default:    state_d_o = state_q_o;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) state_q_o <= '0;
    else         state_q_o <= state_d_o;
  end

endmodule
