// sha3_shake_engine -- unified SHA-3 / SHAKE hash engine with a
// fault-resilient Keccak state.
//
// One engine serves SHA3-224/256/384/512, SHAKE128 and SHAKE256.  Message and
// hash travel one byte per cycle.  Instead of a separate input buffer, the
// 1344-bit rate part of the 1600-bit state is used in place as a byte-wide
// circular shift register: every message byte is XORed into the state's low
// byte while the rate rotates by one byte, and bytes beyond the mode's own
// rate are rotated with zero.  The 256-bit capacity part S[1599:1344] is only
// written by the Keccak round.  Keccak-f[1600] runs round-based (UNROLL = 1,
// 24 cycles) or with UNROLL rounds per cycle.
//
// A fault-detection module (PROTECTION, default z-sheet) keeps column, lane
// and lane-column parities of every value written into the state register and
// compares them one cycle later with the parities the theta layer computes
// from the register contents.  On a mismatch error_o rises (sticky until the
// next start) and the hash output is forced to zero.
//
// Interface
//   start_i / mode_i / out_len_i : start a hash in IDLE (out_len_i in bytes,
//                                  SHAKE only; SHA-3 digests have fixed length)
//   in_valid_i / in_ready_o / in_data_i / in_keep_i / in_last_i
//                                : message bytes; in_last_i marks the final
//                                  beat, in_keep_i = 0 makes it carry no byte
//   out_valid_o / out_ready_i / out_data_o / out_last_o : hash bytes
//   busy_o, done_o (one-cycle pulse at the end), error_o
// Timing: each rate block of the message costs 168 + 24/UNROLL cycles (192
// round-based) from its first byte, whatever the mode, if bytes arrive every
// cycle; the first hash byte is valid 192 cycles after the first message byte
// of a one-block message.
module sha3_shake_engine
  import sha3_pkg::*;
#(
  parameter protection_e PROTECTION = PROT_ZSHEET,
  parameter int unsigned UNROLL     = 1,
  parameter int unsigned OUT_LEN_W  = 16
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 start_i,
  input  hash_mode_e           mode_i,
  input  logic [OUT_LEN_W-1:0] out_len_i,
  output logic                 busy_o,
  output logic                 done_o,
  input  logic                 in_valid_i,
  input  logic [7:0]           in_data_i,
  input  logic                 in_keep_i,
  input  logic                 in_last_i,
  output logic                 in_ready_o,
  output logic                 out_valid_o,
  output logic [7:0]           out_data_o,
  output logic                 out_last_o,
  input  logic                 out_ready_i,
  output logic                 error_o
);

  logic [STATE_W-1:0] state_q, state_d, upd_state, rnd_state;
  logic [319:0]       c_plane;
  logic [24:0]        f_slice;
  logic               clear, force_pad, fd_load, mask;
  state_sel_e         state_sel;
  pad_sel_e           pad_sel;
  logic [7:0]         ratecount, rate;
  logic [4:0]         round_base;

  sha3_control #(.UNROLL(UNROLL), .OUT_LEN_W(OUT_LEN_W)) u_control (
    .clk_i, .rst_ni,
    .start_i, .mode_i, .out_len_i, .busy_o, .done_o,
    .in_valid_i, .in_keep_i, .in_last_i, .in_ready_o,
    .out_valid_o, .out_last_o, .out_ready_i,
    .error_i      (error_o),
    .mask_o       (mask),
    .clear_o      (clear),
    .state_sel_o  (state_sel),
    .force_pad_o  (force_pad),
    .pad_sel_o    (pad_sel),
    .ratecount_o  (ratecount),
    .rate_o       (rate),
    .round_base_o (round_base),
    .fd_load_o    (fd_load)
  );

  pad_update u_pad_update (
    .state_i     (state_q),
    .msg_i       (in_data_i),
    .force_pad_i (force_pad),
    .pad_sel_i   (pad_sel),
    .ratecount_i (ratecount),
    .rate_i      (rate),
    .state_o     (upd_state)
  );

  keccak_permutation #(.UNROLL(UNROLL)) u_keccak (
    .state_i      (state_q),
    .round_base_i (round_base),
    .state_o      (rnd_state),
    .c_plane_o    (c_plane),
    .f_slice_o    (f_slice)
  );

  state_register u_state (
    .clk_i, .rst_ni,
    .clear_i   (clear),
    .sel_i     (state_sel),
    .update_i  (upd_state),
    .round_i   (rnd_state),
    .state_d_o (state_d),
    .state_q_o (state_q)
  );

  fd_module #(.PROTECTION(PROTECTION)) u_fd (
    .clk_i, .rst_ni,
    .load_i      (fd_load),
    .state_d_i   (state_d),
    .c_plane_i   (c_plane),
    .f_slice_i   (f_slice),
    .clear_err_i (clear),
    .error_o     (error_o),
    .mismatch_o  ()
  );

  // output masking: the state's low byte, or zero once a fault was seen
  assign out_data_o = mask ? 8'h00 : state_q[7:0];

  // byte-stream rule: an offered hash byte stays until it is taken
  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    out_valid_o && !out_ready_i && !mask |=> out_valid_o && $stable(out_data_o));

endmodule
