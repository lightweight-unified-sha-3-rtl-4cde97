// sha3_control -- control unit of the unified SHA-3/SHAKE engine.
//
// Sequences one hash: absorb the message one byte per cycle, pad, rotate the
// unused part of the 168-byte shift register, run the permutation, squeeze the
// requested number of output bytes one per cycle.  It holds the mode-specific
// rate r_mode (in bytes) and the ratecount, the byte position inside the
// current rate block.
//
// Phases (state_e):
//   ABSORB   in_ready_o = 1; every kept input byte is XORed into S[7:0] and the
//            rate rotates one byte (ratecount + 1).  A beat with in_last_i ends
//            the message; a last beat with in_keep_i = 0 carries no byte (used
//            for an empty message or a message ending on a block boundary).
//   PAD      padding bytes: first 0x06 (SHA-3) / 0x1F (SHAKE), then 0x00, the
//            last rate byte 0x80; a single remaining byte gets 0x86 / 0x9F.
//            If the message filled the block exactly, padding is a whole
//            extra block after the permutation.
//   FILL     bytes r_mode .. 167 are rotated with a zero byte so that the rate
//            returns to its original alignment (none for SHAKE128).
//   PERMUTE  24/UNROLL cycles of Keccak rounds.
//   SQUEEZE  out_valid_o = 1 with S[7:0]; each accepted byte rotates the rate
//            with a zero byte.  After r_mode bytes the controller FILLs and
//            PERMUTEs again and continues squeezing (SHAKE outputs longer than
//            the rate).
//   DONE     one-cycle done_o pulse, then IDLE.
// Every rate block therefore costs 168 + 24/UNROLL cycles, whatever the mode.
//
// The digest length is fixed for SHA-3 modes (28/32/48/64 bytes) and taken
// from out_len_i at start for SHAKE (0 produces no output).  start_i is only
// accepted in IDLE; it clears the state and the sticky fault flag.  mask_o
// selects the zero byte in the output multiplexer once a fault was detected.
//
// The ratecount mechanism, the zero fill and the re-permutation while
// squeezing follow the published description; the state machine itself, the
// valid/ready/last/keep handshakes, the 16-bit output length and the choice to
// keep running (masked) after a fault are this design's own, since the source
// describes the control unit only by its function.
module sha3_control
  import sha3_pkg::*;
#(
  parameter int unsigned UNROLL    = 1,
  parameter int unsigned OUT_LEN_W = 16
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // command
  input  logic                 start_i,
  input  hash_mode_e           mode_i,
  input  logic [OUT_LEN_W-1:0] out_len_i,
  output logic                 busy_o,
  output logic                 done_o,
  // message byte stream handshake
  input  logic                 in_valid_i,
  input  logic                 in_keep_i,
  input  logic                 in_last_i,
  output logic                 in_ready_o,
  // hash byte stream handshake
  output logic                 out_valid_o,
  output logic                 out_last_o,
  input  logic                 out_ready_i,
  // fault detection
  input  logic                 error_i,
  output logic                 mask_o,
  // datapath control
  output logic                 clear_o,
  output state_sel_e           state_sel_o,
  output logic                 force_pad_o,
  output pad_sel_e             pad_sel_o,
  output logic [7:0]           ratecount_o,
  output logic [7:0]           rate_o,
  output logic [4:0]           round_base_o,
  output logic                 fd_load_o
);

  typedef enum logic [2:0] {
    S_IDLE, S_ABSORB, S_PAD, S_FILL, S_PERMUTE, S_SQUEEZE, S_DONE
  } state_e;

  localparam logic [7:0] LAST_SR_BYTE = 8'(RATE_SR_BYTES - 1);  // 167
  localparam logic [4:0] LAST_ROUND   = 5'(NUM_ROUNDS - UNROLL);

  state_e               st_q, st_d;
  hash_mode_e           mode_q, mode_d;
  logic [7:0]           rate_q, rate_d;
  logic [7:0]           rc_q, rc_d;        // ratecount
  logic [4:0]           round_q, round_d;
  logic [OUT_LEN_W-1:0] olen_q, olen_d, ocnt_q, ocnt_d;
  logic                 padded_q, padded_d;     // padding complete
  logic                 pend_q, pend_d;         // padding owed in next block
  logic                 first_q, first_d;       // next pad byte is the first

  logic at_rate_end;
  assign at_rate_end = (rc_q == rate_q - 8'd1);

  always_comb begin
    st_d     = st_q;
    mode_d   = mode_q;
    rate_d   = rate_q;
    rc_d     = rc_q;
    round_d  = round_q;
    olen_d   = olen_q;
    ocnt_d   = ocnt_q;
    padded_d = padded_q;
    pend_d   = pend_q;
    first_d  = first_q;

    clear_o     = 1'b0;
    state_sel_o = SEL_HOLD;
    force_pad_o = 1'b0;
    pad_sel_o   = PAD_ZERO;
    in_ready_o  = 1'b0;
    out_valid_o = 1'b0;
    out_last_o  = 1'b0;
    done_o      = 1'b0;

    unique case (st_q)
      S_IDLE: begin
        if (start_i) begin
          clear_o  = 1'b1;
          mode_d   = mode_i;
          rate_d   = rate_bytes(mode_i);
          olen_d   = is_shake(mode_i) ? out_len_i : OUT_LEN_W'(digest_bytes(mode_i));
          rc_d     = '0;
          round_d  = '0;
          ocnt_d   = '0;
          padded_d = 1'b0;
          pend_d   = 1'b0;
          first_d  = 1'b1;
          st_d     = S_ABSORB;
        end
      end

      S_ABSORB: begin
        in_ready_o = 1'b1;
        if (in_valid_i) begin
          if (in_keep_i) begin
            state_sel_o = SEL_UPDATE;
            rc_d        = rc_q + 8'd1;
            if (at_rate_end) begin
              pend_d = in_last_i;
              st_d   = (rate_q == 8'(RATE_SR_BYTES)) ? S_PERMUTE : S_FILL;
              if (rate_q == 8'(RATE_SR_BYTES)) rc_d = '0;
            end else if (in_last_i) begin
              st_d = S_PAD;
            end
          end else if (in_last_i) begin
            st_d = S_PAD;
          end
        end
      end

      S_PAD: begin
        state_sel_o = SEL_UPDATE;
        force_pad_o = 1'b1;
        if (first_q)
          pad_sel_o = is_shake(mode_q) ? (at_rate_end ? PAD_SHAKE_LAST : PAD_SHAKE)
                                       : (at_rate_end ? PAD_SHA3_LAST  : PAD_SHA3);
        else
          pad_sel_o = at_rate_end ? PAD_LAST : PAD_ZERO;
        first_d = 1'b0;
        rc_d    = rc_q + 8'd1;
        if (at_rate_end) begin
          padded_d = 1'b1;
          st_d     = (rate_q == 8'(RATE_SR_BYTES)) ? S_PERMUTE : S_FILL;
          if (rate_q == 8'(RATE_SR_BYTES)) rc_d = '0;
        end
      end

      S_FILL: begin
        // ratecount >= r_mode: the update unit's comparator selects the pad
        // multiplexer, which supplies a zero byte
        state_sel_o = SEL_UPDATE;
        pad_sel_o   = PAD_ZERO;
        rc_d        = rc_q + 8'd1;
        if (rc_q == LAST_SR_BYTE) begin
          rc_d = '0;
          st_d = S_PERMUTE;
        end
      end

      S_PERMUTE: begin
        state_sel_o = SEL_ROUND;
        round_d     = round_q + 5'(UNROLL);
        if (round_q == LAST_ROUND) begin
          round_d = '0;
          rc_d    = '0;
          if (padded_q) begin
            st_d = (ocnt_q == olen_q) ? S_DONE : S_SQUEEZE;
          end else if (pend_q) begin
            pend_d = 1'b0;
            st_d   = S_PAD;
          end else begin
            st_d = S_ABSORB;
          end
        end
      end

      S_SQUEEZE: begin
        out_valid_o = 1'b1;
        out_last_o  = (ocnt_q == olen_q - OUT_LEN_W'(1));
        if (out_ready_i) begin
          state_sel_o = SEL_UPDATE;
          force_pad_o = 1'b1;
          pad_sel_o   = PAD_ZERO;
          rc_d        = rc_q + 8'd1;
          ocnt_d      = ocnt_q + OUT_LEN_W'(1);
          if (out_last_o) begin
            st_d = S_DONE;
          end else if (at_rate_end) begin
            st_d = (rate_q == 8'(RATE_SR_BYTES)) ? S_PERMUTE : S_FILL;
            if (rate_q == 8'(RATE_SR_BYTES)) rc_d = '0;
          end
        end
      end

      S_DONE: begin
        done_o = 1'b1;
        st_d   = S_IDLE;
      end

      default: st_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q     <= S_IDLE;
      mode_q   <= MODE_SHA3_256;
      rate_q   <= 8'(RATE_SR_BYTES);
      rc_q     <= '0;
      round_q  <= '0;
      olen_q   <= '0;
      ocnt_q   <= '0;
      padded_q <= 1'b0;
      pend_q   <= 1'b0;
      first_q  <= 1'b0;
    end else begin
      st_q     <= st_d;
      mode_q   <= mode_d;
      rate_q   <= rate_d;
      rc_q     <= rc_d;
      round_q  <= round_d;
      olen_q   <= olen_d;
      ocnt_q   <= ocnt_d;
      padded_q <= padded_d;
      pend_q   <= pend_d;
      first_q  <= first_d;
    end
  end

  assign busy_o       = (st_q != S_IDLE);
  assign mask_o       = error_i;
  assign ratecount_o  = rc_q;
  assign rate_o       = rate_q;
  assign round_base_o = round_q;
  assign fd_load_o    = clear_o | (state_sel_o != SEL_HOLD);

  // ratecount never leaves the 168-byte shift register
  a_rc_range: assert property (@(posedge clk_i) disable iff (!rst_ni) rc_q <= LAST_SR_BYTE);

endmodule
