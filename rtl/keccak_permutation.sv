// keccak_permutation -- UNROLL Keccak rounds per clock cycle.
//
// With UNROLL = 1 (the default) this is the round-based datapath: one
// combinational round whose output is written back into the state register,
// so Keccak-f[1600] takes 24 cycles.  Larger values chain UNROLL rounds
// (round_base_i, round_base_i+1, ...) in one cycle, the unrolled variant, and
// the permutation takes 24/UNROLL cycles.  UNROLL must divide 24.
//
// The parity taps (c-plane C and f-slice F) are those of the first round's
// theta layer, i.e. of the state register's present contents, which is what
// the fault-detection module checks for both the round-based and unrolled
// datapaths.
module keccak_permutation
  import sha3_pkg::*;
#(
  parameter int unsigned UNROLL = 1
) (
  input  logic [STATE_W-1:0] state_i,
  input  logic [4:0]         round_base_i,  // number of the first round applied
  output logic [STATE_W-1:0] state_o,
  output logic [319:0]       c_plane_o,
  output logic [24:0]        f_slice_o
);

  initial begin
    assert (UNROLL >= 1 && UNROLL <= NUM_ROUNDS && NUM_ROUNDS % UNROLL == 0)
      else $error("keccak_permutation: UNROLL=%0d must divide %0d", UNROLL, NUM_ROUNDS);
  end

  logic [STATE_W-1:0] chain [UNROLL+1];
  logic [319:0]       c_tap [UNROLL];
  logic [24:0]        f_tap [UNROLL];

  assign chain[0] = state_i;

  for (genvar k = 0; k < UNROLL; k++) begin : g_round
    keccak_round u_round (
      .state_i   (chain[k]),
      .round_i   (round_base_i + 5'(k)),
      .state_o   (chain[k+1]),
      .c_plane_o (c_tap[k]),
      .f_slice_o (f_tap[k])
    );
  end

  assign state_o   = chain[UNROLL];
  assign c_plane_o = c_tap[0];
  assign f_slice_o = f_tap[0];

endmodule
