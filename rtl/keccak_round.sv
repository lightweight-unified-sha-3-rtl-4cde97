// keccak_round -- one combinational Keccak-f[1600] round with parity taps.
//
// Computes theta, rho, pi, chi and iota of FIPS 202 on the 1600-bit state
// `state_i` for round number `round_i` (0..23) and returns the result on
// `state_o`.  The round is purely combinational; the engine registers its
// output in the state register, so one round costs one clock cycle.
//
// Besides the round result the block exports two parity views of its *input*
// state, which the fault-detection module compares against values it stored
// when the state was written:
//   c_plane_o[64*x+z] = C[x,z] = XOR_y S[x,y,z]   (theta's column sums)
//   f_slice_o[5*y+x]  = F[x,y] = XOR_z S[x,y,z]   (lane sums)
// The c-plane is the theta layer's own intermediate, so the column check costs
// no extra XOR tree here; the f-slice is the extension the design adds to the
// theta layer for the two-dimensional (z-sheet) check.
//
// The step mappings follow FIPS 202 (rho: lane rotation by the standard
// offsets, pi: A'[x,y] = A[(x+3y) mod 5, x]).  Round constants and rho offsets
// are generated from their definitions in sha3_pkg.
module keccak_round
  import sha3_pkg::*;
(
  input  logic [STATE_W-1:0] state_i,
  input  logic [4:0]         round_i,
  output logic [STATE_W-1:0] state_o,
  output logic [319:0]       c_plane_o,
  output logic [24:0]        f_slice_o
);

  localparam rc_table_t  RC  = gen_rc_table();
  localparam rho_table_t RHO = gen_rho_table();

  logic [LANE_W-1:0] a     [25];  // input lanes, index 5*y+x
  logic [LANE_W-1:0] c     [5];   // column sums per sheet x
  logic [LANE_W-1:0] d     [5];
  logic [LANE_W-1:0] th    [25];  // after theta
  logic [LANE_W-1:0] b     [25];  // after rho and pi
  logic [LANE_W-1:0] chi   [25];
  logic [LANE_W-1:0] rc;

  function automatic logic [LANE_W-1:0] rotl(logic [LANE_W-1:0] v, int unsigned n);
    if (n == 0) return v;
    return (v << n) | (v >> (LANE_W - n));
  endfunction

  always_comb begin
    for (int i = 0; i < 25; i++) a[i] = state_i[LANE_W*i +: LANE_W];

    // theta
    for (int x = 0; x < 5; x++)
      c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) th[i] = a[i] ^ d[i%5];

    // rho and pi: B[y, 2x+3y] = ROT(A[x,y], r[x,y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[5*((2*x+3*y)%5) + y] = rotl(th[5*y+x], RHO[5*y+x]);

    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        chi[5*y+x] = b[5*y+x] ^ (~b[5*y+(x+1)%5] & b[5*y+(x+2)%5]);

    // iota
    rc = (round_i < 5'(NUM_ROUNDS)) ? RC[round_i] : '0;
    chi[0] = chi[0] ^ rc;

    for (int i = 0; i < 25; i++) state_o[LANE_W*i +: LANE_W] = chi[i];

    // parity taps of the input state
    for (int x = 0; x < 5; x++) c_plane_o[LANE_W*x +: LANE_W] = c[x];
    for (int i = 0; i < 25; i++) f_slice_o[i] = ^a[i];
  end

endmodule
