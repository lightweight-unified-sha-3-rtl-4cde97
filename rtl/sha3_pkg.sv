// sha3_pkg -- shared types and constants of the unified SHA-3/SHAKE engine.
//
// State layout: the 1600-bit Keccak state is a flat vector s[1599:0] with
// bit S[x,y,z] at index 64*(5*y + x) + z, as in FIPS 202.  Byte 0 of the state
// (s[7:0]) is therefore the low byte of lane (0,0); this is the byte that the
// engine XORs message bytes into and reads hash bytes from.
//
// The c-plane C[x,z] (column sums) is packed as c[64*x + z]; the f-slice
// F[x,y] (lane sums) is packed as f[5*y + x].
//
// The round constants and rho offsets are not pasted in as numbers: they are
// computed at elaboration time from the FIPS 202 definitions (the rc() LFSR
// x^8+x^6+x^5+x^4+1 and the (x,y) -> (y, 2x+3y) walk for rho).
package sha3_pkg;

  localparam int unsigned STATE_W      = 1600;  // b = 5 x 5 x 64
  localparam int unsigned LANE_W       = 64;
  localparam int unsigned RATE_SR      = 1344;  // r_sr: shift-register part, SHAKE128 rate
  localparam int unsigned CAP_SR       = 256;   // c_sr: only written by the Keccak round
  localparam int unsigned RATE_SR_BYTES = RATE_SR / 8;  // 168
  localparam int unsigned NUM_ROUNDS   = 24;    // n_r = 12 + 2l, l = 6

  // The six standard hash modes.
  typedef enum logic [2:0] {
    MODE_SHA3_224 = 3'd0,
    MODE_SHA3_256 = 3'd1,
    MODE_SHA3_384 = 3'd2,
    MODE_SHA3_512 = 3'd3,
    MODE_SHAKE128 = 3'd4,
    MODE_SHAKE256 = 3'd5
  } hash_mode_e;

  // Padding-byte multiplexer select (figure: inputs 0, 1 "Last PAD",
  // 2-3 "SHA-3 PAD", 4-5 "SHAKE PAD").  The odd code of each pair is the
  // first pad byte merged with the final 1 bit, used when only one byte of
  // the block is left for padding.
  typedef enum logic [2:0] {
    PAD_ZERO       = 3'd0,  // 0x00
    PAD_LAST       = 3'd1,  // 0x80 : closing 1 of pad10*1
    PAD_SHA3       = 3'd2,  // 0x06 : suffix 01, then the opening 1
    PAD_SHA3_LAST  = 3'd3,  // 0x86
    PAD_SHAKE      = 3'd4,  // 0x1F : suffix 1111, then the opening 1
    PAD_SHAKE_LAST = 3'd5   // 0x9F
  } pad_sel_e;

  // State-register input multiplexer (figure inputs 0, 1, 2).
  typedef enum logic [1:0] {
    SEL_UPDATE = 2'd0,  // padding and state update unit (byte shift)
    SEL_ROUND  = 2'd1,  // output of the Keccak round(s)
    SEL_HOLD   = 2'd2   // keep the state
  } state_sel_e;

  // Fault-detection variants.
  typedef enum logic [1:0] {
    PROT_NONE   = 2'd0,
    PROT_CPLANE = 2'd1,  // column parity only
    PROT_ZSHEET = 2'd2   // column + lane parity + parity of the lane-parity register
  } protection_e;

  typedef logic [LANE_W-1:0] rc_table_t [NUM_ROUNDS];
  typedef int unsigned       rho_table_t [25];

  // Mode-specific rate r_mode in bytes.
  function automatic logic [7:0] rate_bytes(hash_mode_e mode);
    case (mode)
      MODE_SHA3_224: return 8'd144;  // 1152 bits
      MODE_SHA3_256: return 8'd136;  // 1088
      MODE_SHA3_384: return 8'd104;  //  832
      MODE_SHA3_512: return 8'd72;   //  576
      MODE_SHAKE128: return 8'd168;  // 1344
      MODE_SHAKE256: return 8'd136;  // 1088
      default:       return 8'd136;
    endcase
  endfunction

  // Fixed digest length in bytes of the SHA-3 modes (0 for the XOFs).
  function automatic logic [7:0] digest_bytes(hash_mode_e mode);
    case (mode)
      MODE_SHA3_224: return 8'd28;
      MODE_SHA3_256: return 8'd32;
      MODE_SHA3_384: return 8'd48;
      MODE_SHA3_512: return 8'd64;
      default:       return 8'd0;
    endcase
  endfunction

  function automatic logic is_shake(hash_mode_e mode);
    return (mode == MODE_SHAKE128) || (mode == MODE_SHAKE256);
  endfunction

  function automatic logic [7:0] pad_byte(pad_sel_e sel);
    case (sel)
      PAD_ZERO:       return 8'h00;
      PAD_LAST:       return 8'h80;
      PAD_SHA3:       return 8'h06;
      PAD_SHA3_LAST:  return 8'h86;
      PAD_SHAKE:      return 8'h1F;
      PAD_SHAKE_LAST: return 8'h9F;
      default:        return 8'h00;
    endcase
  endfunction

  // FIPS 202 Algorithm 5: rc(t), one output bit of an 8-bit LFSR.
  function automatic logic rc_bit(int unsigned t);
    logic [8:0] r;
    if (t % 255 == 0) return 1'b1;
    r = 9'b000000001;  // R = 10000000 (R[0] = 1)
    for (int unsigned i = 1; i <= t % 255; i++) begin
      r = {r[7:0], 1'b0};  // R = 0 || R
      r[0] = r[0] ^ r[8];
      r[4] = r[4] ^ r[8];
      r[5] = r[5] ^ r[8];
      r[6] = r[6] ^ r[8];
      r[8] = 1'b0;         // Trunc8
    end
    return r[0];
  endfunction

  // FIPS 202 Algorithm 6: RC[2^j - 1] = rc(j + 7*i_r), j = 0..6.
  function automatic rc_table_t gen_rc_table();
    rc_table_t t;
    logic [LANE_W-1:0] lane;
    for (int unsigned ir = 0; ir < NUM_ROUNDS; ir++) begin
      lane = '0;
      for (int unsigned j = 0; j <= 6; j++)
        lane[(1 << j) - 1] = rc_bit(j + 7 * ir);
      t[ir] = lane;
    end
    return t;
  endfunction

  // FIPS 202 Algorithm 2: rho offsets, indexed by 5*y + x.
  function automatic rho_table_t gen_rho_table();
    rho_table_t t;
    int unsigned x, y, nx;
    for (int unsigned i = 0; i < 25; i++) t[i] = 0;
    x = 1; y = 0;
    for (int unsigned k = 0; k < 24; k++) begin
      t[5 * y + x] = ((k + 1) * (k + 2) / 2) % 64;
      nx = y;
      y  = (2 * x + 3 * y) % 5;
      x  = nx;
    end
    return t;
  endfunction

endpackage
