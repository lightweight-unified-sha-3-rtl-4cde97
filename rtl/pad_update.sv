// pad_update -- message padding and in-place byte-wise state update.
//
// The rate part S[1343:0] of the state (r_sr = 1344 bits, the SHAKE128 rate,
// the largest of all modes) is treated as a 168-byte circular shift register:
//
//   S'[1343:0] = (b XOR S[7:0]) || (S[1343:0] >> 8),   S'[1599:1344] = S[1599:1344]
//
// where b is either the message byte or a byte from the padding multiplexer.
// After 168 updates every rate byte is back at its original position, having
// been XORed with exactly one input byte.  The capacity part S[1599:1344] is
// passed through unchanged; only the Keccak round writes it.
//
// Byte selection (combinational):
//   * force_pad_i = 1           -> padding byte pad_sel_i
//   * ratecount_i >= rate_i     -> padding byte (the controller selects 0x00):
//                                  bytes past the mode's rate r_mode are only
//                                  rotated, widening the capacity of that mode
//   * otherwise                 -> message byte msg_i
// Padding bytes: 0x00, 0x80 (closing bit), 0x06 / 0x86 (SHA-3 suffix 01 plus
// pad10*1), 0x1F / 0x9F (SHAKE suffix 1111 plus pad10*1).
// The same path with a zero byte is used while squeezing: the hash byte is read
// from S[7:0] and the state rotates by one byte.
//
// The shift-register update, the 1344/256 split and the comparator follow the
// published architecture.  The padding multiplexer has six codes, two per pad
// kind (plain and merged with the closing 1), where the published text speaks
// of a five-input multiplexer; the byte values follow FIPS 202 byte order.
module pad_update
  import sha3_pkg::*;
(
  input  logic [STATE_W-1:0] state_i,
  input  logic [7:0]         msg_i,
  input  logic               force_pad_i,
  input  pad_sel_e           pad_sel_i,
  input  logic [7:0]         ratecount_i,  // byte position within the rate block
  input  logic [7:0]         rate_i,       // r_mode in bytes
  output logic [STATE_W-1:0] state_o
);

  logic       use_pad;
  logic [7:0] in_byte;

  always_comb begin
    use_pad = force_pad_i | (rate_i <= ratecount_i);
    in_byte = use_pad ? pad_byte(pad_sel_i) : msg_i;
    state_o = {state_i[RATE_SR +: CAP_SR],
               in_byte ^ state_i[7:0],
               state_i[RATE_SR-1:8]};
  end

endmodule
