# A byte-serial SHA-3 / SHAKE engine with a parity-checked Keccak state

SHA-3 and SHAKE are built on one permutation, Keccak-f[1600]. It works on a 1600-bit state. The six standard
functions (SHA3-224/256/384/512, SHAKE128, SHAKE256) differ only in two things. The first is where the state is
split into a *rate* part, which takes message bytes, and a *capacity* part. The second is the padding suffix.
This RTL serves all six modes with one engine and keeps the cost close to the bare 1600-bit state register:

* **No message buffer and no rate-sized multiplexers.** Message bytes and hash bytes pass one byte per clock
  through the state's lowest byte. The 1344-bit rate part of the state works as a circular byte shift register.
* **A protected state register.** A small fault-detection unit stores parities of every value written into
  the state. One cycle later it compares them with parities of what the register actually holds. The
  default *z-sheet* scheme stores 320 column parities, 25 lane parities and 5 parities of the lane parities.
  It catches every pattern of up to three flipped state bits. After a detected fault the engine outputs only
  zero bytes.

The engine was described in a published paper on a unified SHA-3/SHAKE architecture with a fault-resilient
state. This RTL follows that paper's datapath. It fills in the details the paper leaves open: the control
state machine, the handshakes, initialisation and the error policy. Each of these choices is listed under
"Departures and own choices" below.

## Block diagram

```
               in_data (8)                                       out_data (8)
                   |                                                  ^
                   v                                                  | mask ? 0 : S[7:0]
            +--------------+   upd   +------+                         |
   +------->|  pad_update  |-------->| 0    |     S'     +---------+  |
   |        |  (byte XOR + |         |      |----------->|  state  |--+-----------------+
   |        |   rotate)    |   rnd   | 1    |     |      | register|   S (1600)        |
   |        +--------------+  +----->|      |     |      +---------+                   |
   |               ^          |   +->| 2    |     |                                    |
   |               |          |   |  +------+     |                                    |
   |        +--------------+  |   |   sel         v                                    |
   |        | sha3_control |  |   +--- S     +-----------+   C (320), F (25)    +-------------------+
   |        |  ratecount,  |  +-------------<|           |<---------------------| keccak_permutation|
   |        |  rounds, ... |                 | fd_module |                      | (UNROLL rounds,   |
   |        +--------------+<-- error -------|  C' F'    |                      |  round-based = 1) |
   |                                         |  C'_F'    |                      +-------------------+
   +-- S (1600) -----------------------------+-----------+                                ^
                                                                                         S
```

| Module | Role |
|---|---|
| `sha3_shake_engine` | Top level. Wires the blocks together and masks the output. |
| `sha3_control` | State machine: ratecount, padding sequence, zero fill, round counter, squeeze counter. |
| `pad_update` | XORs a message or padding byte into `S[7:0]` and rotates the 168-byte rate by one byte. |
| `state_register` | The 1600-bit state and its three-input multiplexer. Exports the next value S'. |
| `keccak_permutation` | `UNROLL` chained `keccak_round`s. Gives the parity taps of the first round. |
| `keccak_round` | θ, ρ, π, χ, ι of one round. Also outputs the column sums C and lane sums F of its input. |
| `fd_module` | Parity registers C', F', C'_F', the comparators and the sticky `error` flag. |
| `sha3_pkg` | Mode, pad-select and multiplexer-select enums. Rates, digest lengths, and round-constant and ρ-offset generators. |

## The rate as a circular shift register

This is the part of the design that is least obvious.

The state is a vector `S[1599:0]`. Bit (x, y, z) of the Keccak cube is at `S[64·(5y+x)+z]`, so byte *i* of the
state is `S[8i+7:8i]`, as in FIPS 202. The state is split at a fixed point:

* `S[1343:0]`: 1344 bits = 168 bytes. This is the SHAKE128 rate, the largest rate of all six modes.
* `S[1599:1344]`: 256 bits. Only the Keccak round writes this part.

Every *update* cycle does the following:

```
S'[1343:0] = (b XOR S[7:0]) || S[1343:8]        S'[1599:1344] = S[1599:1344]
```

Here `b` is the input byte. Byte 0 is combined with `b` and goes to the top of the rate, and all other rate
bytes move down by one. After exactly 168 update cycles every byte is back at its own position. Along the way,
each byte passed through position 0 once and was XORed with the byte presented at that moment. So 168 update
cycles with the bytes `b0 … b167` have the same effect as XORing a 168-byte block into the rate in place.

A mode with a smaller rate `r_mode` uses the same 168 steps. For ratecount < r_mode, `b` is a message byte or
padding byte. For ratecount ≥ r_mode, a comparator in `pad_update` selects a zero byte, so those bytes are only
rotated back into place. In effect they become extra capacity for that mode. Every block therefore costs the
same time whatever the mode:

```
168 update cycles + 24/UNROLL permutation cycles  = 192 cycles per block (round-based)
```

Squeezing uses the same path. The hash byte is `S[7:0]`, and the state rotates with a zero byte. After
`r_mode` output bytes, if more output is wanted (SHAKE), the controller rotates the remaining `168 − r_mode`
bytes with zero, runs the permutation again and continues.

Rates in bytes: SHA3-224 144, SHA3-256 136, SHA3-384 104, SHA3-512 72, SHAKE128 168, SHAKE256 136.
Digest lengths: 28, 32, 48, 64 bytes. SHAKE output length is `out_len_i` bytes.

### Padding

The padding multiplexer offers six bytes:

| code | byte | use |
|---|---|---|
| `PAD_ZERO` | 0x00 | middle padding bytes, the zero fill, squeezing |
| `PAD_LAST` | 0x80 | last byte of the rate (closing 1 of pad10*1) |
| `PAD_SHA3` | 0x06 | first pad byte for SHA-3 (suffix `01`, then the opening 1) |
| `PAD_SHA3_LAST` | 0x86 | first and last pad byte at once |
| `PAD_SHAKE` | 0x1F | first pad byte for SHAKE (suffix `1111`, then the opening 1) |
| `PAD_SHAKE_LAST` | 0x9F | first and last pad byte at once |

The merged codes apply when the message ends one byte before the end of the rate. When a message fills the
rate exactly, the padding forms a whole extra block after the permutation.

## Fault detection

`keccak_round`'s θ step already computes the column sums `C[x,z] = ⊕_y S[x,y,z]`, which form the *c-plane*
(320 bits). The round also computes the lane sums `F[x,y] = ⊕_z S[x,y,z]`, which form the *f-slice* (25 bits).
Both are exported and describe the register's present contents.

`fd_module` works from S', the value written into the register. On every write it stores:

* `C'` = column sums of S' (320 flip-flops)
* `F'` = lane sums of S' (25 flip-flops, z-sheet only)
* `C'_F'[x]` = ⊕_y F'[x,y] (5 flip-flops, z-sheet only). These protect the F' register itself.

In the next cycle it flags a mismatch if any of these holds:

* `C ≠ C'`
* `F ≠ F'`
* ⊕_y of the stored F' ≠ `C'_F'`

Between hashes the mismatch sets the sticky `error`. The comparison runs every cycle, during absorb,
permutation, squeeze and idle alike. Checks start one cycle after the first write following reset.

What this catches:

* **c-plane only** (`PROT_CPLANE`): any odd number of flipped bits, because at least one column changes parity.
  Two flips in the same column pass unnoticed.
* **z-sheet** (`PROT_ZSHEET`, the default): two flips in one column lie in two different lanes, so F catches
  them. As a result every pattern of one, two or three flips is detected.
  Four flips on the corners of a rectangle inside one sheet (same two lanes, same two slices) leave every
  column sum and every lane sum unchanged, so this pattern is *not* detected.
* The check covers faults in the **state register** only. Faults in the round logic, the update unit, the
  controller or the FD unit's comparators are outside its scope. The exception is the parity registers: a flip
  in one of them shows up as a mismatch.

On a detected fault, `out_data_o` is forced to zero for the rest of the hash, so a faulty digest is never
output. The engine keeps running so that the handshakes still complete. `start_i` clears the flag and the
state.

## Interface and timing

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 | clock, asynchronous active-low reset |
| `start_i` | in | 1 | start a hash. Taken only when `busy_o` is low. Clears the state and `error_o`. |
| `mode_i` | in | 3 | `hash_mode_e`: 0..3 = SHA3-224/256/384/512, 4 = SHAKE128, 5 = SHAKE256 |
| `out_len_i` | in | 16 | SHAKE output length in bytes (ignored for SHA-3; 0 = no output) |
| `in_valid_i`, `in_ready_o` | in/out | 1 | message byte handshake. A byte moves when both are high at a clock edge. |
| `in_data_i` | in | 8 | message byte |
| `in_keep_i` | in | 1 | the beat carries a byte. A beat with `in_last_i=1, in_keep_i=0` ends the message without a byte (empty message). |
| `in_last_i` | in | 1 | last beat of the message |
| `out_valid_o`, `out_ready_i` | out/in | 1 | hash byte handshake. A byte stays on `out_data_o` until it is taken. |
| `out_data_o` | out | 8 | hash byte, in FIPS 202 output order (zero after a fault) |
| `out_last_o` | out | 1 | marks the final hash byte |
| `busy_o` | out | 1 | a hash is in progress |
| `done_o` | out | 1 | one-cycle pulse after the last hash byte |
| `error_o` | out | 1 | a state fault was detected during this hash |

Timing, with back-to-back input and `out_ready_i` held high:

* `start_i` is sampled at a clock edge. `in_ready_o` is high from the next cycle.
* The message streams in at one byte per cycle. `in_ready_o` drops during the zero fill and the permutation.
* The first hash byte appears 192 × (number of padded blocks) cycles after the first message byte is taken.
  For a round-based engine with a one-block message, that is 192 cycles.
* Hash bytes then follow one per cycle. SHAKE outputs longer than the rate pause for `168 − r_mode + 24`
  cycles after every `r_mode` bytes.
* `done_o` pulses one cycle after the last byte is taken. `busy_o` falls one cycle after that.

With a block every 192 cycles, throughput is `8·r_mode / 192` bits per cycle. That is 7 bit/cycle for SHAKE128
and 3 bit/cycle for SHA3-512. At the 714 MHz the paper reports for its 45 nm synthesis, this gives the
throughputs it lists (about 5.0 Gbit/s for SHAKE128 and 2.1 Gbit/s for SHA3-512).

## Parameters

| Parameter | Default | Values |
|---|---|---|
| `PROTECTION` | `PROT_ZSHEET` | `PROT_NONE`, `PROT_CPLANE`, `PROT_ZSHEET` |
| `UNROLL` | 1 | 1, 2, 3, 4, 6, 8, 12, 24 (must divide 24): rounds per clock, permutation takes 24/UNROLL cycles |
| `OUT_LEN_W` | 16 | width of `out_len_i` |

With `UNROLL > 1` the C and F taps still come from the first round of the chain, which is the register's
content. The check is therefore the same whatever the unrolling. In the default configuration the flip-flop
count is 1600 (state) + 350 (parities) + 1 (check-valid) + 1 (error) + 62 (control).

## Departures and own choices

What follows the published design:

* the 1344/256 split
* the byte shift register with its XOR at byte 0
* the ratecount comparator
* the zero fill
* squeezing from `S[7:0]` with re-permutation
* the three-input state multiplexer
* the c-plane, f-slice and z-sheet parities and their register sizes
* error masking of the output
* round-based and unrolled permutation

What this RTL chose or changed:

* **Step mappings.** The paper's printed round algorithm writes ρ and π with the same index map. That contradicts
  FIPS 202, which the paper cites. The round here is the FIPS 202 round, and it matches the published test
  vectors.
* **Padding multiplexer.** The text calls it five-input. Its figure labels six select codes. Six codes are used
  here, with merged first+last bytes.
* **Handshakes.** The paper only says the interface is byte-wide. The valid/ready/last/keep streams and the
  `out_len_i` width are this design's own.
* **State initialisation.** A synchronous clear on `start_i`, plus the asynchronous reset.
* **When the check runs.** The paper describes the comparison between permutation rounds. Here it runs every
  cycle, since S' is taken at the register input for every kind of write. The flag is sticky until the next
  start. The engine does not abort on a fault; it only masks the output.
* **Not built.** The AXI4 memory-mapped wrapper and the RISC-V SoC around the engine are not built. The paper
  gives no register map. The engine's byte streams are the top-level ports.

## Verification

Each module has a self-checking testbench in `tb/`. All of them end with a line
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `keccak_round_tb` | all 24 rounds on random states against a reference model that uses the published constant tables; C and F taps |
| `keccak_permutation_tb` | full Keccak-f for `UNROLL` 1 and 4; known result of Keccak-f on the zero state |
| `pad_update_tb` | the byte rotation, every pad byte, the comparator at r_mode−2..r_mode+1 for all rates; 168 rotations = identity |
| `state_register_tb` | multiplexer, clear, reset, S' = next value |
| `fd_module_tb` | no false alarm; 1, 2 (same column), 2 (random) and 3 flips detected by z-sheet; c-plane misses same-column pairs; rectangle of 4 undetected; sticky flag; single flips in the C', F' and C'_F' registers themselves detected |
| `sha3_control_tb` | the sequence of update bytes and round numbers against one built from the sponge definition; handshake counts; 192-cycle block latency |
| `sha3_shake_engine_tb` | end to end at default parameters: FIPS test vectors (SHA3-256 of "" and "abc", SHA3-512 of "abc", SHAKE128 of ""), every mode with empty, rate−1, rate and multi-block messages, long SHAKE output, input gaps and output back-pressure, 192 cycles per block, fault injection during absorb, permutation and squeeze with masked output and recovery |
| `sha3_engine_variants_tb` (with `engine_runner`) | c-plane, unprotected, and z-sheet with 2, 4, 6, 8, 12, 24 unrolled rounds: digests, `168 + 24/UNROLL` cycles per block, fault flag behaviour |

`tb/sha3_ref_pkg.sv` is the reference model. It is written independently of the RTL: a lane array, the fixed
FIPS 202 constant tables, and a plain absorb/squeeze sponge.

To run a testbench with Verilator 5 (the package goes first and only once):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/sha3_pkg.sv tb/sha3_ref_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
    tb/sha3_shake_engine_tb.sv --top-module sha3_shake_engine_tb
./obj_dir/Vsha3_shake_engine_tb
```

For the variants test, add `tb/engine_runner.sv`.
Fault injection in the engine testbenches writes the state register through a hierarchical reference
(`dut.u_state.state_q_o`). A renamed instance must be renamed there too.

What has not been checked: timing closure, area and power on a real library, and any bus integration.
