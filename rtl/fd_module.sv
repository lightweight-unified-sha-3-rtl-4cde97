// fd_module -- register-level fault detection for the Keccak state.
//
// Whenever the state register is written with S' (load_i), this module stores
// parities of S' in its own small registers:
//   C'[x,z]   = XOR_y S'[x,y,z]       320 bits  (c-plane)
//   F'[x,y]   = XOR_z S'[x,y,z]        25 bits  (f-slice,   z-sheet only)
//   C'_F'[x]  = XOR_y F'[x,y]           5 bits  (f-slice column sums, z-sheet only)
// One cycle later the Keccak round's theta layer delivers the c-plane C and the
// f-slice F of the register's actual contents.  A fault is flagged when
//   C != C'   or   F != F'   or   XOR_y F'[x,y] (recomputed from the stored F')
//                                 != C'_F'[x]
// The last term protects the F' register itself.  With PROT_CPLANE only the
// first comparison is made (detects every odd number of flipped state bits);
// PROT_ZSHEET adds the lane dimension and detects every pattern of up to three
// flipped bits.  PROT_NONE builds nothing and never flags.
//
// Timing: checks start one cycle after the first load following reset.  The
// error flag error_o is sticky and is cleared only by clear_err_i (new hash) or
// reset.  Because the engine rewrites the state every cycle (hold writes back
// the same value), load_i is normally asserted whenever the state register is
// written by the update unit or the round, and the stored parities then stay
// valid while the register holds.
//
// The parities, register sizes and comparisons follow the published z-sheet
// scheme.  Checking in every cycle (rather than only between permutation
// rounds), the load enable and the sticky flag with its clear are this
// design's choices.
module fd_module
  import sha3_pkg::*;
#(
  parameter protection_e PROTECTION = PROT_ZSHEET
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               load_i,       // state register written with state_d_i
  input  logic [STATE_W-1:0] state_d_i,    // S'
  input  logic [319:0]       c_plane_i,    // C from the theta layer
  input  logic [24:0]        f_slice_i,    // F from the theta layer
  input  logic               clear_err_i,
  output logic               error_o,
  output logic               mismatch_o    // this cycle's comparison result
);

  logic [319:0] c_d, c_q;
  logic [24:0]  f_d, f_q;
  logic [4:0]   cf_d, cf_q, cf_chk;
  logic         valid_q;
  logic         mism_c, mism_f, mism_cf;

  // parities of the value being written
  always_comb begin
    for (int x = 0; x < 5; x++)
      for (int z = 0; z < LANE_W; z++)
        c_d[LANE_W*x+z] = state_d_i[LANE_W*x+z]      ^ state_d_i[LANE_W*(x+5)+z]  ^
                          state_d_i[LANE_W*(x+10)+z] ^ state_d_i[LANE_W*(x+15)+z] ^
                          state_d_i[LANE_W*(x+20)+z];
    for (int i = 0; i < 25; i++) f_d[i] = ^state_d_i[LANE_W*i +: LANE_W];
    for (int x = 0; x < 5; x++) cf_d[x] = f_d[x] ^ f_d[x+5] ^ f_d[x+10] ^ f_d[x+15] ^ f_d[x+20];
    // column sums of the stored f-slice register
    for (int x = 0; x < 5; x++) cf_chk[x] = f_q[x] ^ f_q[x+5] ^ f_q[x+10] ^ f_q[x+15] ^ f_q[x+20];
  end

  if (PROTECTION == PROT_NONE) begin : g_none
    assign c_q     = '0;
    assign f_q     = '0;
    assign cf_q    = '0;
    assign valid_q = 1'b0;
    assign mism_c  = 1'b0;
    assign mism_f  = 1'b0;
    assign mism_cf = 1'b0;
  end else begin : g_prot
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        c_q     <= '0;
        valid_q <= 1'b0;
      end else if (load_i) begin
        c_q     <= c_d;
        valid_q <= 1'b1;
      end
    end
    assign mism_c = |(c_plane_i ^ c_q);

    if (PROTECTION == PROT_ZSHEET) begin : g_zsheet
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          f_q  <= '0;
          cf_q <= '0;
        end else if (load_i) begin
          f_q  <= f_d;
          cf_q <= cf_d;
        end
      end
      assign mism_f  = |(f_slice_i ^ f_q);
      assign mism_cf = |(cf_chk ^ cf_q);
    end else begin : g_cplane
      assign f_q     = '0;
      assign cf_q    = '0;
      assign mism_f  = 1'b0;
      assign mism_cf = 1'b0;
    end
  end

  assign mismatch_o = valid_q & (mism_c | mism_f | mism_cf);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)          error_o <= 1'b0;
    else if (clear_err_i) error_o <= 1'b0;
    else if (mismatch_o)  error_o <= 1'b1;
  end

endmodule
