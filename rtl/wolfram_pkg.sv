// wolfram_pkg: shared sizes, timing constants and command encodings of a
// WoLFRaM-protected resistive (PCM) memory bank.
//
// Bank geometry follows the evaluated configuration: a 1 GB bank of 2^20
// rows of 1 KB (8192 bits), split into subarrays of 512 rows, so a row
// address has an 11-bit subarray part (global decoder) and a 9-bit local
// part (local decoder, a 9-to-512 PRAD). Each RD/WR moves one 64-byte burst
// (eight 64-bit transfers), so a row holds 16 columns.
//
// Timing constants are the PCM cycle counts of the evaluated system
// that the bank model uses (tRCD=22, tCL=5, tCCD=4, tRP=60); the other
// published ones (tWL=4, tWTR=3, tWR=6, tRTP=3, tRRD) govern command spacing
// on the host side and are not modelled. The PRAD programming time is not
// given; it is taken here as one array write (tRP).
package wolfram_pkg;

  // ---- geometry -----------------------------------------------------------
  localparam int unsigned SUB_W      = 11;            // 2048 subarrays
  localparam int unsigned LOC_W      = 9;             // 512 rows per subarray
  localparam int unsigned ROW_BITS   = 8192;          // 1 KB row = memory block
  localparam int unsigned BURST_BITS = 512;           // 8 x 64 b burst
  localparam int unsigned COL_W      = $clog2(ROW_BITS / BURST_BITS);

  // ---- timing, in memory-clock cycles -------------------------------------
  localparam int unsigned T_RCD  = 22;
  localparam int unsigned T_CL   = 5;
  localparam int unsigned T_CCD  = 4;
  localparam int unsigned T_RP   = 60;
  localparam int unsigned T_PROG = 60;  // PRAD reprogramming (assumed)

  // ---- remap probabilities (thresholds on a 32-bit random number) ---------
  // P(r <= T) = (T+1)/2^32.  sigma1 = 1 %, sigma2 = 0.002 %.
  localparam logic [31:0] SIGMA1_THR  = 32'd42949672;  // 0.01    * 2^32 - 1
  localparam logic [31:0] SIGMA2_THR  = 32'd85898;     // 0.00002 * 2^32 - 1

  // ---- commands from the host memory controller ---------------------------
  typedef enum logic [2:0] {
    MC_NOP = 3'd0,
    MC_ACT = 3'd1,
    MC_RD  = 3'd2,
    MC_WR  = 3'd3,
    MC_PRE = 3'd4
  } mc_cmd_e;

  // ---- commands from the WoLFRaM controller to the bank -------------------
  typedef enum logic [3:0] {
    WL_NOP          = 4'd0,
    WL_PROBE        = 4'd1,  // look up (sub,loc); result = OR of row selects
    WL_ACT          = 4'd2,  // read (sub,loc) into the chosen buffer
    WL_PRE          = 4'd3,  // write the chosen buffer to (sub,loc), verify
    WL_SWAP_LOCAL   = 4'd4,  // exchange local PRAD rows holding loc and loc2
    WL_SWAP_GLOBAL  = 4'd5,  // exchange global PRAD rows holding sub and sub2
    WL_REMAP_BLOCK  = 4'd6,  // disable row holding (sub,loc), reprogram loc
                             // into an empty row of the same subarray
    WL_DISABLE      = 4'd7,  // disable the local row holding (sub,loc)
    WL_SUB_ACTIVATE = 4'd8,  // program sub into an empty global PRAD row
    WL_SUB_RETIRE   = 4'd9   // disable the global row holding sub
  } wl_op_e;

  typedef enum logic {
    BUF_RB = 1'b0,
    BUF_SB = 1'b1
  } buf_sel_e;

  // ---- PRAD programming operations ----------------------------------------
  typedef enum logic [2:0] {
    PRAD_NOP     = 3'd0,
    PRAD_PROG    = 3'd1,  // store an address in a row, mark it occupied
    PRAD_CLEAR   = 3'd2,  // data deleted: mark the row empty
    PRAD_DISABLE = 3'd3,  // failed row: never selected again
    PRAD_SWAP    = 3'd4   // exchange the stored addresses of two rows
  } prad_op_e;

endpackage
