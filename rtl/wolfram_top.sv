// wolfram_top: one WoLFRaM-protected PCM bank, i.e. the bank with PRAD
// row decoders and a swap buffer, plus the WoLFRaM controller that sits in a
// separate chip on the memory module next to it.
//
// The host memory controller drives mc_* exactly as for an ordinary bank
// (ACT, RD, WR, PRE); it may issue a command only in a cycle with
// bank_ready=1 and stall=0. stall is the additional module pin through which
// the controller tells the host to hold off while it remaps, swaps,
// repairs or moves a failed subarray; its falling edge is the "resume"
// signal. The controller needs a stream of random words (rnd_*), which in
// the intended system comes from a true random number generator; it is an input here. fail_* and cnt_* reach
// into the cell-array model to mark rows as worn out and to read per-row write
// counts; the n_* counters report how often each mechanism ran.
//
// Defaults are the evaluated configuration: 2048 subarrays x 512 rows of
// 1 KB, sigma1 = 1 %, sigma2 = 0.002 %, PCM timing in memory-clock cycles.
// One of the 2048 subarrays is held back as the empty subarray that a
// terminally failed one is moved to (GLOBAL_SPARES, this design's choice;
// the paper gives no count), so the host sees 2047.
module wolfram_top
  import wolfram_pkg::*;
#(
  parameter int unsigned SW            = SUB_W,
  parameter int unsigned LW            = LOC_W,
  parameter int unsigned ROW_W         = ROW_BITS,
  parameter int unsigned BURST_W       = BURST_BITS,
  parameter int unsigned LOCAL_SPARES  = 1,
  parameter int unsigned GLOBAL_SPARES = 1,
  parameter int unsigned ENDURANCE     = 100_000_000,
  parameter int unsigned TRCD          = T_RCD,
  parameter int unsigned TCL           = T_CL,
  parameter int unsigned TCCD          = T_CCD,
  parameter int unsigned TRP           = T_RP,
  parameter int unsigned TPROG         = T_PROG,
  parameter int unsigned QDEPTH        = 8,
  parameter int unsigned MAX_RETRY     = 16,
  parameter logic [31:0] SIGMA1        = SIGMA1_THR,
  parameter logic [31:0] SIGMA2        = SIGMA2_THR,
  localparam int unsigned NCOL         = ROW_W / BURST_W,
  localparam int unsigned CW           = (NCOL > 1) ? $clog2(NCOL) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // host memory controller
  input  mc_cmd_e            mc_cmd,
  input  logic [SW-1:0]      mc_sub,
  input  logic [LW-1:0]      mc_loc,
  input  logic [CW-1:0]      mc_col,
  input  logic [BURST_W-1:0] mc_wdata,
  output logic [BURST_W-1:0] mc_rdata,
  output logic               mc_rvalid,
  output logic               mc_miss,
  output logic               bank_ready,
  output logic               stall,
  // random number source
  input  logic               rnd_valid,
  input  logic [31:0]        rnd_data,
  output logic               rnd_ready,
  // cell array observation and fault injection
  input  logic               fail_set,
  input  logic [SW-1:0]      fail_sub,
  input  logic [LW-1:0]      fail_row,
  input  logic [SW-1:0]      cnt_sub,
  input  logic [LW-1:0]      cnt_row,
  output logic [31:0]        cnt,
  output logic               cnt_failed,
  // mechanism counters
  output logic [31:0]        n_blk_swap,
  output logic [31:0]        n_sub_swap,
  output logic [31:0]        n_retry,
  output logic [31:0]        n_abort,
  output logic [31:0]        n_repair,
  output logic [31:0]        n_mapped_out,
  output logic [31:0]        n_no_decision,
  output logic [31:0]        n_sub_recover
);

  wl_op_e        wl_op;
  buf_sel_e      wl_buf, pre_buf;
  logic [SW-1:0] wl_sub, wl_sub2, pre_sub;
  logic [LW-1:0] wl_loc, wl_loc2, pre_loc;
  logic          wl_done, wl_result, pre_ev, pre_fail, pre_miss;

  wolfram_bank #(
    .SW(SW), .LW(LW), .ROW_W(ROW_W), .BURST_W(BURST_W),
    .LOCAL_SPARES(LOCAL_SPARES), .GLOBAL_SPARES(GLOBAL_SPARES), .ENDURANCE(ENDURANCE),
    .TRCD(TRCD), .TCL(TCL), .TCCD(TCCD), .TRP(TRP), .TPROG(TPROG)
  ) u_bank (
    .clk, .rst_n, .ready(bank_ready),
    .mc_cmd, .mc_sub, .mc_loc, .mc_col, .mc_wdata, .mc_rdata, .mc_rvalid, .mc_miss,
    .wl_op, .wl_buf, .wl_sub, .wl_loc, .wl_sub2, .wl_loc2, .wl_done, .wl_result,
    .pre_ev, .pre_fail, .pre_miss, .pre_buf, .pre_sub, .pre_loc,
    .fail_set, .fail_sub, .fail_row, .cnt_sub, .cnt_row, .cnt, .cnt_failed);

  wolfram_controller #(
    .SW(SW), .LW(LW), .QDEPTH(QDEPTH), .MAX_RETRY(MAX_RETRY),
    .SIGMA1(SIGMA1), .SIGMA2(SIGMA2)
  ) u_ctrl (
    .clk, .rst_n, .mc_cmd, .mc_sub, .mc_loc, .bank_ready, .stall,
    .wl_op, .wl_buf, .wl_sub, .wl_loc, .wl_sub2, .wl_loc2, .wl_done, .wl_result,
    .pre_ev, .pre_fail, .rnd_valid, .rnd_data, .rnd_ready,
    .n_blk_swap, .n_sub_swap, .n_retry, .n_abort, .n_repair, .n_mapped_out, .n_no_decision,
    .n_sub_recover);

  // The host must obey the stall pin.
  a_host_obeys_stall: assert property (@(posedge clk) disable iff (!rst_n)
                                       (mc_cmd != MC_NOP) |-> (bank_ready && !stall))
    else $error("wolfram_top: host command while stalled or bank busy");

endmodule
