// wolfram_controller: the per-bank WoLFRaM controller, which performs
// wear-leveling and fault tolerance next to the bank, without traffic on the
// memory bus.
//
// It watches the host's commands to its bank. For every host WR it pops one
// precomputed random decision (decision_queue), which the queue builds from
// random words while the controller is idle or waiting to draw a partner:
//
//  * Block remap-and-swap (probability sigma1). With the written row RA1 open
//    in the row buffer, the controller raises STALL, picks a random partner
//    RA2 in the same subarray, activates RA2 into the swap buffer, reprograms
//    the local PRAD so RA1 and RA2 exchange their physical rows, and
//    precharges the swap buffer into RA2 (now at RA1's old row). It then
//    drops STALL (resume); the host's own later PRE writes the row buffer to
//    RA1, which now sits at RA2's old row. The two blocks have swapped places
//    while keeping their addresses.
//  * Subarray remap-and-swap (probability sigma2). Since the row buffer is
//    busy with the host's open row, this waits until the host precharges it.
//    Then, stalled, it picks a random partner subarray, checks that both
//    subarrays map the same set of local addresses, exchanges the data of
//    every local address through the row buffer and swap buffer, and finally
//    exchanges the two subarrays' rows in the global PRAD.
//
// A partner that is mapped out (PRAD lookup misses, i.e. the OR of all row
// selects is 0), equal to the written address, or (for subarrays) not
// compatible, is rejected and a new one drawn; after MAX_RETRY rejections
// the operation is dropped. Fault tolerance: every array write is verified
// by the bank; when a verification fails (the host's PRE or one of the
// controller's own), the controller stalls the host, has the bank disable
// the failed PRAD row and program the address into an empty row of the same
// subarray, and writes the still-buffered data there again, repeating if that
// row fails too. With no empty row left in the subarray after the host's
// own PRE failed, the subarray counts as terminally failed: the controller
// programs a spare (empty) global PRAD row under the temporary address
// TMP_SUB (the highest subarray address, never mapped otherwise), copies
// every mapped block of the failed subarray into it through the swap buffer
// (addresses already mapped out are disabled there too), exchanges the two
// global PRAD rows so the failed subarray's address now selects the new
// one, disables the old one, and writes the failed block, still in the row
// buffer, to its address. With no spare subarray left, or when the failure
// happens inside another operation that holds both buffers, the block is
// mapped out.
//
// Interface: mc_* is a copy of the host command bus and bank_ready tells
// which commands the bank accepted. wl_* drives the bank's WoLFRaM port, one
// command at a time, each issued in a cycle with bank_ready=1 and complete at
// wl_done. stall is the extra module pin to the host: 1 means "issue nothing
// to this bank"; it rises the cycle after the triggering command is accepted,
// while the bank is still busy with it, and falls after the last command of
// the operation completes. rnd_* takes random words; counters count each
// mechanism for observation.
//
// The operation sequences follow the paper; the subarray-swap data movement
// through both buffers, the compatibility check, the retry limit and the
// queue-empty behaviour (no remap) are this design's own choices, and so are
// the trigger for subarray recovery (a repair with no empty row left), the
// temporary address and the copy sequence: the paper says only that a
// subarray with a terminal failure "can be remapped to an empty subarray by
// reprogramming the global PRAD".
module wolfram_controller
  import wolfram_pkg::*;
#(
  parameter int unsigned SW        = SUB_W,
  parameter int unsigned LW        = LOC_W,
  parameter int unsigned QDEPTH    = 8,
  parameter int unsigned MAX_RETRY = 16,
  parameter logic [31:0] SIGMA1    = SIGMA1_THR,
  parameter logic [31:0] SIGMA2    = SIGMA2_THR
) (
  input  logic          clk,
  input  logic          rst_n,
  // snooped host command bus
  input  mc_cmd_e       mc_cmd,
  input  logic [SW-1:0] mc_sub,
  input  logic [LW-1:0] mc_loc,
  input  logic          bank_ready,
  output logic          stall,
  // bank command port
  output wl_op_e        wl_op,
  output buf_sel_e      wl_buf,
  output logic [SW-1:0] wl_sub,
  output logic [LW-1:0] wl_loc,
  output logic [SW-1:0] wl_sub2,
  output logic [LW-1:0] wl_loc2,
  input  logic          wl_done,
  input  logic          wl_result,
  input  logic          pre_ev,
  input  logic          pre_fail,
  // random source
  input  logic          rnd_valid,
  input  logic [31:0]   rnd_data,
  output logic          rnd_ready,
  // event counters
  output logic [31:0]   n_blk_swap,
  output logic [31:0]   n_sub_swap,
  output logic [31:0]   n_retry,
  output logic [31:0]   n_abort,
  output logic [31:0]   n_repair,
  output logic [31:0]   n_mapped_out,
  output logic [31:0]   n_no_decision,
  output logic [31:0]   n_sub_recover
);

  localparam int unsigned NLOC = 1 << LW;
  // Subarray address used to name a spare subarray while it is filled; it
  // is never mapped outside a recovery.
  localparam logic [SW-1:0] TMP_SUB = SW'((1 << SW) - 1);

  typedef enum logic [4:0] {
    C_IDLE, C_MCPRE,
    C_BPICK, C_BCHK, C_BPROBE, C_BACT, C_BREMAP, C_BPRE,
    C_SPICK, C_SCHK, C_SPROBE1, C_SPROBE2, C_SACT1, C_SACT2, C_SPRE1, C_SPRE2,
    C_SNEXT, C_SADV, C_SGSWAP,
    C_RREMAP, C_RPRE,
    C_FACT, C_FPROBE, C_FACT2, C_FPRE, C_FDIS, C_FADV, C_FGSWAP, C_FRET
  } cstate_e;

  cstate_e       st, ret_st, f_ret;
  logic          in_rec;
  logic [SW-1:0] f_sub;
  logic [LW-1:0] f_loc;
  logic          waiting;
  logic          pre_bad;
  logic [SW-1:0] open_sub, s1, s2, r_sub;
  logic [LW-1:0] open_loc, tgt, a, r_loc;
  buf_sel_e      r_buf;
  logic          pending_sub, h1;
  logic [NLOC-1:0] mask;
  logic [15:0]   retries;

  // ---- decision queue ---------------------------------------------------
  logic          q_pop, q_avail, q_blk, q_sub;
  logic [LW-1:0] q_loc;
  logic [SW-1:0] q_subt;

  decision_queue #(.DEPTH(QDEPTH), .SW(SW), .LW(LW), .SIGMA1(SIGMA1), .SIGMA2(SIGMA2)) u_q (
    .clk, .rst_n, .fill_en(st == C_IDLE || st == C_BPICK || st == C_SPICK), .rnd_valid, .rnd_data, .rnd_ready,
    .pop(q_pop), .avail(q_avail), .head_blk(q_blk), .head_sub(q_sub),
    .head_loc(q_loc), .head_subt(q_subt));

  logic mc_acc;
  assign mc_acc = bank_ready && (mc_cmd != MC_NOP) && !stall;

  assign stall = (st != C_IDLE);

  // ---- command for the current state ------------------------------------
  wl_op_e   c_op;
  buf_sel_e c_buf;
  logic [SW-1:0] c_sub, c_sub2;
  logic [LW-1:0] c_loc, c_loc2;

  always_comb begin
    c_op = WL_NOP;  c_buf = BUF_SB;
    c_sub = open_sub;  c_loc = tgt;  c_sub2 = s2;  c_loc2 = open_loc;
    unique case (st)
      C_BPROBE: c_op = WL_PROBE;
      C_BACT:   c_op = WL_ACT;
      C_BREMAP: begin c_op = WL_SWAP_LOCAL; c_loc = open_loc; c_loc2 = tgt; end
      C_BPRE:   c_op = WL_PRE;
      C_SPROBE1: begin c_op = WL_PROBE; c_sub = s1; c_loc = a; end
      C_SPROBE2: begin c_op = WL_PROBE; c_sub = s2; c_loc = a; end
      C_SACT1:  begin c_op = WL_ACT; c_buf = BUF_RB; c_sub = s1; c_loc = a; end
      C_SACT2:  begin c_op = WL_ACT; c_buf = BUF_SB; c_sub = s2; c_loc = a; end
      C_SPRE1:  begin c_op = WL_PRE; c_buf = BUF_RB; c_sub = s2; c_loc = a; end
      C_SPRE2:  begin c_op = WL_PRE; c_buf = BUF_SB; c_sub = s1; c_loc = a; end
      C_SGSWAP: begin c_op = WL_SWAP_GLOBAL; c_sub = s1; c_sub2 = s2; end
      C_RREMAP: begin c_op = WL_REMAP_BLOCK; c_buf = r_buf; c_sub = r_sub; c_loc = r_loc; end
      C_RPRE:   begin c_op = WL_PRE; c_buf = r_buf; c_sub = r_sub; c_loc = r_loc; end
      C_FACT:   begin c_op = WL_SUB_ACTIVATE; c_sub = TMP_SUB; end
      C_FPROBE: begin c_op = WL_PROBE; c_sub = f_sub; c_loc = a; end
      C_FACT2:  begin c_op = WL_ACT; c_sub = f_sub; c_loc = a; end
      C_FPRE:   begin c_op = WL_PRE; c_sub = TMP_SUB; c_loc = a; end
      C_FDIS:   begin c_op = WL_DISABLE; c_sub = TMP_SUB; c_loc = a; end
      C_FGSWAP: begin c_op = WL_SWAP_GLOBAL; c_sub = f_sub; c_sub2 = TMP_SUB; end
      C_FRET:   begin c_op = WL_SUB_RETIRE; c_sub = TMP_SUB; end
      default: ;
    endcase
  end

  logic issue;
  assign issue   = (c_op != WL_NOP) && !waiting && bank_ready;
  assign wl_op   = issue ? c_op : WL_NOP;
  assign wl_buf  = c_buf;
  assign wl_sub  = c_sub;
  assign wl_loc  = c_loc;
  assign wl_sub2 = c_sub2;
  assign wl_loc2 = c_loc2;

  // Queue pops: one per host WR, one per partner drawn.
  assign q_pop = q_avail && ((st == C_IDLE && mc_acc && mc_cmd == MC_WR) ||
                             st == C_BPICK || st == C_SPICK);

  logic fin;  // the issued command has completed
  assign fin = waiting && wl_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE;  ret_st <= C_IDLE;  f_ret <= C_IDLE;  waiting <= 1'b0;
      in_rec <= 1'b0; f_sub <= '0; f_loc <= '0; n_sub_recover <= '0;
      pre_bad <= 1'b0;
      open_sub <= '0; open_loc <= '0; s1 <= '0; s2 <= '0; tgt <= '0; a <= '0;
      r_sub <= '0; r_loc <= '0; r_buf <= BUF_RB;
      pending_sub <= 1'b0; h1 <= 1'b0; mask <= '0; retries <= '0;
      n_blk_swap <= '0; n_sub_swap <= '0; n_retry <= '0; n_abort <= '0;
      n_repair <= '0; n_mapped_out <= '0; n_no_decision <= '0;
    end else begin
      if (issue) begin
        waiting <= 1'b1;
        pre_bad <= 1'b0;
      end else if (fin) begin
        waiting <= 1'b0;
      end
      if (pre_ev && pre_fail) pre_bad <= 1'b1;

      unique case (st)
        C_IDLE: if (mc_acc) begin
          unique case (mc_cmd)
            MC_ACT: begin open_sub <= mc_sub; open_loc <= mc_loc; end
            MC_WR: begin
              if (!q_avail) begin
                n_no_decision <= n_no_decision + 1;
              end else begin
                if (q_sub && !pending_sub) begin
                  pending_sub <= 1'b1;
                  s1 <= open_sub;
                  s2 <= q_subt;
                end
                if (q_blk) begin
                  retries <= '0;
                  tgt <= q_loc;
                  st <= C_BCHK;
                end
              end
            end
            MC_PRE: begin
              pre_bad  <= 1'b0;
              st <= C_MCPRE;
            end
            default: ;
          endcase
        end

        // Host PRE in flight: catch its verification result.
        C_MCPRE: begin
          if (bank_ready) begin
            if (pre_bad) begin
              r_buf <= BUF_RB; r_sub <= open_sub; r_loc <= open_loc;
              ret_st <= pending_sub ? C_SCHK : C_IDLE;
              retries <= '0;
              n_repair <= n_repair + 1;
              st <= C_RREMAP;
            end else if (pending_sub) begin
              retries <= '0;
              st <= C_SCHK;
            end else begin
              st <= C_IDLE;
            end
          end
        end

        // ---- block remap and swap ------------------------------------
        C_BPICK: if (q_avail) begin
          tgt <= q_loc;
          st  <= C_BCHK;
        end
        C_BCHK: begin
          if (tgt == open_loc) begin
            n_retry <= n_retry + 1;
            retries <= retries + 1;
            if (retries + 1 >= 16'(MAX_RETRY)) begin n_abort <= n_abort + 1; st <= C_IDLE; end
            else st <= C_BPICK;
          end else begin
            st <= C_BPROBE;
          end
        end
        C_BPROBE: if (fin) begin
          if (wl_result) st <= C_BACT;
          else begin
            n_retry <= n_retry + 1;
            retries <= retries + 1;
            if (retries + 1 >= 16'(MAX_RETRY)) begin n_abort <= n_abort + 1; st <= C_IDLE; end
            else st <= C_BPICK;
          end
        end
        C_BACT:   if (fin) st <= C_BREMAP;
        C_BREMAP: if (fin) st <= C_BPRE;
        C_BPRE: if (fin) begin
          n_blk_swap <= n_blk_swap + 1;
          if (pre_bad) begin
            r_buf <= BUF_SB; r_sub <= open_sub; r_loc <= tgt;
            ret_st <= C_IDLE;
            n_repair <= n_repair + 1;
            st <= C_RREMAP;
          end else begin
            st <= C_IDLE;
          end
        end

        // ---- subarray remap and swap ---------------------------------
        C_SPICK: if (q_avail) begin
          s2 <= q_subt;
          st <= C_SCHK;
        end
        C_SCHK: begin
          a <= '0;
          if (s2 == s1) begin
            n_retry <= n_retry + 1;
            retries <= retries + 1;
            if (retries + 1 >= 16'(MAX_RETRY)) begin
              n_abort <= n_abort + 1; pending_sub <= 1'b0; st <= C_IDLE;
            end else st <= C_SPICK;
          end else begin
            st <= C_SPROBE1;
          end
        end
        C_SPROBE1: if (fin) begin
          h1 <= wl_result;
          st <= C_SPROBE2;
        end
        C_SPROBE2: if (fin) begin
          if (h1 != wl_result) begin
            n_retry <= n_retry + 1;
            retries <= retries + 1;
            if (retries + 1 >= 16'(MAX_RETRY)) begin
              n_abort <= n_abort + 1; pending_sub <= 1'b0; st <= C_IDLE;
            end else st <= C_SPICK;
          end else begin
            mask[a] <= h1;
            a <= a + 1'b1;
            if (a == LW'(NLOC - 1)) begin
              a  <= '0;
              st <= C_SNEXT;
            end else st <= C_SPROBE1;
          end
        end
        C_SNEXT: st <= mask[a] ? C_SACT1 : C_SADV;
        C_SACT1: if (fin) st <= C_SACT2;
        C_SACT2: if (fin) st <= C_SPRE1;
        C_SPRE1: if (fin) begin
          if (pre_bad) begin
            r_buf <= BUF_RB; r_sub <= s2; r_loc <= a;
            ret_st <= C_SPRE2;
            n_repair <= n_repair + 1;
            st <= C_RREMAP;
          end else st <= C_SPRE2;
        end
        C_SPRE2: if (fin) begin
          if (pre_bad) begin
            r_buf <= BUF_SB; r_sub <= s1; r_loc <= a;
            ret_st <= C_SADV;
            n_repair <= n_repair + 1;
            st <= C_RREMAP;
          end else st <= C_SADV;
        end
        C_SADV: begin
          if (a == LW'(NLOC - 1)) st <= C_SGSWAP;
          else begin
            a  <= a + 1'b1;
            st <= C_SNEXT;
          end
        end
        C_SGSWAP: if (fin) begin
          n_sub_swap  <= n_sub_swap + 1;
          pending_sub <= 1'b0;
          st <= C_IDLE;
        end

        // ---- repair of a failed block --------------------------------
        C_RREMAP: if (fin) begin
          if (wl_result) st <= C_RPRE;
          else if (!in_rec && r_buf == BUF_RB && (ret_st == C_IDLE || ret_st == C_SCHK)) begin
            // no empty row left: try to move the whole subarray to a spare
            in_rec <= 1'b1;
            f_sub <= r_sub; f_loc <= r_loc; f_ret <= ret_st;
            st <= C_FACT;
          end else begin
            n_mapped_out <= n_mapped_out + 1;
            st <= ret_st;
          end
        end
        C_RPRE: if (fin) begin
          if (pre_bad) begin
            n_repair <= n_repair + 1;
            st <= C_RREMAP;
          end else st <= ret_st;
        end

        // ---- recovery of a failed subarray ----------------------------
        // The failed block waits in the row buffer; the swap buffer copies
        // every mapped address of f_sub into a spare subarray, named
        // TMP_SUB meanwhile. Addresses already mapped out stay so.
        C_FACT: if (fin) begin
          if (wl_result) begin
            a  <= '0;
            st <= C_FPROBE;
          end else begin  // no spare subarray left
            in_rec <= 1'b0;
            n_mapped_out <= n_mapped_out + 1;
            st <= f_ret;
          end
        end
        C_FPROBE: if (fin) begin
          if (a == f_loc) st <= C_FADV;
          else st <= wl_result ? C_FACT2 : C_FDIS;
        end
        C_FACT2: if (fin) st <= C_FPRE;
        C_FPRE: if (fin) begin
          if (pre_bad) begin
            r_buf <= BUF_SB; r_sub <= TMP_SUB; r_loc <= a;
            ret_st <= C_FADV;
            n_repair <= n_repair + 1;
            st <= C_RREMAP;
          end else st <= C_FADV;
        end
        C_FDIS: if (fin) st <= C_FADV;
        C_FADV: begin
          if (a == LW'(NLOC - 1)) st <= C_FGSWAP;
          else begin
            a  <= a + 1'b1;
            st <= C_FPROBE;
          end
        end
        C_FGSWAP: if (fin) st <= C_FRET;
        C_FRET: if (fin) begin
          // the failed block now goes to its address in the new subarray
          in_rec <= 1'b0;
          n_sub_recover <= n_sub_recover + 1;
          r_buf <= BUF_RB; r_sub <= f_sub; r_loc <= f_loc; ret_st <= f_ret;
          st <= C_RPRE;
        end

        default: st <= C_IDLE;
      endcase
    end
  end

endmodule
