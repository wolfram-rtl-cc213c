// wolfram_bank: one resistive memory bank whose row decoders are PRADs.
//
// A row address is split into a subarray address (upper SW bits) and a local
// row address (lower LW bits). The global PRAD maps the subarray address to a
// physical subarray; that subarray's local PRAD maps the local address to a
// physical row. Both mappings are programmable, so data can move between
// physical rows and subarrays while keeping its address.
//
// The bank takes commands from two sources. The host memory controller (mc_*)
// issues ACT / RD / WR / PRE that always use the row buffer (RB); its PRE
// writes the RB back to the address it was opened with, looked up again at
// PRE time, and only if the RB is dirty. The WoLFRaM controller (wl_*) issues
// ACT and PRE on either buffer (normally the swap buffer, SB) with an explicit
// address, a PROBE that returns the OR of all row selects (is the address
// mapped?), SWAP_LOCAL / SWAP_GLOBAL that exchange the addresses stored in
// two local or two global PRAD rows, and REMAP_BLOCK that disables the local
// PRAD row of a failed block and programs its address into an empty row of
// the same subarray. For the recovery of a failed subarray it also has
// DISABLE (disable the local row of an address), SUB_ACTIVATE (program an
// address into the lowest empty global PRAD row, i.e. bring a spare
// subarray into use) and SUB_RETIRE (disable the global row of an address).
// GLOBAL_SPARES global rows, the highest subarray addresses, start empty.
// Every array write is followed by a read-after-write
// verification; its outcome is reported on pre_ev / pre_fail together with
// the buffer and address, so the controller can repair the block.
//
// Timing: one command is accepted in a cycle where ready=1 (a WoLFRaM command
// wins if both come at once; the host is stalled by then anyway). A command
// occupies the bank for: ACT tRCD, RD tCL (mc_rdata is held and mc_rvalid
// pulses in the cycle ready returns), WR tCCD, PRE tRP, PROBE 3 cycles, SWAP_*, REMAP_BLOCK,
// DISABLE and SUB_* T_PROG + 3 cycles; ready returns the cycle after. wl_done pulses with
// wl_result in the last busy cycle of a WoLFRaM command. pre_ev pulses two
// cycles after a PRE is accepted (after the verify read) if the PRE wrote,
// one cycle after if its address missed. mc_miss holds whether the last host
// ACT found its address unmapped.
//
// The decode structure and the commands' effects follow the paper; the
// command encoding, the single-cycle 512-bit burst transfer, the latencies of
// PROBE and PRAD programming, the verify timing and the number of spare
// subarrays (the paper names an "empty subarray" but gives no count) are
// this design's choices.
module wolfram_bank
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
  localparam int unsigned NCOL         = ROW_W / BURST_W,
  localparam int unsigned CW           = (NCOL > 1) ? $clog2(NCOL) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               ready,
  // host memory controller port (row buffer)
  input  mc_cmd_e            mc_cmd,
  input  logic [SW-1:0]      mc_sub,
  input  logic [LW-1:0]      mc_loc,
  input  logic [CW-1:0]      mc_col,
  input  logic [BURST_W-1:0] mc_wdata,
  output logic [BURST_W-1:0] mc_rdata,
  output logic               mc_rvalid,
  output logic               mc_miss,
  // WoLFRaM controller port
  input  wl_op_e             wl_op,
  input  buf_sel_e           wl_buf,
  input  logic [SW-1:0]      wl_sub,
  input  logic [LW-1:0]      wl_loc,
  input  logic [SW-1:0]      wl_sub2,
  input  logic [LW-1:0]      wl_loc2,
  output logic               wl_done,
  output logic               wl_result,
  // read-after-write verification outcome
  output logic               pre_ev,
  output logic               pre_fail,
  output logic               pre_miss,
  output buf_sel_e           pre_buf,
  output logic [SW-1:0]      pre_sub,
  output logic [LW-1:0]      pre_loc,
  // cell array observation and fault injection
  input  logic               fail_set,
  input  logic [SW-1:0]      fail_sub,
  input  logic [LW-1:0]      fail_row,
  input  logic [SW-1:0]      cnt_sub,
  input  logic [LW-1:0]      cnt_row,
  output logic [31:0]        cnt,
  output logic               cnt_failed
);

  localparam int unsigned NSUB = 1 << SW;
  localparam int unsigned NROW = 1 << LW;

  typedef enum logic [3:0] {
    OP_ACT, OP_RD, OP_WR, OP_PRE, OP_PROBE, OP_SWAPL, OP_SWAPG, OP_REMAP,
    OP_DIS, OP_GACT, OP_GRET
  } op_e;

  // The shortest sequences (lookup, access, verify) need these minimum latencies.
  if (TRCD < 3 || TCL < 3 || TCCD < 3 || TRP < 4 || TPROG < 1)
    $error("wolfram_bank: TRCD, TCL, TCCD must be >= 3, TRP >= 4, TPROG >= 1");

  typedef enum logic [2:0] {S_IDLE, S_EXEC, S_EXEC2, S_VERIFY, S_WAIT} state_e;

  state_e        state;
  op_e           op;
  logic          from_mc;
  buf_sel_e      cbuf;
  logic [SW-1:0] csub, csub2, look_sub;
  logic [LW-1:0] cloc, cloc2, look_loc;
  logic [CW-1:0] ccol;
  logic [BURST_W-1:0] cwdata;
  logic [15:0]   wcnt;
  logic          res;
  logic [SW-1:0] rb_sub;
  logic [LW-1:0] rb_loc;
  logic [SW-1:0] g1, ph_sub;
  logic [LW-1:0] l1, ph_row;
  logic          h1;

  // ---- decoders --------------------------------------------------------
  logic [NSUB-1:0] g_sel;
  logic            g_hit, g_empty_found;
  logic [SW-1:0]   g_idx, g_empty_idx;
  prad_op_e        g_op;
  logic [SW-1:0]   g_op_idx, g_op_idx2;

  logic [NROW-1:0] l_sel;
  logic            l_hit, l_empty_found;
  logic [LW-1:0]   l_idx, l_empty_idx;
  prad_op_e        l_op;
  logic [LW-1:0]   l_op_idx, l_op_idx2;

  prad #(.DECODERS(1), .ENTRIES(NSUB), .ADDR_W(SW), .SPARES(GLOBAL_SPARES)) u_gprad (
    .clk, .rst_n, .dec_sel(1'b0), .addr(look_sub),
    .row_sel(g_sel), .hit(g_hit), .hit_idx(g_idx),
    .empty_found(g_empty_found), .empty_idx(g_empty_idx),
    .op(g_op), .op_idx(g_op_idx), .op_idx2(g_op_idx2), .op_addr(csub));

  prad #(.DECODERS(NSUB), .ENTRIES(NROW), .ADDR_W(LW), .SPARES(LOCAL_SPARES)) u_lprad (
    .clk, .rst_n, .dec_sel(g_idx), .addr(look_loc),
    .row_sel(l_sel), .hit(l_hit), .hit_idx(l_idx),
    .empty_found(l_empty_found), .empty_idx(l_empty_idx),
    .op(l_op), .op_idx(l_op_idx), .op_idx2(l_op_idx2), .op_addr(cloc));

  logic hit;
  assign hit = g_hit & l_hit;

  // ---- buffers and array ------------------------------------------------
  logic [ROW_W-1:0] sa_data, wd_data;
  logic             buf_load, col_wr, clear_dirty, rb_dirty, arr_we;
  logic [BURST_W-1:0] rb_rdata;

  rb_sb_buffers #(.ROW_W(ROW_W), .BURST_W(BURST_W)) u_buf (
    .clk, .rst_n, .sa_data, .load(buf_load), .load_sel(cbuf),
    .col(ccol), .col_wr, .col_wdata(cwdata), .rb_rdata,
    .wd_sel(cbuf), .wd_data, .clear_dirty, .rb_dirty);

  logic [SW-1:0] rd_sub;
  logic [LW-1:0] rd_row;
  assign rd_sub = (state == S_VERIFY) ? ph_sub : g_idx;
  assign rd_row = (state == S_VERIFY) ? ph_row : l_idx;

  pcm_array #(.SW(SW), .LW(LW), .ROW_W(ROW_W), .ENDURANCE(ENDURANCE)) u_array (
    .clk, .rd_sub, .rd_row, .rd_data(sa_data),
    .we(arr_we), .wr_sub(g_idx), .wr_row(l_idx), .wr_data(wd_data),
    .fail_set, .fail_sub, .fail_row, .cnt_sub, .cnt_row, .cnt, .cnt_failed);

  // ---- control: combinational strobes -----------------------------------
  always_comb begin
    buf_load    = 1'b0;
    col_wr      = 1'b0;
    arr_we      = 1'b0;
    clear_dirty = 1'b0;
    g_op = PRAD_NOP;  g_op_idx = g1;  g_op_idx2 = g_idx;
    l_op = PRAD_NOP;  l_op_idx = l_idx; l_op_idx2 = l1;
    if (state == S_EXEC) begin
      unique case (op)
        OP_ACT:   buf_load = hit;
        OP_WR:    col_wr   = 1'b1;
        OP_PRE:   arr_we   = hit && !(from_mc && !rb_dirty);
        OP_REMAP: if (hit) l_op = PRAD_DISABLE;
        OP_DIS:   if (hit) l_op = PRAD_DISABLE;
        OP_GACT:  if (g_empty_found) begin g_op = PRAD_PROG; g_op_idx = g_empty_idx; end
        OP_GRET:  if (g_hit) begin g_op = PRAD_DISABLE; g_op_idx = g_idx; end
        default: ;
      endcase
    end else if (state == S_EXEC2) begin
      unique case (op)
        OP_SWAPL: if (h1 && hit && g_idx == g1) begin
          l_op = PRAD_SWAP; l_op_idx = l1; l_op_idx2 = l_idx;
        end
        OP_SWAPG: if (h1 && g_hit) g_op = PRAD_SWAP;
        OP_REMAP: if (h1 && l_empty_found) begin
          l_op = PRAD_PROG; l_op_idx = l_empty_idx;
        end
        default: ;
      endcase
    end else if (state == S_VERIFY) begin
      clear_dirty = (cbuf == BUF_RB) && (sa_data == wd_data);
    end
  end

  assign ready   = (state == S_IDLE);
  assign wl_done = (state == S_WAIT) && (wcnt == 0) && !from_mc;
  assign wl_result = res;

  // ---- control: sequencing ----------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;  op <= OP_PROBE;  from_mc <= 1'b0;  cbuf <= BUF_RB;
      csub <= '0; csub2 <= '0; cloc <= '0; cloc2 <= '0; ccol <= '0; cwdata <= '0;
      look_sub <= '0; look_loc <= '0; wcnt <= '0; res <= 1'b0;
      rb_sub <= '0; rb_loc <= '0; g1 <= '0; l1 <= '0; h1 <= 1'b0;
      ph_sub <= '0; ph_row <= '0;
      mc_rdata <= '0; mc_rvalid <= 1'b0; mc_miss <= 1'b0;
      pre_ev <= 1'b0; pre_fail <= 1'b0; pre_miss <= 1'b0; pre_buf <= BUF_RB;
      pre_sub <= '0; pre_loc <= '0;
    end else begin
      mc_rvalid <= 1'b0;
      pre_ev    <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (wl_op != WL_NOP) begin
            from_mc <= 1'b0;  cbuf <= wl_buf;
            csub <= wl_sub; csub2 <= wl_sub2; cloc <= wl_loc; cloc2 <= wl_loc2;
            look_sub <= wl_sub; look_loc <= wl_loc;
            unique case (wl_op)
              WL_PROBE:       op <= OP_PROBE;
              WL_ACT:         op <= OP_ACT;
              WL_PRE:         op <= OP_PRE;
              WL_SWAP_LOCAL:  op <= OP_SWAPL;
              WL_SWAP_GLOBAL: op <= OP_SWAPG;
              WL_DISABLE:     op <= OP_DIS;
              WL_SUB_ACTIVATE: op <= OP_GACT;
              WL_SUB_RETIRE:  op <= OP_GRET;
              default:        op <= OP_REMAP;
            endcase
            state <= S_EXEC;
          end else if (mc_cmd != MC_NOP) begin
            from_mc <= 1'b1;  cbuf <= BUF_RB;
            ccol <= mc_col;  cwdata <= mc_wdata;
            unique case (mc_cmd)
              MC_ACT: begin op <= OP_ACT; look_sub <= mc_sub; look_loc <= mc_loc;
                            csub <= mc_sub; cloc <= mc_loc; end
              MC_RD:  op <= OP_RD;
              MC_WR:  op <= OP_WR;
              default: begin op <= OP_PRE; look_sub <= rb_sub; look_loc <= rb_loc;
                             csub <= rb_sub; cloc <= rb_loc; end
            endcase
            state <= S_EXEC;
          end
        end

        S_EXEC: begin
          state <= S_WAIT;
          unique case (op)
            OP_ACT: begin
              res <= hit;
              if (cbuf == BUF_RB) begin rb_sub <= csub; rb_loc <= cloc; end
              if (from_mc) mc_miss <= !hit;
              wcnt <= 16'(TRCD - 3);
            end
            OP_RD: begin
              mc_rdata <= rb_rdata;
              wcnt <= 16'(TCL - 3);
            end
            OP_WR: wcnt <= 16'(TCCD - 3);
            OP_PRE: begin
              res <= hit;
              if (from_mc && !rb_dirty) begin
                wcnt <= 16'(TRP - 3);
              end else if (hit) begin
                ph_sub <= g_idx;  ph_row <= l_idx;
                state  <= S_VERIFY;
              end else begin
                pre_ev <= 1'b1; pre_fail <= 1'b0; pre_miss <= 1'b1; pre_buf <= cbuf;
                pre_sub <= csub; pre_loc <= cloc;
                wcnt <= 16'(TRP - 3);
              end
            end
            OP_PROBE: begin
              res <= hit;
              wcnt <= '0;
            end
            OP_SWAPL: begin
              h1 <= hit; g1 <= g_idx; l1 <= l_idx;
              look_loc <= cloc2;
              state <= S_EXEC2;
            end
            OP_SWAPG: begin
              h1 <= g_hit; g1 <= g_idx;
              look_sub <= csub2;
              state <= S_EXEC2;
            end
            OP_DIS: begin
              res  <= hit;
              wcnt <= 16'(TPROG);
            end
            OP_GACT: begin
              res  <= g_empty_found;
              wcnt <= 16'(TPROG);
            end
            OP_GRET: begin
              res  <= g_hit;
              wcnt <= 16'(TPROG);
            end
            default: begin  // OP_REMAP: row disabled this cycle if it hit
              h1 <= hit;
              state <= S_EXEC2;
            end
          endcase
        end

        S_EXEC2: begin
          unique case (op)
            OP_SWAPL: res <= h1 && hit && (g_idx == g1);
            OP_SWAPG: res <= h1 && g_hit;
            default:  res <= h1 && l_empty_found;
          endcase
          wcnt  <= 16'(TPROG - 1);
          state <= S_WAIT;
        end

        S_VERIFY: begin
          pre_ev   <= 1'b1;
          pre_fail <= (sa_data != wd_data);
          pre_miss <= 1'b0;
          pre_buf  <= cbuf;
          pre_sub  <= csub;
          pre_loc  <= cloc;
          wcnt     <= 16'(TRP - 4);
          state    <= S_WAIT;
        end

        default: begin  // S_WAIT
          if (wcnt == 0) begin
            state <= S_IDLE;
            if (from_mc && op == OP_RD) mc_rvalid <= 1'b1;
          end else begin
            wcnt <= wcnt - 16'd1;
          end
        end
      endcase
    end
  end

  // Commands may only be issued while the bank is ready.
  a_mc_ready: assert property (@(posedge clk) disable iff (!rst_n)
                               (mc_cmd != MC_NOP) |-> ready)
    else $error("wolfram_bank: host command while bank busy");
  a_wl_ready: assert property (@(posedge clk) disable iff (!rst_n)
                               (wl_op != WL_NOP) |-> ready)
    else $error("wolfram_bank: WoLFRaM command while bank busy");

endmodule
