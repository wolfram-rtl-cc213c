// rb_sb_buffers: the row buffer (RB) and the swap buffer (SB) of one bank,
// both hung off the shared sense amplifiers through multiplexers.
//
// In a resistive memory the sense amplifiers and the row buffer are separate,
// so a second row-wide latch, the swap buffer, can sit in parallel with the
// row buffer. An activate loads the sensed row into the buffer chosen by
// load_sel; a precharge drives the write drivers from the buffer chosen by
// wd_sel. Only the RB has the column port used by RD/WR bursts, since the
// host never reads or writes the SB. The RB keeps a dirty bit, set by a
// column write and cleared by a load or by clear_dirty; a PRE writes the RB
// back to the array only when it is dirty.
//
// Timing: loads and column writes take effect at the clock edge; rb_rdata
// and wd_data are combinational from the stored rows.
module rb_sb_buffers
  import wolfram_pkg::*;
#(
  parameter int unsigned ROW_W   = ROW_BITS,
  parameter int unsigned BURST_W = BURST_BITS,
  localparam int unsigned NCOL   = ROW_W / BURST_W,
  localparam int unsigned CW     = (NCOL > 1) ? $clog2(NCOL) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // sense amplifiers -> buffer
  input  logic [ROW_W-1:0]   sa_data,
  input  logic               load,
  input  buf_sel_e           load_sel,
  // column port of the RB
  input  logic [CW-1:0]      col,
  input  logic               col_wr,
  input  logic [BURST_W-1:0] col_wdata,
  output logic [BURST_W-1:0] rb_rdata,
  // buffer -> write drivers
  input  buf_sel_e           wd_sel,
  output logic [ROW_W-1:0]   wd_data,
  input  logic               clear_dirty,
  output logic               rb_dirty
);

  logic [NCOL-1:0][BURST_W-1:0] rb;
  logic [ROW_W-1:0]             sb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rb       <= '0;
      sb       <= '0;
      rb_dirty <= 1'b0;
    end else begin
      if (load && load_sel == BUF_RB) begin
        rb       <= sa_data;
        rb_dirty <= 1'b0;
      end else if (col_wr) begin
        rb[col]  <= col_wdata;
        rb_dirty <= 1'b1;
      end else if (clear_dirty) begin
        rb_dirty <= 1'b0;
      end
      if (load && load_sel == BUF_SB)
        sb <= sa_data;
    end
  end

  assign rb_rdata = rb[col];
  assign wd_data  = (wd_sel == BUF_SB) ? sb : rb;

endmodule
