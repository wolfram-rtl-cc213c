// pcm_array: behavioural model of the phase-change cell array of one bank,
// with its sense amplifiers and write drivers. Not synthesizable logic: the
// cells are analog, process-specific devices, so this model only stands in
// for them in simulation.
//
// Rows are addressed physically, by (subarray, row). Storage is sparse (an
// associative array), so the full 1 GB bank costs memory only for the rows
// that were written; a row never written reads as a fixed background pattern
// derived from its physical address, which lets tests recognise where data
// came from. Every write is counted per row. A row fails when its write count
// reaches ENDURANCE (0 disables wear-out) or when fail_set marks it; a failed
// row is stuck-at on bit 0, so a read after a write returns data that differs
// from what was written, which is how the bank's read-after-write check finds
// failures. Cell endurance in the evaluated system is normally distributed
// with mean 1e8 writes and 15 % variation; this model uses one fixed limit.
//
// Timing: rd_data is combinational from (rd_sub, rd_row); a write and a
// fail_set take effect at the clock edge. Access latencies (tRCD, tRP) are
// applied by the bank, not here. cnt_* reads the write count of any row.
// The write process uses blocking assignments (the lint BLKSEQ warning
// stands) because nonblocking assignments to associative arrays are not
// allowed.
module pcm_array
  import wolfram_pkg::*;
#(
  parameter int unsigned SW         = SUB_W,
  parameter int unsigned LW         = LOC_W,
  parameter int unsigned ROW_W      = ROW_BITS,
  parameter int unsigned ENDURANCE  = 100_000_000
) (
  input  logic             clk,
  // read port (sense amplifiers)
  input  logic [SW-1:0]    rd_sub,
  input  logic [LW-1:0]    rd_row,
  output logic [ROW_W-1:0] rd_data,
  // write port (write drivers)
  input  logic             we,
  input  logic [SW-1:0]    wr_sub,
  input  logic [LW-1:0]    wr_row,
  input  logic [ROW_W-1:0] wr_data,
  // fault injection and wear observation
  input  logic             fail_set,
  input  logic [SW-1:0]    fail_sub,
  input  logic [LW-1:0]    fail_row,
  input  logic [SW-1:0]    cnt_sub,
  input  logic [LW-1:0]    cnt_row,
  output logic [31:0]      cnt,
  output logic             cnt_failed
);

  localparam int unsigned KW = SW + LW;

  logic [ROW_W-1:0] cells  [logic [KW-1:0]];
  logic [31:0]      writes [logic [KW-1:0]];
  logic             failed [logic [KW-1:0]];

  function automatic logic [ROW_W-1:0] background(input logic [KW-1:0] k);
    logic [31:0] w;
    w = 32'hA500_0000 ^ 32'(k);
    return {(ROW_W / 32){w}};
  endfunction

  logic [KW-1:0] rk, wk, fk, ck;
  assign rk = {rd_sub, rd_row};
  assign wk = {wr_sub, wr_row};
  assign fk = {fail_sub, fail_row};
  assign ck = {cnt_sub, cnt_row};

  always_comb begin
    rd_data = cells.exists(rk) ? cells[rk] : background(rk);
  end

  always_comb begin
    cnt        = writes.exists(ck) ? writes[ck] : 32'd0;
    cnt_failed = failed.exists(ck);
  end

  logic [31:0] wcount;
  logic        wfail;
  always_comb begin
    wcount = writes.exists(wk) ? writes[wk] + 32'd1 : 32'd1;
    wfail  = failed.exists(wk) || (ENDURANCE != 0 && wcount >= ENDURANCE);
  end

  // Blocking assignments: the standard does not allow nonblocking ones to
  // associative arrays. Nothing reads these arrays in the same time step.
  always @(posedge clk) begin
    if (we) begin
      writes[wk] = wcount;
      if (wfail) begin
        failed[wk] = 1'b1;
        cells[wk]  = {wr_data[ROW_W-1:1], ~wr_data[0]};
      end else begin
        cells[wk]  = wr_data;
      end
    end
    if (fail_set) failed[fk] = 1'b1;
  end

endmodule
