// decision_queue: precomputed remap-and-swap decisions of the WoLFRaM
// controller.
//
// Drawing a random number only when a write arrives would put the random
// number generator on the critical path. Instead, while the controller is
// idle (fill_en), random words are consumed from the generator and turned
// into decisions that are kept in a small FIFO. Each entry is built from two
// words: the first, r, is compared with the two thresholds (blk = r <= SIGMA1:
// remap and swap the written block inside its subarray; sub = r <= SIGMA2:
// remap and swap the whole subarray); the second supplies the random swap
// partners, a local row address (low LW bits) and a subarray address (next SW
// bits). The controller pops one entry per host write, and one more for every
// reattempt when a partner turns out to be mapped out.
//
// Interface: rnd_valid/rnd_ready is a valid-ready handshake with the random
// source, a word moves when both are high. avail says head_* is valid; pop
// removes the head at the clock edge. Thresholds compare a 32-bit number, so
// the probability of a decision is (SIGMA+1)/2^32; the defaults are 1 % and
// 0.002 %. The queue depth is not given by the paper and is chosen here.
module decision_queue
  import wolfram_pkg::*;
#(
  parameter int unsigned DEPTH  = 8,
  parameter int unsigned SW     = SUB_W,
  parameter int unsigned LW     = LOC_W,
  parameter logic [31:0] SIGMA1 = SIGMA1_THR,
  parameter logic [31:0] SIGMA2 = SIGMA2_THR,
  localparam int unsigned PW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          fill_en,
  input  logic          rnd_valid,
  input  logic [31:0]   rnd_data,
  output logic          rnd_ready,
  input  logic          pop,
  output logic          avail,
  output logic          head_blk,
  output logic          head_sub,
  output logic [LW-1:0] head_loc,
  output logic [SW-1:0] head_subt
);

  typedef struct packed {
    logic          blk;
    logic          sub;
    logic [LW-1:0] loc;
    logic [SW-1:0] subt;
  } entry_t;

  entry_t        q [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   count;
  logic          phase;        // 0: expecting the decision word
  logic          d_blk, d_sub; // decision half of the entry being built

  logic push, take;
  assign rnd_ready = fill_en && (count < (PW+1)'(DEPTH));
  assign take      = rnd_valid && rnd_ready;
  assign push      = take && phase;
  assign avail     = (count != 0);

  assign head_blk  = q[rd_ptr].blk;
  assign head_sub  = q[rd_ptr].sub;
  assign head_loc  = q[rd_ptr].loc;
  assign head_subt = q[rd_ptr].subt;

  logic do_pop;
  assign do_pop = pop && avail;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      phase  <= 1'b0;
      d_blk  <= 1'b0;
      d_sub  <= 1'b0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else begin
      if (take) begin
        phase <= ~phase;
        if (!phase) begin
          d_blk <= (rnd_data <= SIGMA1);
          d_sub <= (rnd_data <= SIGMA2);
        end else begin
          q[wr_ptr] <= '{blk: d_blk, sub: d_sub,
                         loc: rnd_data[LW-1:0], subt: rnd_data[LW +: SW]};
          wr_ptr    <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
        end
      end
      if (do_pop)
        rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (PW+1)'(DEPTH))
    else $error("decision_queue: overflow");

endmodule
