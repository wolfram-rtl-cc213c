// prad: programmable resistive address decoder (PRAD), or a group of them.
//
// A conventional row decoder ties each decoder row to one fixed address. A
// PRAD instead stores an address in every decoder row (in hardware, each bit
// as a pair of resistive switches S / S-bar). On a lookup every row compares
// its stored address with the input address bit by bit (XNOR per bit, AND
// over all bits), exactly like a fully associative tag match, and the
// matching row drives its row-select line. The OR of all row selects ("hit")
// tells whether the address is mapped at all; a miss means the address has
// been mapped out.
//
// Each row also carries two state bits. "occupied" is set when an address is
// programmed into the row and cleared when its data block is deleted, so
// empty (spare or unoccupied) rows can be found; the lowest-numbered empty
// row is reported on empty_idx. "disabled" physically removes a failed row:
// it never matches and is never offered as empty again.
//
// DECODERS independent decoders of ENTRIES rows share the ports; dec_sel
// picks the one that is looked up and programmed (the global decoder is one
// decoder of 2048 rows; the 2048 local decoders of a bank, one per subarray,
// form one instance with DECODERS=2048, of which the subarray select enables
// one). Reset loads the identity mapping: row i stores address i, and the
// last SPARES rows of every decoder are left empty, as in the block-repair
// example of the paper where row 511 is the empty row. Reset stands for the
// initial programming at manufacturing time; the real PRAD is non-volatile.
//
// Timing: lookup is combinational from dec_sel/addr. A programming operation
// (op) is applied at the clock edge, to decoder dec_sel. PRAD_SWAP exchanges
// the stored addresses of rows op_idx and op_idx2, which is how a pair of
// addresses is remapped in one step.
module prad
  import wolfram_pkg::*;
#(
  parameter int unsigned DECODERS = 1,
  parameter int unsigned ENTRIES  = 512,
  parameter int unsigned ADDR_W   = 9,
  parameter int unsigned SPARES   = 1,
  localparam int unsigned DEC_W   = (DECODERS > 1) ? $clog2(DECODERS) : 1,
  localparam int unsigned IDX_W   = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [DEC_W-1:0]   dec_sel,
  // lookup
  input  logic [ADDR_W-1:0]  addr,
  output logic [ENTRIES-1:0] row_sel,
  output logic               hit,
  output logic [IDX_W-1:0]   hit_idx,
  // empty-row tracking
  output logic               empty_found,
  output logic [IDX_W-1:0]   empty_idx,
  // programming
  input  prad_op_e           op,
  input  logic [IDX_W-1:0]   op_idx,
  input  logic [IDX_W-1:0]   op_idx2,
  input  logic [ADDR_W-1:0]  op_addr
);

  logic [ADDR_W-1:0]  stored   [DECODERS][ENTRIES];
  logic [ENTRIES-1:0] occupied [DECODERS];
  logic [ENTRIES-1:0] disabled [DECODERS];

  logic [DEC_W-1:0] d;
  assign d = (DECODERS > 1) ? dec_sel : '0;

  // Associative lookup: X_i = XNOR(A_i, S_i), row select = AND over i.
  always_comb begin
    for (int e = 0; e < ENTRIES; e++)
      row_sel[e] = (&(~(stored[d][e] ^ addr))) & occupied[d][e] & ~disabled[d][e];
  end

  assign hit = |row_sel;

  always_comb begin
    hit_idx = '0;
    for (int e = ENTRIES - 1; e >= 0; e--)
      if (row_sel[e]) hit_idx = IDX_W'(e);
  end

  always_comb begin
    empty_found = 1'b0;
    empty_idx   = '0;
    for (int e = ENTRIES - 1; e >= 0; e--)
      if (!occupied[d][e] && !disabled[d][e]) begin
        empty_found = 1'b1;
        empty_idx   = IDX_W'(e);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DECODERS; k++) begin
        for (int e = 0; e < ENTRIES; e++) begin
          stored[k][e]   <= ADDR_W'(e);
          occupied[k][e] <= (e < ENTRIES - SPARES);
          disabled[k][e] <= 1'b0;
        end
      end
    end else begin
      unique case (op)
        PRAD_PROG: begin
          stored[d][op_idx]   <= op_addr;
          occupied[d][op_idx] <= 1'b1;
        end
        PRAD_CLEAR:   occupied[d][op_idx] <= 1'b0;
        PRAD_DISABLE: begin
          disabled[d][op_idx] <= 1'b1;
          occupied[d][op_idx] <= 1'b0;
        end
        PRAD_SWAP: begin
          stored[d][op_idx]  <= stored[d][op_idx2];
          stored[d][op_idx2] <= stored[d][op_idx];
          occupied[d][op_idx]  <= occupied[d][op_idx2];
          occupied[d][op_idx2] <= occupied[d][op_idx];
        end
        default: ;
      endcase
    end
  end

  // A decoder must never select two rows for one address.
  a_one_row: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(row_sel))
    else $error("prad: address matches more than one decoder row");

endmodule
