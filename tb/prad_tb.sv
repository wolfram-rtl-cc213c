// prad_tb: self-checking test of the programmable resistive address decoder.
//
// Part 1 uses the default 9-to-512 decoder and replays the block-repair
// example: after reset, addresses 0..510 sit in rows 0..510 and row 511 is
// empty; row 190 fails and is disabled, address 190 is programmed into the
// empty row 511, and from then on address 190 selects row 511 and no other
// address selects row 190. Part 2 runs random programming operations on a
// small group of four decoders against a reference model held in the test
// and compares hit, the one-hot row select, its index and the first empty row
// after every operation.
module prad_tb;
  import wolfram_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- part 1: default size ----------------
  logic [8:0]   a1;
  logic [511:0] sel1;
  logic         hit1, ef1;
  logic [8:0]   hidx1, eidx1, oi1, oi1b, oa1;
  prad_op_e     op1;

  prad u_big (.clk, .rst_n, .dec_sel(1'b0), .addr(a1), .row_sel(sel1), .hit(hit1),
              .hit_idx(hidx1), .empty_found(ef1), .empty_idx(eidx1),
              .op(op1), .op_idx(oi1), .op_idx2(oi1b), .op_addr(oa1));

  // ---------------- part 2: four small decoders ----------------
  localparam int D = 4, E = 16, AW = 4;
  logic [1:0]    ds;
  logic [AW-1:0] a2, oi2, oi2b, oa2;
  logic [E-1:0]  sel2;
  logic          hit2, ef2;
  logic [3:0]    hidx2, eidx2;
  prad_op_e      op2;

  prad #(.DECODERS(D), .ENTRIES(E), .ADDR_W(AW), .SPARES(2)) u_small (
    .clk, .rst_n, .dec_sel(ds), .addr(a2), .row_sel(sel2), .hit(hit2),
    .hit_idx(hidx2), .empty_found(ef2), .empty_idx(eidx2),
    .op(op2), .op_idx(oi2), .op_idx2(oi2b), .op_addr(oa2));

  logic [AW-1:0] m_st  [D][E];
  bit            m_occ [D][E];
  bit            m_dis [D][E];

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op1 = PRAD_NOP; oi1 = 0; oi1b = 0; oa1 = 0; a1 = 0;
    op2 = PRAD_NOP; oi2 = 0; oi2b = 0; oa2 = 0; a2 = 0; ds = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // identity mapping, row 511 empty
    for (int i = 0; i < 512; i++) begin
      a1 = 9'(i); #1;
      if (i < 511) check(hit1 && hidx1 == 9'(i) && sel1 == (512'd1 << i), $sformatf("identity %0d", i));
      else         check(!hit1 && sel1 == '0, "address 511 unmapped");
    end
    check(ef1 && eidx1 == 9'd511, "row 511 is the empty row");

    // row 190 fails: disable it
    @(negedge clk); op1 = PRAD_DISABLE; oi1 = 9'd190;
    @(negedge clk); op1 = PRAD_NOP;
    a1 = 9'd190; #1;
    check(!hit1, "blocked address 190 no longer selects a row");
    check(ef1 && eidx1 == 9'd511, "disabled row not offered as empty");
    // program 190 into the empty row
    op1 = PRAD_PROG; oi1 = eidx1; oa1 = 9'd190;
    @(negedge clk); op1 = PRAD_NOP;
    a1 = 9'd190; #1;
    check(hit1 && hidx1 == 9'd511 && sel1 == (512'd1 << 511), "190 now selects row 511");
    check(!ef1, "no empty row left");
    a1 = 9'd189; #1; check(hit1 && hidx1 == 9'd189, "189 unchanged");
    a1 = 9'd191; #1; check(hit1 && hidx1 == 9'd191, "191 unchanged");

    // swap two rows: RA1=5, RA2=300 exchange physical rows
    op1 = PRAD_SWAP; oi1 = 9'd5; oi1b = 9'd300;
    @(negedge clk); op1 = PRAD_NOP;
    a1 = 9'd5;   #1; check(hit1 && hidx1 == 9'd300, "5 -> row 300 after swap");
    a1 = 9'd300; #1; check(hit1 && hidx1 == 9'd5,   "300 -> row 5 after swap");
    // delete a block: row becomes empty
    op1 = PRAD_CLEAR; oi1 = 9'd300;
    @(negedge clk); op1 = PRAD_NOP;
    a1 = 9'd5; #1; check(!hit1, "cleared row no longer matches");
    check(ef1 && eidx1 == 9'd300, "cleared row is empty");

    // ---------------- part 2 ----------------
    for (int d = 0; d < D; d++)
      for (int e = 0; e < E; e++) begin
        m_st[d][e] = AW'(e); m_occ[d][e] = (e < E - 2); m_dis[d][e] = 0;
      end
    for (int it = 0; it < 3000; it++) begin
      int d, i, j;
      int kind;
      d = $urandom_range(D - 1); i = $urandom_range(E - 1); j = $urandom_range(E - 1);
      kind = $urandom_range(9);
      ds = 2'(d); oi2 = AW'(i); oi2b = AW'(j); oa2 = AW'($urandom);
      // keep the mapping one-to-one: program only addresses not yet mapped
      if (kind <= 1) begin
        bit used;
        used = 0;
        for (int e = 0; e < E; e++) if (m_occ[d][e] && m_st[d][e] == oa2) used = 1;
        if (used) kind = 9;
      end
      unique case (kind)
        0, 1: op2 = PRAD_PROG;
        2:    op2 = PRAD_CLEAR;
        3:    op2 = PRAD_DISABLE;
        4, 5: op2 = PRAD_SWAP;
        default: op2 = PRAD_NOP;
      endcase
      @(negedge clk);
      unique case (op2)
        PRAD_PROG: begin m_st[d][i] = oa2; m_occ[d][i] = 1; end
        PRAD_CLEAR: m_occ[d][i] = 0;
        PRAD_DISABLE: begin m_dis[d][i] = 1; m_occ[d][i] = 0; end
        PRAD_SWAP: begin
          logic [AW-1:0] t; bit o;
          t = m_st[d][i]; m_st[d][i] = m_st[d][j]; m_st[d][j] = t;
          o = m_occ[d][i]; m_occ[d][i] = m_occ[d][j]; m_occ[d][j] = o;
        end
        default: ;
      endcase
      op2 = PRAD_NOP;
      // look up a random address in a random decoder
      d = $urandom_range(D - 1);
      ds = 2'(d); a2 = AW'($urandom); #1;
      begin
        logic [E-1:0] exp_sel;
        int first_empty;
        exp_sel = '0;
        first_empty = -1;
        for (int e = 0; e < E; e++)
          exp_sel[e] = m_occ[d][e] && !m_dis[d][e] && m_st[d][e] == a2;
        for (int e = E - 1; e >= 0; e--) if (!m_occ[d][e] && !m_dis[d][e]) first_empty = e;
        check(sel2 == exp_sel && hit2 == (exp_sel != 0), $sformatf("random lookup it=%0d", it));
        if (exp_sel != 0) check(exp_sel[hidx2], "hit index");
        check(ef2 == (first_empty >= 0) && (first_empty < 0 || eidx2 == 4'(first_empty)), "empty row");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
