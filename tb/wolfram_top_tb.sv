// wolfram_top_tb: end-to-end test of a WoLFRaM bank with its controller.
//
// A host model issues random ACT / RD / WR / PRE sequences to a small bank
// (8 subarrays x 8 rows, two 512-bit bursts per row, short timing) and obeys
// the stall pin. A random-word source feeds the controller, but now and then
// withholds words so that some writes find no decision queued. The remap
// probabilities are raised (about 25 % block, 3 % subarray) so that every
// mechanism runs many times in a few thousand transactions. Rows of the cell
// array are marked as worn out at random, so writes fail verification and
// the controller repairs blocks. The first subarray to run out of empty rows
// is moved to the bank's one spare subarray (address 7, which the host never
// uses); after that, blocks are mapped out.
//
// The test keeps its own copy of the data at every logical address (the
// cells start with the array model's background pattern, word
// 0xA5000000 ^ {subarray,row}, which is the data of an address before its
// first write since the decoders start as the identity map) and checks
// every read against it: the data must follow its address through all block
// and subarray swaps and repairs. An ACT that misses marks the address as
// mapped out; the number of such addresses may never exceed the number of
// blocks the controller reports as mapped out. At the end every address is
// read back once more, and the test fails if any mechanism (block swap,
// subarray swap, reattempt with a new partner, repair, subarray recovery,
// mapping out, a write
// without a queued decision, a stall, an access to a mapped-out address)
// never happened.
module wolfram_top_tb;
  import wolfram_pkg::*;

  localparam int SW = 3, LW = 3, ROW_W = 1024, BURST_W = 512;
  localparam int NS = 1 << SW, NL = 1 << LW, NCOL = ROW_W / BURST_W, CW = 1;
  localparam int NTRANS = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mc_cmd_e            mc_cmd;
  logic [SW-1:0]      mc_sub;
  logic [LW-1:0]      mc_loc;
  logic [CW-1:0]      mc_col;
  logic [BURST_W-1:0] mc_wdata, mc_rdata;
  logic               mc_rvalid, mc_miss, bank_ready, stall;
  logic               rnd_valid, rnd_ready;
  logic [31:0]        rnd_data;
  logic               fail_set, cnt_failed;
  logic [SW-1:0]      fail_sub, cnt_sub;
  logic [LW-1:0]      fail_row, cnt_row;
  logic [31:0]        cnt;
  logic [31:0]        n_blk_swap, n_sub_swap, n_retry, n_abort, n_repair, n_mapped_out, n_no_decision, n_sub_recover;

  wolfram_top #(
    .SW(SW), .LW(LW), .ROW_W(ROW_W), .BURST_W(BURST_W), .ENDURANCE(0), .GLOBAL_SPARES(1),
    .TRCD(4), .TCL(3), .TCCD(3), .TRP(6), .TPROG(6), .QDEPTH(4),
    .SIGMA1(32'h4000_0000), .SIGMA2(32'h0800_0000)
  ) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #50000000;
    failures++; $display("FAIL: watchdog (controller %s, bank ready %0d)", dut.u_ctrl.st.name(), bank_ready);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- random-word source with gaps ----
  int gap;
  always @(negedge clk) begin
    if (gap > 0) gap--;
    else if ($urandom_range(999) == 0) gap = 300;
    rnd_valid = (gap == 0);
    rnd_data  = $urandom;
  end

  // ---- observation ----
  int stall_cycles = 0;
  always @(posedge clk) if (rst_n && stall) stall_cycles++;
  logic [BURST_W-1:0] rd_cap;
  bit                 rd_got;

  // ---- reference data ----
  logic [BURST_W-1:0] model [int];
  bit                 lost  [int];

  function automatic int key(input int s, input int l, input int c);
    return ((s * NL) + l) * NCOL + c;
  endfunction

  function automatic logic [BURST_W-1:0] expect_data(input int s, input int l, input int c);
    if (model.exists(key(s, l, c))) return model[key(s, l, c)];
    return {(BURST_W / 32){32'hA500_0000 ^ 32'((s << LW) | l)}};
  endfunction

  // ---- host ----
  task automatic cmd(input mc_cmd_e c, input int s = 0, input int l = 0, input int col = 0,
                     input logic [BURST_W-1:0] d = '0);
    @(negedge clk);
    while (!bank_ready || stall) @(negedge clk);
    mc_cmd = c; mc_sub = SW'(s); mc_loc = LW'(l); mc_col = CW'(col); mc_wdata = d;
    @(negedge clk);
    mc_cmd = MC_NOP;
    while (!bank_ready) @(negedge clk);
    // read data comes with the cycle in which the bank is ready again
    rd_got = mc_rvalid;
    rd_cap = mc_rdata;
  endtask

  int n_miss = 0;

  task automatic access(input int s, input int l, input int nops, input bit verify_all);
    cmd(MC_ACT, s, l);
    if (mc_miss) begin
      if (!lost.exists(s * NL + l)) begin
        lost[s * NL + l] = 1;
        check(lost.num() <= n_mapped_out,
              $sformatf("address %0d,%0d missing but only %0d blocks mapped out", s, l, n_mapped_out));
      end
      n_miss++;
      cmd(MC_PRE);
      return;
    end
    check(!lost.exists(s * NL + l), $sformatf("mapped-out address %0d,%0d hit again", s, l));
    for (int i = 0; i < nops; i++) begin
      int col;
      col = verify_all ? i : $urandom_range(NCOL - 1);
      if (verify_all || $urandom_range(1)) begin
        cmd(MC_RD, s, l, col);
        check(rd_got && rd_cap == expect_data(s, l, col),
              $sformatf("read %0d,%0d col %0d: valid %0d, %h vs %h at %0t", s, l, col, rd_got,
                        rd_cap[31:0], expect_data(s, l, col) >> 0, $time));
      end else begin
        logic [BURST_W-1:0] d;
        for (int w = 0; w < BURST_W / 32; w++) d[w*32 +: 32] = $urandom;
        cmd(MC_WR, s, l, col, d);
        model[key(s, l, col)] = d;
      end
    end
    cmd(MC_PRE);
  endtask

  initial begin
    mc_cmd = MC_NOP; mc_sub = 0; mc_loc = 0; mc_col = 0; mc_wdata = '0;
    fail_set = 0; fail_sub = 0; fail_row = 0; cnt_sub = 0; cnt_row = 0; gap = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (40) @(negedge clk);

    // the spare row's address is not mapped after reset
    cmd(MC_ACT, 0, NL - 1);
    check(mc_miss, "address of the spare row is unmapped after reset");
    cmd(MC_PRE);
    cmd(MC_ACT, NS - 1, 0);
    check(mc_miss, "address of the spare subarray is unmapped after reset");
    cmd(MC_PRE);

    for (int t = 0; t < NTRANS; t++) begin
      // wear out a random physical row now and then
      if ($urandom_range(59) == 0) begin
        @(negedge clk);
        fail_set = 1; fail_sub = SW'($urandom); fail_row = LW'($urandom);
        @(negedge clk);
        fail_set = 0;
      end
      access($urandom_range(NS - 2), $urandom_range(NL - 2), 1 + $urandom_range(3), 0);
    end

    // final read-back of every address
    for (int s = 0; s < NS - 1; s++)
      for (int l = 0; l < NL - 1; l++)
        access(s, l, NCOL, 1);

    $display("block swaps %0d, subarray swaps %0d, reattempts %0d, aborts %0d, repairs %0d,",
             n_blk_swap, n_sub_swap, n_retry, n_abort, n_repair);
    $display("subarray recoveries %0d", n_sub_recover);
    $display("mapped out %0d, writes without decision %0d, stall cycles %0d, misses %0d",
             n_mapped_out, n_no_decision, stall_cycles, n_miss);
    check(n_blk_swap > 0,    "block remap-and-swap happened");
    check(n_sub_swap > 0,    "subarray remap-and-swap happened");
    check(n_retry > 0,       "reattempt with a new partner happened");
    check(n_repair > 0,      "repair of a failed block happened");
    check(n_mapped_out > 0,  "a block was mapped out");
    check(n_sub_recover == 1, "the failed subarray moved to the spare one");
    check(n_no_decision > 0, "a write found no decision queued");
    check(stall_cycles > 0,  "the host was stalled");
    check(n_miss > 0,        "an access hit a mapped-out address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
