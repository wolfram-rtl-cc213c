// wolfram_bank_tb: self-checking test of the bank (PRADs, buffers, array,
// command sequencing, read-after-write verification) at a reduced geometry
// of 8 subarrays x 16 rows of 2048 bits, with the default PCM timing.
//
// It checks, against values worked out in the test:
//  * host ACT / RD / WR / PRE, the latency of each (tRCD, tCL, tCCD, tRP),
//    and that a clean RB is not written back;
//  * PROBE (OR of row selects) for mapped and unmapped (spare) addresses;
//  * the block remap-and-swap sequence of the WoLFRaM controller done by
//    hand: ACT RA2 into the SB, SWAP_LOCAL, PRE SB to RA2, then the host's
//    PRE of RA1: both addresses keep their data while their physical rows
//    have been exchanged (seen through per-row write counts);
//  * SWAP_GLOBAL, which moves a whole subarray address to another physical
//    subarray;
//  * failure handling: a worn-out row fails verification, REMAP_BLOCK moves
//    its address to the spare row, the rewrite verifies, and a second
//    failure in the same subarray finds no spare and maps the address out.
module wolfram_bank_tb;
  import wolfram_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int SW = 3, LW = 4, RW = 2048, BW = 512, CW = 2;

  logic          ready, mc_rvalid, mc_miss, wl_done, wl_result;
  mc_cmd_e       mc_cmd;
  logic [SW-1:0] mc_sub, wl_sub, wl_sub2, pre_sub, fail_sub, cnt_sub;
  logic [LW-1:0] mc_loc, wl_loc, wl_loc2, pre_loc, fail_row, cnt_row;
  logic [CW-1:0] mc_col;
  logic [BW-1:0] mc_wdata, mc_rdata;
  wl_op_e        wl_op;
  buf_sel_e      wl_buf, pre_buf;
  logic          pre_ev, pre_fail, pre_miss, fail_set, cnt_failed;
  logic [31:0]   cnt;

  wolfram_bank #(.SW(SW), .LW(LW), .ROW_W(RW), .BURST_W(BW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // pre_ev capture
  bit ev_seen, ev_fail, ev_miss;
  always @(posedge clk) if (pre_ev) begin ev_seen = 1; ev_fail = pre_fail; ev_miss = pre_miss; end

  function automatic logic [BW-1:0] bg(input int s, input int r, input int c);
    logic [31:0] w;
    w = 32'hA500_0000 ^ 32'((s << LW) | r);
    return {(BW / 32){w}};
  endfunction

  int lat;
  logic [BW-1:0] rd;
  bit res;

  task automatic mc(input mc_cmd_e c, input int s = 0, input int l = 0, input int col = 0,
                    input logic [BW-1:0] wd = '0);
    @(negedge clk);
    while (!ready) @(negedge clk);
    mc_cmd = c; mc_sub = SW'(s); mc_loc = LW'(l); mc_col = CW'(col); mc_wdata = wd;
    ev_seen = 0;
    @(negedge clk);
    mc_cmd = MC_NOP;
    lat = 1;
    while (!ready) begin @(negedge clk); lat++; end
    if (c == MC_RD) begin check(mc_rvalid, "rvalid with ready"); rd = mc_rdata; end
  endtask

  task automatic wl(input wl_op_e o, input buf_sel_e b, input int s, input int l,
                    input int s2 = 0, input int l2 = 0);
    @(negedge clk);
    while (!ready) @(negedge clk);
    wl_op = o; wl_buf = b; wl_sub = SW'(s); wl_loc = LW'(l); wl_sub2 = SW'(s2); wl_loc2 = LW'(l2);
    ev_seen = 0;
    @(negedge clk);
    wl_op = WL_NOP;
    lat = 1;
    while (!wl_done) begin @(negedge clk); lat++; end
    res = wl_result;
    @(negedge clk); lat++;
    check(ready, "ready after wl_done");
  endtask

  int pc [2];
  task automatic phys_count(input int s, input int r, input int k = 0);
    cnt_sub = SW'(s); cnt_row = LW'(r);
    #1;
    pc[k] = cnt;
  endtask

  initial begin
    #50000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [BW-1:0] d1, d2;

  initial begin
    mc_cmd = MC_NOP; mc_sub = 0; mc_loc = 0; mc_col = 0; mc_wdata = 0;
    wl_op = WL_NOP; wl_buf = BUF_SB; wl_sub = 0; wl_loc = 0; wl_sub2 = 0; wl_loc2 = 0;
    fail_set = 0; fail_sub = 0; fail_row = 0; cnt_sub = 0; cnt_row = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- host commands and their latencies ----
    mc(MC_ACT, 2, 5);   check(lat == T_RCD, $sformatf("ACT latency %0d", lat));
    check(!mc_miss, "mapped ACT");
    mc(MC_RD, 0, 0, 3); check(lat == T_CL, $sformatf("RD latency %0d", lat));
    check(rd == bg(2, 5, 3), "unwritten row reads background");
    mc(MC_PRE);         check(lat == T_RP, "PRE latency");
    phys_count(2, 5, 0);
    check(!ev_seen && pc[0] == 0, "clean RB not written back");
    d1 = {16{32'hD1D1_0001}};
    mc(MC_ACT, 2, 5); mc(MC_WR, 0, 0, 1, d1); check(lat == T_CCD, "WR latency");
    mc(MC_PRE);
    check(ev_seen && !ev_fail, "dirty RB written back and verified");
    phys_count(2, 5, 0);
    check(pc[0] == 1, "one array write");
    mc(MC_ACT, 2, 5); mc(MC_RD, 0, 0, 1); check(rd == d1, "data read back");
    mc(MC_RD, 0, 0, 0); check(rd == bg(2, 5, 0), "other column untouched");
    mc(MC_PRE);
    mc(MC_ACT, 2, 15); check(mc_miss, "spare row address is unmapped");

    // ---- probe ----
    wl(WL_PROBE, BUF_SB, 2, 7);  check(res == 1 && lat == 3, "probe mapped");
    wl(WL_PROBE, BUF_SB, 2, 15); check(res == 0, "probe unmapped");

    // ---- block remap and swap, RA1 = (4,3), RA2 = (4,9) ----
    d2 = {16{32'hD2D2_0002}};
    mc(MC_ACT, 4, 9); mc(MC_WR, 0, 0, 0, d2); mc(MC_PRE);          // RA2 holds D2
    d1 = {16{32'hD1D1_0111}};
    mc(MC_ACT, 4, 3); mc(MC_WR, 0, 0, 0, d1);                       // D1,new in RB
    wl(WL_ACT, BUF_SB, 4, 9);       check(lat == T_RCD, "wl ACT latency");
    wl(WL_SWAP_LOCAL, BUF_SB, 4, 3, 0, 9); check(res && lat == T_PROG + 3, "swap local");
    wl(WL_PRE, BUF_SB, 4, 9);       check(ev_seen && !ev_fail && lat == T_RP, "SB written back");
    phys_count(4, 3, 0);
    phys_count(4, 9, 1);
    check(pc[0] == 1 && pc[1] == 1, "D2 now in RA1's old row");
    mc(MC_PRE);                     check(ev_seen && !ev_fail, "RB written back");
    phys_count(4, 9, 0);
    check(pc[0] == 2, "RA1 now in RA2's old row");
    mc(MC_ACT, 4, 3); mc(MC_RD, 0, 0, 0); check(rd == d1, "RA1 keeps its data");
    mc(MC_PRE);
    mc(MC_ACT, 4, 9); mc(MC_RD, 0, 0, 0); check(rd == d2, "RA2 keeps its data");
    mc(MC_PRE);

    // ---- global swap of subarrays 4 and 6 (no data copy) ----
    wl(WL_SWAP_GLOBAL, BUF_SB, 4, 0, 6, 0); check(res, "swap global");
    mc(MC_ACT, 6, 3); mc(MC_RD, 0, 0, 0); check(rd == d1, "subarray 6 now maps to physical 4");
    mc(MC_PRE);
    mc(MC_ACT, 4, 1); mc(MC_RD, 0, 0, 0); check(rd == bg(6, 1, 0), "subarray 4 now maps to physical 6");
    mc(MC_PRE);

    // ---- failure and repair in subarray 1 ----
    fail_sub = 1; fail_row = 7;
    @(negedge clk); fail_set = 1; @(negedge clk); fail_set = 0;
    d1 = {16{32'hFA11_0007}};
    mc(MC_ACT, 1, 7); mc(MC_WR, 0, 0, 2, d1); mc(MC_PRE);
    check(ev_seen && ev_fail, "verification catches the failed row");
    wl(WL_REMAP_BLOCK, BUF_RB, 1, 7); check(res, "address 7 moved to the empty row");
    wl(WL_PRE, BUF_RB, 1, 7);         check(ev_seen && !ev_fail, "rewrite to spare row verifies");
    phys_count(1, 15, 0);
    check(pc[0] == 1, "spare row 15 written");
    mc(MC_ACT, 1, 7); mc(MC_RD, 0, 0, 2); check(rd == d1, "data of repaired block");
    mc(MC_PRE);
    mc(MC_ACT, 1, 15); check(mc_miss, "row 15 still not an address");
    // second failure: no spare left -> mapped out
    fail_sub = 1; fail_row = 2;
    @(negedge clk); fail_set = 1; @(negedge clk); fail_set = 0;
    mc(MC_ACT, 1, 2); mc(MC_WR, 0, 0, 0, d1); mc(MC_PRE);
    check(ev_seen && ev_fail, "second failure detected");
    wl(WL_REMAP_BLOCK, BUF_RB, 1, 2); check(!res, "no empty row: mapped out");
    wl(WL_PROBE, BUF_SB, 1, 2);       check(!res, "mapped-out address misses");
    wl(WL_PROBE, BUF_SB, 1, 7);       check(res, "repaired address still hits");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
