// wolfram_top_full_tb: the WoLFRaM bank and controller at full size (2048
// subarrays x 512 rows of 1 KB, 64-byte bursts, PCM timing, sigma1 = 1 %,
// sigma2 = 0.002 %, one spare subarray), taken through one block
// remap-and-swap, one subarray remap-and-swap, one block repair and one
// recovery of a failed subarray into the spare one.
//
// The random words given to the controller are chosen so that these
// operations happen at once: the first write draws a block decision whose
// partner, local row 511, is the unmapped spare row (the controller must
// reattempt) and then row 300; the second write draws both decisions, with
// local partner 2 and partner subarray 9. The test checks the data seen at
// each address before and after the swaps (unwritten rows hold the array
// model's background word 0xA5000000 ^ {subarray,row} of the physical row
// they started in), that the writes landed in the physical rows the swap
// sends them to, the event counters, and that the block swap stalls the host
// for at least tRCD + T_PROG + tRP cycles. Last, a row of subarray 3 is worn
// out (its block is repaired into the empty row 511), then row 511 too: the
// next failed write leaves no empty row, so the subarray is copied into the
// spare subarray (physical 2047) and its data must all follow.
module wolfram_top_full_tb;
  import wolfram_pkg::*;

  localparam int SW = SUB_W, LW = LOC_W, BW = BURST_BITS, CW = COL_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mc_cmd_e       mc_cmd;
  logic [SW-1:0] mc_sub;
  logic [LW-1:0] mc_loc;
  logic [CW-1:0] mc_col;
  logic [BW-1:0] mc_wdata, mc_rdata;
  logic          mc_rvalid, mc_miss, bank_ready, stall;
  logic          rnd_valid, rnd_ready;
  logic [31:0]   rnd_data;
  logic          fail_set, cnt_failed;
  logic [SW-1:0] fail_sub, cnt_sub;
  logic [LW-1:0] fail_row, cnt_row;
  logic [31:0]   cnt;
  logic [31:0]   n_blk_swap, n_sub_swap, n_retry, n_abort, n_repair, n_mapped_out, n_no_decision, n_sub_recover;

  wolfram_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #20000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random words, taken in order
  logic [31:0] words[$];
  always @(negedge clk) begin
    rnd_valid = (words.size() > 0);
    rnd_data  = rnd_valid ? words[0] : 32'h0;
  end
  always @(posedge clk) if (rnd_valid && rnd_ready) void'(words.pop_front());

  function automatic logic [31:0] tw(input int sub, input int loc);
    return 32'((sub << LW) | loc);
  endfunction

  function automatic logic [BW-1:0] bg(input int sub, input int loc);
    return {(BW / 32){32'hA500_0000 ^ 32'((sub << LW) | loc)}};
  endfunction

  int stall_cycles = 0;
  always @(posedge clk) if (rst_n && stall) stall_cycles++;

  logic [BW-1:0] rd;
  bit            rd_ok;
  task automatic cmd(input mc_cmd_e c, input int s = 0, input int l = 0, input int col = 0,
                     input logic [BW-1:0] d = '0);
    @(negedge clk);
    while (!bank_ready || stall) @(negedge clk);
    mc_cmd = c; mc_sub = SW'(s); mc_loc = LW'(l); mc_col = CW'(col); mc_wdata = d;
    @(negedge clk);
    mc_cmd = MC_NOP;
    while (!bank_ready) @(negedge clk);
    rd_ok = mc_rvalid;
    rd = mc_rdata;
  endtask

  task automatic read_check(input int s, input int l, input int col, input logic [BW-1:0] exp,
                            input string what);
    cmd(MC_ACT, s, l);
    check(!mc_miss, {what, ": address mapped"});
    cmd(MC_RD, s, l, col);
    check(rd_ok && rd == exp, $sformatf("%s: %h vs %h", what, rd[31:0], exp[31:0]));
    cmd(MC_PRE);
  endtask

  task automatic phys_count(input int s, input int r, output int n);
    cnt_sub = SW'(s); cnt_row = LW'(r); #1;
    n = cnt;
  endtask

  task automatic fail_pulse(input int s, input int r);
    @(negedge clk);
    fail_set = 1; fail_sub = SW'(s); fail_row = LW'(r);
    @(negedge clk);
    fail_set = 0;
  endtask

  initial begin
    logic [BW-1:0] d1, d2;
    int n;
    mc_cmd = MC_NOP; mc_sub = 0; mc_loc = 0; mc_col = 0; mc_wdata = '0;
    fail_set = 0; fail_sub = 0; fail_row = 0; cnt_sub = 0; cnt_row = 0;
    for (int w = 0; w < BW / 32; w++) begin d1[w*32 +: 32] = $urandom; d2[w*32 +: 32] = $urandom; end
    repeat (5) @(posedge clk);
    rst_n = 1;

    // ---- block remap-and-swap of (5,100) ----
    words = '{32'd1_000_000, tw(5, 511),      // block only; partner 511 is unmapped
              32'hFFFF_FFFF, tw(5, 300)};     // reattempt: partner 300
    repeat (20) @(negedge clk);
    cmd(MC_ACT, 5, 100);
    stall_cycles = 0;
    cmd(MC_WR, 5, 100, 3, d1);
    while (stall) @(negedge clk);
    check(n_blk_swap == 1 && n_retry == 1, "one block swap after one reattempt");
    $display("block swap stalled the host for %0d cycles", stall_cycles);
    check(stall_cycles >= T_RCD + T_PROG + T_RP,
          $sformatf("block swap stalls the host (%0d cycles)", stall_cycles));
    cmd(MC_RD, 5, 100, 3);
    check(rd_ok && rd == d1, "written data still in the row buffer");
    cmd(MC_PRE);
    // (5,100) now lives in physical row 300, (5,300) in physical row 100
    phys_count(5, 300, n); check(n == 1, "host PRE wrote physical row 300");
    phys_count(5, 100, n); check(n == 1, "swap buffer PRE wrote physical row 100");
    read_check(5, 100, 3, d1, "block (5,100) after swap");
    read_check(5, 100, 0, bg(5, 100), "rest of block (5,100)");
    read_check(5, 300, 0, bg(5, 300), "partner (5,300) after swap");

    // ---- block swap of (5,100) with row 2, then subarray swap 5 <-> 9 ----
    words = '{32'd0, tw(9, 2)};
    repeat (20) @(negedge clk);
    cmd(MC_ACT, 5, 100);
    cmd(MC_WR, 5, 100, 0, d2);
    while (stall) @(negedge clk);
    check(n_blk_swap == 2, "second block swap");
    stall_cycles = 0;
    cmd(MC_PRE);
    while (stall || !bank_ready) @(negedge clk);
    $display("subarray swap stalled the host for %0d cycles", stall_cycles);
    check(n_sub_swap == 1, "subarray swap done at the host's precharge");
    read_check(5, 100, 0, d2, "block (5,100) col 0 after subarray swap");
    read_check(5, 100, 3, d1, "block (5,100) col 3 after subarray swap");
    read_check(5, 2, 0, bg(5, 2), "block (5,2) after both swaps");
    read_check(5, 300, 1, bg(5, 300), "block (5,300) after both swaps");
    read_check(9, 7, 0, bg(9, 7), "block (9,7) after subarray swap");
    read_check(9, 510, 1, bg(9, 510), "block (9,510) after subarray swap");
    // subarray 5's data now sits in physical subarray 9
    phys_count(9, 300, n); check(n >= 1, "data moved into physical subarray 9");
    check(n_repair == 0 && n_mapped_out == 0 && n_abort == 0, "no repair, mapping out or abort");

    // ---- repair, then recovery of subarray 3 into the spare subarray ----
    // no random words are queued, so these writes draw no remap decision
    fail_pulse(3, 40);
    cmd(MC_ACT, 3, 40);
    cmd(MC_WR, 3, 40, 0, d1);
    cmd(MC_PRE);
    while (stall || !bank_ready) @(negedge clk);
    check(n_repair == 1 && n_sub_recover == 0, "failed row 40 repaired into the empty row");
    read_check(3, 40, 0, d1, "block (3,40) after repair");
    fail_pulse(3, 511);
    stall_cycles = 0;
    cmd(MC_ACT, 3, 40);
    cmd(MC_WR, 3, 40, 0, d2);
    cmd(MC_PRE);
    while (stall || !bank_ready) @(negedge clk);
    $display("subarray recovery stalled the host for %0d cycles", stall_cycles);
    check(n_sub_recover == 1 && n_mapped_out == 0, "subarray 3 moved to the spare subarray");
    read_check(3, 40, 0, d2, "block (3,40) after subarray recovery");
    read_check(3, 7, 1, bg(3, 7), "block (3,7) copied to the spare subarray");
    read_check(3, 510, 0, bg(3, 510), "block (3,510) copied to the spare subarray");
    phys_count((1 << SW) - 1, 40, n); check(n == 1, "(3,40) now written in physical subarray 2047");
    cmd(MC_ACT, (1 << SW) - 1, 0);
    check(mc_miss, "spare subarray address unmapped again after the recovery");
    cmd(MC_PRE);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
