// wolfram_attack_tb: the repeated address attack on a small WoLFRaM bank.
//
// The attack writes the same address over and over (ACT, WR, PRE). Without
// wear-leveling every one of those writes lands in the same physical row.
// With WoLFRaM, each write is remapped with probability sigma1 to a random
// row of its subarray, and with probability sigma2 its whole subarray is
// exchanged with a random other one, so the writes spread over the bank.
//
// The bank here has 4 subarrays x 16 rows; sigma1 is 10 % (the faster of the
// two settings whose leveling speed is shown for the design) and sigma2 is
// raised to about 0.4 % so that subarray swaps happen within the short run.
// After NWR attack writes the test reads the write count of every physical
// row through the cell-array observation port and checks that:
//  * the total equals the attack writes plus the extra writes of the swaps
//    (one per block swap, two per mapped local address in a subarray swap,
//    which rewrites both subarrays), so no write is lost or duplicated;
//  * the most-written row took well under the attack's writes (under a
//    quarter), and more than half of all rows took some of them;
//  * the attacked address still reads back the last data written.
// It prints the per-row counts' maximum, mean and coefficient of variation.
module wolfram_attack_tb;
  import wolfram_pkg::*;

  localparam int SW = 2, LW = 4, ROW_W = 1024, BURST_W = 512;
  localparam int NS = 1 << SW, NL = 1 << LW;
  localparam int NWR = 4000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mc_cmd_e            mc_cmd;
  logic [SW-1:0]      mc_sub;
  logic [LW-1:0]      mc_loc;
  logic [0:0]         mc_col;
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
    .SW(SW), .LW(LW), .ROW_W(ROW_W), .BURST_W(BURST_W),
    .SIGMA1(32'd429496729), .SIGMA2(32'd17179869)
  ) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    rnd_valid = 1'b1;
    rnd_data  = $urandom;
  end

  task automatic cmd(input mc_cmd_e c, input int s = 0, input int l = 0,
                     input logic [BURST_W-1:0] d = '0);
    @(negedge clk);
    while (!bank_ready || stall) @(negedge clk);
    mc_cmd = c; mc_sub = SW'(s); mc_loc = LW'(l); mc_col = 1'b0; mc_wdata = d;
    @(negedge clk);
    mc_cmd = MC_NOP;
    while (!bank_ready) @(negedge clk);
  endtask

  initial begin
    logic [BURST_W-1:0] d;
    longint total, sumsq, mx;
    int     touched;
    real    mean, cov;
    mc_cmd = MC_NOP; mc_sub = 0; mc_loc = 0; mc_col = 0; mc_wdata = '0;
    fail_set = 0; fail_sub = 0; fail_row = 0; cnt_sub = 0; cnt_row = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (40) @(negedge clk);

    for (int i = 0; i < NWR; i++) begin
      d = {(BURST_W / 32){32'(i)}};
      cmd(MC_ACT, 1, 3);
      cmd(MC_WR, 1, 3, d);
      cmd(MC_PRE);
    end
    cmd(MC_ACT, 1, 3);
    cmd(MC_RD, 1, 3);
    check(mc_rvalid && mc_rdata == d, "attacked address holds the last data written");
    cmd(MC_PRE);

    total = 0; sumsq = 0; mx = 0; touched = 0;
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < NL; r++) begin
        cnt_sub = SW'(s); cnt_row = LW'(r); #1;
        total += cnt; sumsq += longint'(cnt) * cnt;
        if (cnt > mx) mx = cnt;
        if (cnt != 0) touched++;
      end
    mean = real'(total) / (NS * NL);
    cov  = $sqrt(real'(sumsq) / (NS * NL) - mean * mean) / mean;
    $display("attack writes %0d: block swaps %0d, subarray swaps %0d, reattempts %0d",
             NWR, n_blk_swap, n_sub_swap, n_retry);
    $display("per-row writes: max %0d, mean %0.1f, CoV %0.2f, rows written %0d of %0d",
             mx, mean, cov, touched, NS * NL);
    check(total == NWR + n_blk_swap + n_sub_swap * 2 * (NL - 1),
          $sformatf("write total %0d = attack + swap writes", total));
    check(n_blk_swap > NWR / 20, "block swaps at about sigma1");
    check(n_sub_swap > 0, "subarray swaps happened");
    check(mx < NWR / 4, "no row takes a quarter of the attack");
    check(touched > NS * NL / 2, "the attack spreads over most rows");
    check(n_repair == 0 && n_mapped_out == 0, "no failures at this wear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
