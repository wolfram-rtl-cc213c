// wolfram_controller_tb: self-checking test of the WoLFRaM controller's
// command sequences, with a scripted bank in the test. It uses 3 subarray
// address bits and 2 local-row bits so that a whole-subarray swap is short.
//
// The scripted bank accepts one command when ready, answers after a fixed
// 3 cycles, returns PROBE misses for a chosen set of addresses and fails the
// verification of chosen PREs. The random words fed to the controller are
// chosen by the test, so every decision is known. The test checks the exact
// command lists for:
//  * a block remap-and-swap (PROBE, ACT->SB, SWAP_LOCAL, PRE SB), including
//    the reattempts when the partner equals the written address or is mapped
//    out, and that STALL covers exactly that sequence;
//  * a repair after the host's PRE fails verification (REMAP_BLOCK, PRE RB);
//  * a subarray remap-and-swap deferred to the host's PRE: probes of every
//    local address in both subarrays, the four-command exchange per address
//    (skipping an address mapped out in both) and the final SWAP_GLOBAL;
//  * no remap when no decision is queued.
// The partner of the first attempt comes from the decision popped at the
// write; each reattempt pops the next queued entry for a new partner.
module wolfram_controller_tb;
  import wolfram_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int SW = 3, LW = 2;

  mc_cmd_e       mc_cmd;
  logic [SW-1:0] mc_sub, wl_sub, wl_sub2;
  logic [LW-1:0] mc_loc, wl_loc, wl_loc2;
  logic          bank_ready, stall, wl_done, wl_result, pre_ev, pre_fail;
  wl_op_e        wl_op;
  buf_sel_e      wl_buf;
  logic          rnd_valid, rnd_ready;
  logic [31:0]   rnd_data;
  logic [31:0]   n_blk_swap, n_sub_swap, n_retry, n_abort, n_repair, n_mapped_out, n_no_decision, n_sub_recover;

  wolfram_controller #(.SW(SW), .LW(LW), .QDEPTH(4)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- scripted bank ----
  string log_q[$];
  bit    miss_set [string];   // "s,l" -> probe misses
  int    fail_pres;           // number of upcoming PREs that fail verification
  int    busy;
  bit    busy_wl;
  bit    res_r;

  always @(posedge clk) begin
    pre_ev <= 0;
    wl_done <= 0;
    if (!rst_n) begin busy = 0; bank_ready <= 1; end
    else if (busy > 0) begin
      busy--;
      if (busy == 1 && busy_wl) begin wl_done <= 1; wl_result <= res_r; end
      if (busy == 0) bank_ready <= 1;
    end else if (wl_op != WL_NOP) begin
      string k;
      k = $sformatf("%0d,%0d", wl_sub, wl_loc);
      log_q.push_back($sformatf("%s %s %0d,%0d %0d,%0d", wl_op.name(), wl_buf.name(),
                                wl_sub, wl_loc, wl_sub2, wl_loc2));
      res_r = 1;
      if (wl_op == WL_PROBE && miss_set.exists(k)) res_r = 0;
      if (wl_op == WL_PRE) begin
        pre_ev <= 1; pre_fail <= (fail_pres > 0);
        if (fail_pres > 0) fail_pres--;
      end
      busy = 3; busy_wl = 1; bank_ready <= 0;
    end else if (mc_cmd != MC_NOP) begin
      check(!stall, "host command while stalled");
      if (mc_cmd == MC_PRE) begin
        pre_ev <= 1; pre_fail <= (fail_pres > 0);
        if (fail_pres > 0) fail_pres--;
      end
      busy = 3; busy_wl = 0; bank_ready <= 0;
    end
  end

  // ---- host ----
  int stall_cycles;
  always @(posedge clk) if (stall) stall_cycles++;

  task automatic host(input mc_cmd_e c, input int s = 0, input int l = 0);
    @(negedge clk);
    while (!bank_ready || stall) @(negedge clk);
    mc_cmd = c; mc_sub = SW'(s); mc_loc = LW'(l);
    @(negedge clk);
    mc_cmd = MC_NOP;
    // let the controller finish whatever the command started
    repeat (2) @(negedge clk);
    while (stall || !bank_ready) @(negedge clk);
  endtask

  // random words: pairs (decision word, target word)
  logic [31:0] words[$];
  always @(negedge clk) begin
    rnd_valid = (words.size() > 0);
    rnd_data  = rnd_valid ? words[0] : 32'h0;
  end
  always @(posedge clk) if (rnd_valid && rnd_ready) void'(words.pop_front());

  function automatic logic [31:0] tw(input int sub, input int loc);
    return 32'((sub << LW) | loc);  // target word: local row in the low LW bits, subarray above
  endfunction

  task automatic expect_log(input string exp[$], input string what);
    check(log_q.size() == exp.size(), $sformatf("%s: %0d commands, expected %0d",
                                                what, log_q.size(), exp.size()));
    foreach (exp[i])
      if (i < log_q.size()) check(log_q[i] == exp[i], $sformatf("%s [%0d]: '%s' vs '%s'",
                                                           what, i, log_q[i], exp[i]));
    log_q.delete();
  endtask

  initial begin
    #50000000;
    failures++; $display("FAIL: watchdog (controller state %s)", dut.st.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string e[$];
    mc_cmd = MC_NOP; mc_sub = 0; mc_loc = 0; fail_pres = 0; stall_cycles = 0;
    wl_result = 0; pre_fail = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1: block remap, partner = written address, then mapped out, then ok
    words = '{32'd1_000_000, tw(0, 1), // decision: block only; target 1 (= RA1) -> retry
              32'hFFFF_FFFF, tw(0, 0),  // target 0, probe misses -> retry
              32'hFFFF_FFFF, tw(0, 2)}; // target 2 -> ok
    miss_set["5,0"] = 1;
    repeat (20) @(negedge clk);
    host(MC_ACT, 5, 1);
    stall_cycles = 0;
    host(MC_WR);
    e = '{"WL_PROBE BUF_SB 5,0 0,1",
          "WL_PROBE BUF_SB 5,2 0,1",
          "WL_ACT BUF_SB 5,2 0,1",
          "WL_SWAP_LOCAL BUF_SB 5,1 0,2",
          "WL_PRE BUF_SB 5,2 0,1"};
    expect_log(e, "block swap");
    check(n_blk_swap == 1 && n_retry == 2, "block swap and retry counters");
    check(stall_cycles >= 5 * 4 && stall_cycles <= 5 * 4 + 12,
          $sformatf("stall spans the 5 commands (%0d cycles)", stall_cycles));

    // ---- 2: host PRE fails verification -> repair
    fail_pres = 1;
    host(MC_PRE);
    e = '{"WL_REMAP_BLOCK BUF_RB 5,1 0,1", "WL_PRE BUF_RB 5,1 0,1"};
    expect_log(e, "repair");
    check(n_repair == 1, "repair counter");

    // ---- 3: subarray swap: decision on WR, executed at the host's PRE
    words = '{32'd0, tw(5, 3),            // block (target 3) and subarray (partner 5 = s1)
              32'hFFFF_FFFF, tw(5, 0)};   // block retry target 0
    miss_set["5,3"] = 1; miss_set["6,3"] = 1;  // address 3 mapped out in both
    miss_set.delete("5,0");
    repeat (20) @(negedge clk);
    host(MC_ACT, 5, 2);
    host(MC_WR);
    e = '{"WL_PROBE BUF_SB 5,3 5,2"};     // block partner 3 is mapped out ...
    // ... the retry takes the next entry's local target, 0
    e.push_back("WL_PROBE BUF_SB 5,0 5,2");
    e.push_back("WL_ACT BUF_SB 5,0 5,2");
    e.push_back("WL_SWAP_LOCAL BUF_SB 5,2 5,0");
    e.push_back("WL_PRE BUF_SB 5,0 5,2");
    expect_log(e, "block swap before subarray swap");
    words = '{32'hFFFF_FFFF, tw(6, 1)};  // subarray partner drawn again: 6
    repeat (20) @(negedge clk);
    host(MC_PRE);
    e.delete();
    for (int a = 0; a < 4; a++) begin
      e.push_back($sformatf("WL_PROBE BUF_SB 5,%0d 6,2", a));
      e.push_back($sformatf("WL_PROBE BUF_SB 6,%0d 6,2", a));
    end
    for (int a = 0; a < 4; a++) if (a != 3) begin
      e.push_back($sformatf("WL_ACT BUF_RB 5,%0d 6,2", a));
      e.push_back($sformatf("WL_ACT BUF_SB 6,%0d 6,2", a));
      e.push_back($sformatf("WL_PRE BUF_RB 6,%0d 6,2", a));
      e.push_back($sformatf("WL_PRE BUF_SB 5,%0d 6,2", a));
    end
    e.push_back("WL_SWAP_GLOBAL BUF_SB 5,0 6,2");  // local fields unused
    expect_log(e, "subarray swap");
    check(n_sub_swap == 1, "subarray swap counter");

    // ---- 4: no decision queued -> plain write, no stall
    words.delete();
    repeat (30) @(negedge clk);
    // drain queue entries that may remain
    while (dut.q_avail) begin host(MC_ACT, 1, 1); host(MC_WR); host(MC_PRE); log_q.delete(); end
    begin
      int nd;
      nd = n_no_decision;
      host(MC_ACT, 1, 1); host(MC_WR);
      check(n_no_decision == nd + 1, "write without a queued decision");
      check(log_q.size() == 0, "no commands without a decision");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
