// decision_queue_tb: self-checking test of the precomputed decision queue.
//
// Part 1 (default thresholds sigma1 = 1 %, sigma2 = 0.002 %): words right at
// and just above each threshold give exactly the expected decisions, and the
// partner addresses are the low bits of the second word. Part 2 feeds 40000
// entries from $urandom and checks that the measured block-remap rate is
// within 1 % +- 0.2 %. Throughout, a reference FIFO in the test checks order,
// the full / empty behaviour (rnd_ready drops when DEPTH entries are held or
// fill_en is low) and the two-words-per-entry consumption.
module decision_queue_tb;
  import wolfram_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        fill_en, rnd_valid, rnd_ready, pop, avail, hb, hs;
  logic [31:0] rnd_data;
  logic [8:0]  hl;
  logic [10:0] hsub;

  decision_queue dut (.clk, .rst_n, .fill_en, .rnd_valid, .rnd_data, .rnd_ready,
                      .pop, .avail, .head_blk(hb), .head_sub(hs), .head_loc(hl), .head_subt(hsub));

  typedef struct { bit b; bit s; logic [8:0] l; logic [10:0] t; } ent_t;
  ent_t mq[$];
  bit   phase;
  bit   pb, ps;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference model, updated on every clock edge
  always @(posedge clk) if (rst_n) begin
    if (pop && mq.size() > 0) void'(mq.pop_front());
    if (rnd_valid && rnd_ready) begin
      if (!phase) begin pb = (rnd_data <= SIGMA1_THR); ps = (rnd_data <= SIGMA2_THR); end
      else mq.push_back('{pb, ps, rnd_data[8:0], rnd_data[19:9]});
      phase = !phase;
    end
  end

  // compare on the falling edge
  always @(negedge clk) if (rst_n) begin
    check(avail == (mq.size() > 0), "avail");
    check(rnd_ready == (fill_en && mq.size() < 8), "rnd_ready / full");
    if (mq.size() > 0)
      check(hb == mq[0].b && hs == mq[0].s && hl == mq[0].l && hsub == mq[0].t, "head entry");
  end

  int nblk, nent;

  initial begin
    #50000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phase = 0; fill_en = 0; rnd_valid = 0; rnd_data = 0; pop = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // part 1: threshold corners
    fill_en = 1; rnd_valid = 1;
    begin
      logic [31:0] w [8] = '{SIGMA1_THR, 32'h0001_2345, SIGMA1_THR + 1, 32'h000F_FFFF,
                             SIGMA2_THR, 32'h0000_0003, SIGMA2_THR + 1, 32'h1234_5678};
      for (int i = 0; i < 8; i++) begin rnd_data = w[i]; @(negedge clk); end
    end
    rnd_valid = 0;
    check(hb == 1 && hs == 0 && hl == 9'h145 && hsub == 11'h091, "r = sigma1: block only");
    pop = 1; @(negedge clk);
    check(hb == 0 && hs == 0, "r = sigma1+1: nothing");
    @(negedge clk);
    check(hb == 1 && hs == 1 && hl == 9'h003, "r = sigma2: block and subarray");
    @(negedge clk);
    check(hb == 1 && hs == 0, "r = sigma2+1: block only");
    @(negedge clk);
    pop = 0;
    check(!avail, "queue drained");
    // fill to full with fill_en toggling
    rnd_valid = 1;
    for (int i = 0; i < 40; i++) begin
      rnd_data = $urandom; fill_en = (i % 3 != 0); @(negedge clk);
    end
    check(mq.size() == 8, "queue fills to depth 8");
    // part 2: rate
    fill_en = 1; nblk = 0; nent = 0;
    while (nent < 40000) begin
      rnd_data = $urandom;
      pop = ($urandom_range(1) == 1) && avail;
      if (pop) begin nent++; if (hb) nblk++; end
      @(negedge clk);
    end
    pop = 0; rnd_valid = 0;
    $display("block decisions: %0d of %0d", nblk, nent);
    check(nblk > 320 && nblk < 480, "sigma1 rate near 1 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
