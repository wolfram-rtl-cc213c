// pcm_array_tb: self-checking test of the cell-array model at a reduced
// size (16 subarrays x 32 rows of 64 bits) with an endurance of 5 writes.
//
// Checks that an unwritten row reads its address-derived background pattern,
// that written rows read back what was written, that writes are counted per
// row, that a row fails on reaching its endurance or when marked failed, and
// that a failed row then returns data differing from the written data, which
// is what read-after-write verification relies on.
module pcm_array_tb;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int SW = 4, LW = 5, RW = 64, END = 5;
  logic [SW-1:0] rd_sub, wr_sub, fail_sub, cnt_sub;
  logic [LW-1:0] rd_row, wr_row, fail_row, cnt_row;
  logic [RW-1:0] rd_data, wr_data;
  logic          we, fail_set, cnt_failed;
  logic [31:0]   cnt;

  pcm_array #(.SW(SW), .LW(LW), .ROW_W(RW), .ENDURANCE(END)) dut (.*);

  logic [RW-1:0] m_data [1 << (SW + LW)];
  int            m_cnt  [1 << (SW + LW)];
  bit            m_fail [1 << (SW + LW)];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; fail_set = 0; rd_sub = 0; rd_row = 0; wr_sub = 0; wr_row = 0; wr_data = 0;
    fail_sub = 0; fail_row = 0; cnt_sub = 0; cnt_row = 0;
    for (int k = 0; k < (1 << (SW + LW)); k++) begin
      logic [31:0] w;
      w = 32'hA500_0000 ^ 32'(k);
      m_data[k] = {w, w}; m_cnt[k] = 0; m_fail[k] = 0;
    end
    @(negedge clk);
    for (int it = 0; it < 3000; it++) begin
      int k;
      k = $urandom_range((1 << (SW + LW)) - 1) & 'h3f;   // 64 rows, so some wear out
      we = ($urandom_range(2) != 0);
      fail_set = ($urandom_range(40) == 0);
      {wr_sub, wr_row} = (SW + LW)'(k);
      {fail_sub, fail_row} = (SW + LW)'($urandom_range(63));
      wr_data = {$urandom, $urandom};
      @(negedge clk);
      if (we) begin
        m_cnt[k]++;
        if (m_cnt[k] >= END) m_fail[k] = 1;
        m_data[k] = m_fail[k] ? {wr_data[RW-1:1], ~wr_data[0]} : wr_data;
        {rd_sub, rd_row} = (SW + LW)'(k); #1;
        check(rd_data == m_data[k], "read back");
        check((rd_data == wr_data) == !m_fail[k], "verify tells failed rows");
      end
      if (fail_set) m_fail[{fail_sub, fail_row}] = 1;
      we = 0; fail_set = 0;
      {rd_sub, rd_row} = (SW + LW)'($urandom); #1;
      check(rd_data == m_data[{rd_sub, rd_row}], "random read");
      {cnt_sub, cnt_row} = (SW + LW)'($urandom_range(63)); #1;
      check(cnt == 32'(m_cnt[{cnt_sub, cnt_row}]), "write count");
      check(cnt_failed == m_fail[{cnt_sub, cnt_row}], "failed flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
