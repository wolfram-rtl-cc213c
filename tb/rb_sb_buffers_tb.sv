// rb_sb_buffers_tb: self-checking test of the row buffer / swap buffer pair
// at the default 1 KB row and 64-byte burst.
//
// A reference copy of both buffers is kept in the test. Random rows are
// loaded from the "sense amplifiers" into the RB or the SB, random bursts are
// written into RB columns, and after every step the test compares the RB
// column read data, the row driven to the write drivers for either buffer
// and the dirty bit (set only by a column write, cleared by a load into the
// RB or by clear_dirty). It also checks that loading the SB leaves the RB and
// its dirty bit alone, which the remap-and-swap sequence relies on.
module rb_sb_buffers_tb;
  import wolfram_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int RW = ROW_BITS, BW = BURST_BITS, NC = RW / BW;

  logic [RW-1:0] sa_data, wd_data;
  logic          load, col_wr, clear_dirty, rb_dirty;
  buf_sel_e      load_sel, wd_sel;
  logic [$clog2(NC)-1:0] col;
  logic [BW-1:0] col_wdata, rb_rdata;

  rb_sb_buffers dut (.clk, .rst_n, .sa_data, .load, .load_sel, .col, .col_wr, .col_wdata,
                     .rb_rdata, .wd_sel, .wd_data, .clear_dirty, .rb_dirty);

  logic [RW-1:0] m_rb, m_sb;
  bit            m_dirty;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [RW-1:0] rand_row();
    logic [RW-1:0] r;
    for (int i = 0; i < RW / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; col_wr = 0; clear_dirty = 0; load_sel = BUF_RB; wd_sel = BUF_RB;
    col = 0; col_wdata = 0; sa_data = 0;
    m_rb = 0; m_sb = 0; m_dirty = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      int k;
      @(negedge clk);
      load = 0; col_wr = 0; clear_dirty = 0;
      k = $urandom_range(5);
      sa_data = rand_row();
      col = $urandom; col_wdata = {16{$urandom}};
      unique case (k)
        0: begin load = 1; load_sel = BUF_RB; end
        1: begin load = 1; load_sel = BUF_SB; end
        2, 3: col_wr = 1;
        4: clear_dirty = 1;
        default: ;
      endcase
      @(posedge clk); #1;
      unique case (k)
        0: begin m_rb = sa_data; m_dirty = 0; end
        1: m_sb = sa_data;
        2, 3: begin m_rb[col*BW +: BW] = col_wdata; m_dirty = 1; end
        4: m_dirty = 0;
        default: ;
      endcase
      load = 0; col_wr = 0; clear_dirty = 0;
      col = $urandom;
      wd_sel = BUF_RB; #1;
      check(wd_data == m_rb, "RB drives write drivers");
      check(rb_rdata == m_rb[col*BW +: BW], "RB column read");
      check(rb_dirty == m_dirty, "dirty bit");
      wd_sel = BUF_SB; #1;
      check(wd_data == m_sb, "SB drives write drivers");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
