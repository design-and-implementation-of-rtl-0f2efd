// tb_rt_timer: self-checking test of the real-time timer.
//
// Checks that mtime counts one per clock from reset, that mtimecmp resets to
// all ones (no interrupt), that register reads return mtime/mtimecmp halves,
// that writing a half of mtime replaces it, and that timer_irq rises on the
// first cycle mtime >= mtimecmp and falls when mtimecmp is moved ahead.
// Random compare values are tried against a model of mtime.
module tb_rt_timer;
  logic        clk = 1'b0, rst_n = 1'b0, req = 1'b0, we = 1'b0, ack, timer_irq;
  logic [3:0]  addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [63:0] mtime;

  rt_timer dut (.clk, .rst_n, .req, .we, .addr, .wdata, .rdata, .ack, .mtime, .timer_irq);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint m_time;       // model of mtime, updated on each rising edge
  always @(posedge clk) if (rst_n) m_time <= m_time + 1;

  task automatic wr(logic [3:0] a, logic [31:0] v);
    @(negedge clk);
    req = 1'b1; we = 1'b1; addr = a; wdata = v;
    #1 check(ack, "write acknowledged at once");
    @(negedge clk);
    req = 1'b0; we = 1'b0;
  endtask

  initial begin
    m_time = 0;
    repeat (2) @(posedge clk);
    #1 check(mtime == 0 && !timer_irq, "reset: mtime 0, no interrupt");
    rst_n = 1'b1;
    repeat (37) @(posedge clk);
    #1 check(mtime == 64'(m_time), "mtime counts every clock");
    @(negedge clk);
    req = 1'b1; addr = 4'h8; #1 check(rdata == 32'hFFFF_FFFF && ack, "mtimecmp low resets to ones");
    addr = 4'hC; #1 check(rdata == 32'hFFFF_FFFF, "mtimecmp high resets to ones");
    addr = 4'h0; #1 check(rdata == mtime[31:0], "mtime low read");
    addr = 4'h4; #1 check(rdata == mtime[63:32], "mtime high read");
    req = 1'b0;
    // write mtime high: the written half replaces the count, the other half keeps counting
    wr(4'h4, 32'h0000_0002);
    #1 check(mtime[63:32] == 32'd2, "mtime high written");
    m_time = longint'(mtime);
    for (int n = 0; n < 40; n++) begin
      longint cmp;
      int d;
      d = $urandom_range(1, 30);
      cmp = longint'(mtime) + longint'(d) + 8;    // the three writes below take six cycles
      wr(4'hC, 32'hFFFF_FFFF);
      wr(4'h8, cmp[31:0]);
      wr(4'hC, cmp[63:32]);
      while (longint'(mtime) < cmp) begin
        #1 check(!timer_irq, "no interrupt before mtime reaches mtimecmp");
        @(posedge clk); #1;
      end
      check(timer_irq && longint'(mtime) == cmp, "interrupt when mtime reaches mtimecmp");
      m_time = longint'(mtime);
    end
    wr(4'hC, 32'hFFFF_FFFF);
    #1 check(!timer_irq, "interrupt falls when mtimecmp moves ahead");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
