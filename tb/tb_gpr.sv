// tb_gpr: self-checking test of the general-purpose register file.
//
// After reset every register must read zero. Then 3000 random cycles write
// random registers and read two random ports, compared with a model array:
// writes happen on the falling edge, so a value written in a cycle is
// visible on the read ports in the second half of the same cycle (the
// write-then-read behaviour that lets write-back and decode share a cycle),
// and x0 always reads zero.
module tb_gpr;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic [4:0]  raddr1 = '0, raddr2 = '0, waddr = '0;
  logic [31:0] rdata1, rdata2, wdata = '0;
  logic        we = 1'b0;

  gpr dut (.clk, .rst_n, .raddr1, .rdata1, .raddr2, .rdata2, .we, .waddr, .wdata);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] m [32];

  initial begin
    for (int i = 0; i < 32; i++) m[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 32; i++) begin
      raddr1 = 5'(i); raddr2 = 5'(31 - i);
      #1;
      check(rdata1 == 0 && rdata2 == 0, "registers are zero after reset");
    end
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk);
      #1;
      we     = 1'($urandom_range(0, 1));
      waddr  = 5'($urandom);
      wdata  = $urandom;
      raddr1 = ($urandom_range(0, 2) == 0) ? waddr : 5'($urandom);
      raddr2 = 5'($urandom);
      #1;
      check(rdata1 == m[raddr1] && rdata2 == m[raddr2], "read before the write edge");
      @(negedge clk);
      if (we && waddr != 0) m[waddr] = wdata;
      #1;
      check(rdata1 == m[raddr1] && rdata2 == m[raddr2],
            $sformatf("read after the falling-edge write r1=%0d r2=%0d", raddr1, raddr2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
