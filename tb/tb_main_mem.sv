// tb_main_mem: self-checking test of the main memory at its default
// latencies.
//
// The memory is preloaded through the hierarchy, then 1500 random accesses
// (instruction reads, data loads, byte/half/word stores with byte enables)
// run against a model array. Each access counts the cycles from request to
// acknowledge: 1 + FETCH_WAIT (2) for a fetch, 1 + LOAD_WAIT (3) for a
// load and 1 + STORE_WAIT (2) for a store, the memory costs of the
// execution model. A few accesses run on both ports at once to check that
// they are independent.
module tb_main_mem;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic        i_req = 1'b0, i_ack, d_req = 1'b0, d_we = 1'b0, d_ack;
  logic [31:0] i_addr = '0, i_rdata, d_addr = '0, d_wdata = '0, d_rdata;
  logic [3:0]  d_be = '0;

  main_mem dut (.clk, .rst_n, .i_req, .i_addr, .i_ack, .i_rdata,
                .d_req, .d_we, .d_be, .d_addr, .d_wdata, .d_ack, .d_rdata);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int N = 256;           // words exercised
  logic [31:0] m [N];

  task automatic fetch(int w);
    int c = 0;
    @(negedge clk);
    i_req = 1'b1; i_addr = 32'(w * 4);
    while (1) begin
      #1;
      if (i_ack) break;
      @(negedge clk); c++;
    end
    check(i_rdata == m[w], $sformatf("fetch data word %0d", w));
    check(c == 1, $sformatf("fetch takes 2 cycles (waited %0d)", c));
    @(negedge clk); i_req = 1'b0;
  endtask

  task automatic data(int w, bit we, logic [3:0] be, logic [31:0] wd);
    int c = 0;
    @(negedge clk);
    d_req = 1'b1; d_we = we; d_be = be; d_addr = 32'(w * 4); d_wdata = wd;
    while (1) begin
      #1;
      if (d_ack) break;
      @(negedge clk); c++;
    end
    if (!we) check(d_rdata == m[w], $sformatf("load data word %0d", w));
    check(c == (we ? 1 : 2), $sformatf("%s latency (waited %0d)", we ? "store" : "load", c));
    if (we) for (int b = 0; b < 4; b++) if (be[b]) m[w][8*b +: 8] = wd[8*b +: 8];
    @(negedge clk); d_req = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      m[i] = $urandom;
      dut.mem[i] = m[i];
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1500; n++) begin
      int w;
      w = $urandom_range(0, N - 1);
      case ($urandom_range(0, 2))
        0: fetch(w);
        1: data(w, 1'b0, 4'hF, '0);
        default: data(w, 1'b1, 4'($urandom_range(1, 15)), $urandom);
      endcase
    end
    // both ports together: each keeps its own latency
    begin
      int ci, cd;
      ci = -1; cd = -1;
      @(negedge clk);
      i_req = 1'b1; i_addr = 32'h10; d_req = 1'b1; d_we = 1'b0; d_addr = 32'h20;
      for (int c = 0; c < 6; c++) begin
        #1;
        if (i_ack && ci < 0) ci = c;
        if (d_ack && cd < 0) cd = c;
        @(negedge clk);
        if (ci >= 0) i_req = 1'b0;
        if (cd >= 0) d_req = 1'b0;
      end
      check(ci == 1 && cd == 2, $sformatf("simultaneous fetch/load latencies %0d/%0d", ci, cd));
    end
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
