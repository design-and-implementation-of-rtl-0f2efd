// tb_if_stage: self-checking test of the fetch stage.
//
// A small instruction memory in the testbench answers requests after one
// wait cycle (two cycles per fetch, as in the execution model) and returns
// a word derived from the address. The pipeline side is random: the global
// advance is low while the stage waits (if_wait) or on random extra stalls,
// redirects arrive with random targets, fetch is disabled at random (the
// pipeline-emptying state) and the data port is made busy at random.
// Checked on every advance: a valid slot carries the expected PC (sequential
// or the redirect target), the word of that PC and the events vector
// CYCLE|INSTRET|FETCH; no request is issued while fetch is disabled or the
// data port is busy; a fetched word is kept while the pipeline stalls
// (no second request); the fetch latency is two cycles.
module tb_if_stage;
  import hpm_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        advance, fetch_en = 1'b1, bus_busy = 1'b0, redirect = 1'b0, stall = 1'b0;
  logic [31:0] redirect_pc = '0, i_addr, i_rdata;
  logic        i_req, i_ack, d_valid, if_wait;
  ifid_t       d;
  events_t     d_ev;

  if_stage dut (.clk, .rst_n, .advance, .fetch_en, .bus_busy, .redirect, .redirect_pc,
                .i_req, .i_addr, .i_ack, .i_rdata, .d, .d_valid, .d_ev, .if_wait);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] word_at(logic [31:0] a);
    return a ^ 32'h5A5A_0000;
  endfunction

  // memory with one wait cycle
  logic [1:0] wcnt;
  assign i_ack   = i_req && (wcnt == 2'd1);
  assign i_rdata = word_at(i_addr);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) wcnt <= '0;
    else        wcnt <= (i_req && !i_ack) ? wcnt + 2'd1 : 2'd0;

  assign advance = !if_wait && !stall;

  logic [31:0] exp_pc;
  int          slots = 0, req_cycles = 0, second_req = 0;
  logic        had_ack;

  initial begin
    exp_pc = 32'h0;
    had_ack = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      // drive on the falling edge
      stall       = ($urandom_range(0, 3) == 0);
      fetch_en    = ($urandom_range(0, 9) != 0);
      bus_busy    = ($urandom_range(0, 5) == 0);
      redirect    = ($urandom_range(0, 7) == 0);
      redirect_pc = {20'h0, 10'($urandom), 2'b00};
      #1;
      check(!(i_req && (!fetch_en || bus_busy)), "no fetch request while disabled or data port busy");
      if (had_ack) check(!i_req, "buffered word: no second request");
      if (advance && d_valid) begin
        check(d.pc == exp_pc, $sformatf("slot PC %h expected %h", d.pc, exp_pc));
        check(d.instr == word_at(d.pc), "slot carries the word of its PC");
        check(d_ev == EV_FETCHED, "fetch events CYCLE|INSTRET|FETCH");
        slots++;
      end
      if (advance && !d_valid) check(d_ev == '0, "no events without a fetched word");
      if (i_req) req_cycles++;
      @(posedge clk);
      // model: what the edge did
      if (advance) begin
        had_ack = 1'b0;
        if (redirect)     exp_pc = redirect_pc;
        else if (d_valid) exp_pc = exp_pc + 4;
      end else if (i_ack) had_ack = 1'b1;
      @(negedge clk);
    end
    // latency: from a redirect, a fetch needs two cycles
    fetch_en = 1'b1; bus_busy = 1'b0; stall = 1'b0; redirect = 1'b1; redirect_pc = 32'h400;
    @(negedge clk);
    redirect = 1'b0;
    #1 check(i_req && !i_ack && i_addr == 32'h400, "first cycle: request waits");
    @(negedge clk);
    #1 check(i_ack && d_valid && d.pc == 32'h400, "second cycle: word delivered");
    check(slots > 500, "enough slots delivered");
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
