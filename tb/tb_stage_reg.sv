// tb_stage_reg: self-checking test of the inter-stage register.
//
// Drives random advance/squash/bubble/data/events for 2000 cycles and
// compares the registered payload, valid bit and events vector with a model
// of the four actions: hold (no advance), load, squash (payload kept, slot
// invalid, presumed-retirement bit cleared, other events kept) and bubble
// (empty slot carrying the CYCLE and HAZARD events). Also checks that reset
// empties the register and that the outputs change only on the rising edge
// (one cycle of latency).
module tb_stage_reg;
  import hpm_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        advance = 1'b0, squash = 1'b0, bubble = 1'b0;
  logic [31:0] d = '0, q;
  logic        d_valid = 1'b0, q_valid;
  events_t     d_ev = '0, q_ev;

  stage_reg dut (.clk, .rst_n, .advance, .squash, .bubble, .d, .d_valid, .d_ev, .q, .q_valid, .q_ev);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] m_q;
  logic        m_v;
  events_t     m_ev;

  initial begin
    m_q = '0; m_v = 1'b0; m_ev = '0;
    repeat (2) @(posedge clk);
    #1;
    check(q_valid == 1'b0 && q_ev == '0, "reset empties the register");
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      advance = ($urandom_range(0, 3) != 0);
      squash  = ($urandom_range(0, 4) == 0);
      bubble  = !squash && ($urandom_range(0, 4) == 0);
      d       = $urandom;
      d_valid = 1'($urandom_range(0, 1));
      d_ev    = events_t'($urandom);
      // model update for the coming edge
      if (advance) begin
        if (squash) begin
          m_q = d; m_v = 1'b0; m_ev = d_ev; m_ev[EV_INSTRET] = 1'b0;
        end else if (bubble) begin
          m_q = '0; m_v = 1'b0; m_ev = '0; m_ev[EV_CYCLE] = 1'b1; m_ev[EV_HAZARD] = 1'b1;
        end else begin
          m_q = d; m_v = d_valid; m_ev = d_ev;
        end
      end
      @(posedge clk);
      #1;
      check(q_valid == m_v && q_ev == m_ev && (q == m_q || !advance || !bubble),
            $sformatf("cycle %0d: adv=%0b sq=%0b bub=%0b", n, advance, squash, bubble));
      if (advance && !bubble) check(q == m_q, "payload loaded on advance");
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
