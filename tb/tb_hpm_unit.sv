// tb_hpm_unit: self-checking test of the counting end of the monitor.
//
// A model keeps 14 counters, the event selectors and mcountinhibit. For 4000
// cycles random events vectors are presented with a random count_en (a slot
// leaving write-back), while random CSR writes hit counter halves,
// mhpmevent registers (including event numbers that count nothing),
// mcountinhibit and mcounteren. Expected behaviour: on each rising edge a
// non-inhibited counter whose event bit is set in a counted vector goes up
// by one, mcycle goes up every edge, a write to a counter half replaces it
// and the increment of that edge is lost, and the reset event assignment is
// counter n = event n. Read paths (machine counters, user aliases, time from
// mtime, high halves, mhpmevent, mcountinhibit, mcounteren) are compared
// with the model every cycle.
module tb_hpm_unit;
  import hpm_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0, count_en = 1'b0, wr_en = 1'b0, rd_hit;
  events_t     count_ev = '0, count_ev_q;
  logic [11:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data, mcounteren_o;
  logic [63:0] mtime = '0;
  logic [63:0] counters [14];

  hpm_unit dut (.clk, .rst_n, .count_en, .count_ev, .count_ev_q, .wr_en, .wr_addr, .wr_data,
                .rd_addr, .rd_hit, .rd_data, .mtime, .counters, .mcounteren_o);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [63:0] m_cnt [14];
  logic [31:0] m_ev [14];
  logic [31:0] m_inh, m_en;

  function automatic logic [31:0] exp_read(logic [11:0] a);
    int i = int'(a[4:0]);
    if (a == CSR_MCOUNTINHIBIT) return m_inh;
    if (a == CSR_MCOUNTEREN) return m_en;
    if (a[11:5] == 7'h19 && i >= 3) return (i < 14) ? m_ev[i] : 32'd0;
    if (a[11:8] == 4'hC && i == 1) return a[7] ? mtime[63:32] : mtime[31:0];
    if (i < 14) return a[7] ? m_cnt[i][63:32] : m_cnt[i][31:0];
    return 32'd0;
  endfunction

  // 321/322 (no mhpmevent1/2) and B01/B81 (time has no machine counter) do not exist
  function automatic bit exp_hit(logic [11:0] a);
    if (a[11:5] == 7'h19 && a[4:0] != 0 && a[4:0] < 3) return 1'b0;
    if (a[11:8] == 4'hB && a[4:0] == 1) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic [11:0] rand_addr();
    int i = $urandom_range(0, 15);
    case ($urandom_range(0, 6))
      0: return CSR_MCOUNTER0 + 12'(i);
      1: return CSR_MCOUNTERH0 + 12'(i);
      2: return CSR_UCOUNTER0 + 12'(i);
      3: return CSR_UCOUNTERH0 + 12'(i);
      4: return CSR_MHPMEVENT0 + 12'(i);
      5: return CSR_MCOUNTINHIBIT;
      default: return CSR_MCOUNTEREN;
    endcase
  endfunction

  initial begin
    for (int i = 0; i < 14; i++) begin
      m_cnt[i] = '0;
      m_ev[i]  = (i >= 3) ? 32'(i) : 32'd0;
    end
    m_inh = '0; m_en = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    m_cnt[0] = 64'd1;                 // mcycle counts the edge before the first stimulus
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      count_en = 1'($urandom_range(0, 1));
      count_ev = events_t'($urandom);
      mtime    = {$urandom, $urandom};
      wr_en    = ($urandom_range(0, 9) == 0);
      wr_addr  = rand_addr();
      if (wr_addr[11:8] == 4'hC) wr_addr[11:8] = 4'hB;        // user aliases are read-only
      wr_data  = ($urandom_range(0, 1) == 0) ? 32'($urandom_range(0, 20)) : $urandom;
      if (n > 3000) wr_en = 1'b0;                              // long stretch without writes
      rd_addr  = rand_addr();
      #1;
      check(exp_hit(rd_addr) ? (rd_hit && rd_data == exp_read(rd_addr)) : !rd_hit, $sformatf("read %h: %h, expected %h", rd_addr, rd_data, exp_read(rd_addr)));
      // model of the coming rising edge
      for (int i = 0; i < 14; i++) begin
        logic [31:0] e;
        bit inc;
        if (i == 1) continue;
        e = (i == 0) ? 32'd0 : (i == 2) ? 32'd2 : m_ev[i];
        inc = !m_inh[i] && (e == 0 || (e >= 2 && e < 14 && count_en && count_ev[e]));
        if (wr_en && wr_addr == CSR_MCOUNTER0 + 12'(i))       m_cnt[i][31:0]  = wr_data;
        else if (wr_en && wr_addr == CSR_MCOUNTERH0 + 12'(i)) m_cnt[i][63:32] = wr_data;
        else if (inc)                                         m_cnt[i] += 1;
      end
      if (wr_en) begin
        if (wr_addr == CSR_MCOUNTINHIBIT) m_inh = wr_data & 32'h0000_3FFD;
        if (wr_addr == CSR_MCOUNTEREN)    m_en  = wr_data;
        for (int i = 3; i < 14; i++) if (wr_addr == CSR_MHPMEVENT0 + 12'(i)) m_ev[i] = wr_data;
      end
      @(posedge clk);
      #1;
      for (int i = 0; i < 14; i++)
        check(counters[i] == m_cnt[i], $sformatf("cycle %0d counter %0d = %0d, expected %0d", n, i, counters[i], m_cnt[i]));
      if (count_en) check(count_ev_q == count_ev, "COUNT stage keeps the counted vector");
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
