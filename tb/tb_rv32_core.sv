// tb_rv32_core: self-checking test of the processor core against the
// execution model.
//
// The core runs from a behavioural memory in the testbench with the
// latencies of the execution model (fetch 1, load 2, store 1 extra cycles).
// The program is a trap-free bubble sort of 16 random words followed by a
// checksum loop that calls a subroutine (JAL/JALR), so it exercises
// taken and not-taken branches, jumps, loads, stores and load-use hazards.
// It ends by writing all ones to mcountinhibit and spinning.
// Checks:
//   * the array is sorted and the checksum is right (correct execution);
//   * the counters agree with a trace-based count of the completed
//     instructions (instret, loads, stores, taken/not-taken branches,
//     jumps) and the fetch counter = instret + 2 x (taken branches + jumps):
//     every cancelled slot is a fetch. (The paper's measured relation has
//     a further +4, which this design does not reproduce; see below);
//   * the cycle count equals the paper's execution model
//       cycles = instret + F + hazards + 2 x (taken branches + jumps)
//              + 2 x loads + 1 x stores + 4
//     with F = instret + 2 x (taken branches + jumps) + 4, the fetch
//     figure of the paper's relation (so the model is exact here, with a
//     fixed start-up cost of 8 cycles from reset);
//   * structural properties every cycle: a trap or MRET reaches write-back
//     with the pipeline behind it empty, and no fetch request is made
//     while the pipeline is being emptied.
module tb_rv32_core;
  import hpm_pkg::*;
  import rv_asm_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        i_req, i_ack, d_req, d_we, d_ack, retire;
  logic [31:0] i_addr, i_rdata, d_addr, d_wdata, d_rdata, retire_pc;
  logic [3:0]  d_be;
  events_t     count_ev;
  logic [63:0] counters [14];

  rv32_core dut (.clk, .rst_n, .i_req, .i_addr, .i_ack, .i_rdata,
                 .d_req, .d_we, .d_be, .d_addr, .d_wdata, .d_ack, .d_rdata,
                 .ext_irq (1'b0), .timer_irq (1'b0), .mtime (64'd0),
                 .count_ev, .counters, .retire, .retire_pc);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------- memory model
  logic [31:0] mem [2048];
  logic [1:0]  ic, dc;
  assign i_ack   = i_req && ic == 2'd1;
  assign d_ack   = d_req && dc == (d_we ? 2'd1 : 2'd2);
  assign i_rdata = mem[i_addr[12:2]];
  assign d_rdata = mem[d_addr[12:2]];
  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin ic <= 0; dc <= 0; end
    else begin
      ic <= (i_req && !i_ack) ? ic + 2'd1 : 2'd0;
      dc <= (d_req && !d_ack) ? dc + 2'd1 : 2'd0;
      if (d_ack && d_we)
        for (int b = 0; b < 4; b++) if (d_be[b]) mem[d_addr[12:2]][8*b +: 8] <= d_wdata[8*b +: 8];
    end

  // --------------------------------------------------------------- program
  int pc;
  task automatic e(logic [31:0] w); mem[pc >> 2] = w; pc += 4; endtask
  localparam int ARR = 'h1000, N = 16, SUBR = 'h300;
  int O, I, NS, C, PC_INH;
  logic [31:0] vals [N];

  task automatic build();
    for (int i = 0; i < 2048; i++) mem[i] = 32'd0;
    pc = 0;
    e(LUI(10, 1));                       // x10 = 0x1000
    e(ADDI(11, 0, N - 1));
    O = pc;
    e(ADDI(12, 0, 0));
    e(ADDI(13, 11, 0));
    I = pc;
    e(ADD(14, 10, 12));
    e(LW(15, 14, 0));
    e(LW(16, 14, 4));
    e(SLT(17, 16, 15));                  // load-use
    e(BEQ(17, 0, 12));                   // -> NS
    e(SW(16, 14, 0));
    e(SW(15, 14, 4));
    e(ADDI(12, 12, 4));                  // NS
    e(ADDI(13, 13, -1));
    e(BNE(13, 0, I - pc));
    e(ADDI(11, 11, -1));
    e(BNE(11, 0, O - pc));
    // checksum: x20 = sum over i of (a[i] xor i), via a subroutine
    e(ADDI(20, 0, 0));
    e(ADDI(21, 0, 0));
    e(ADDI(12, 10, 0));
    C = pc;
    e(LW(5, 12, 0));
    e(JAL(1, SUBR - pc));
    e(ADDI(12, 12, 4));
    e(ADDI(21, 21, 1));
    e(ADDI(22, 0, N));
    e(BLT(21, 22, C - pc));
    e(SW(20, 10, 4 * N));
    e(ADDI(30, 0, -1));
    PC_INH = pc;
    e(CSRW(CSR_MCOUNTINHIBIT, 30));
    e(JAL(0, 0));
    pc = SUBR;
    e(XOR_(6, 5, 21));
    e(ADD(20, 20, 6));
    e(JALR(0, 1, 0));
    for (int i = 0; i < N; i++) begin
      vals[i] = 32'($urandom_range(0, 1000));
      mem[(ARR >> 2) + i] = vals[i];
    end
  endtask

  // -------------------------------------------------------------- tracing
  longint t_ret, t_ld, t_st, t_br, t_brnt, t_jmp;
  bit     counting = 1'b1, prev_br = 1'b0;
  logic [31:0] prev_pc;
  bit     done = 1'b0;

  always @(negedge clk) if (rst_n && retire && counting) begin
    dec_t c;
    c = rdec(mem[retire_pc >> 2]);
    if (prev_br) begin
      if (retire_pc != prev_pc + 4) t_br++; else t_brnt++;
    end
    prev_br = c.is_branch; prev_pc = retire_pc;
    t_ret++;
    if (c.is_load) t_ld++;
    if (c.is_store) t_st++;
    if (c.is_jump) t_jmp++;
    if (retire_pc == PC_INH) counting = 1'b0;
  end

  // structural properties
  always @(negedge clk) if (rst_n) begin
    if (dut.wb_redirect && dut.advance)
      check(!dut.ifid_v && !dut.idex_v && !dut.exmem_v, "trap/MRET reaches write-back with an empty pipeline");
    if (dut.drain_active) check(!i_req, "no fetch while the pipeline is being emptied");
  end

  initial begin
    {t_ret, t_ld, t_st, t_br, t_brnt, t_jmp} = '0;
    build();
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    while (counting) @(posedge clk);
    repeat (20) @(posedge clk);
    begin
      logic [31:0] s [N];
      logic [31:0] sum;
      s = vals;
      s.sort();
      sum = 0;
      for (int i = 0; i < N; i++) begin
        check(mem[(ARR >> 2) + i] == s[i], $sformatf("sorted[%0d] = %0d, expected %0d", i, mem[(ARR >> 2) + i], s[i]));
        sum += s[i] ^ 32'(i);
      end
      check(mem[(ARR >> 2) + N] == sum, "checksum through the subroutine");
    end
    begin
      longint cyc, ins, fet, hz, br, brnt, jmp, ld, st, model;
      cyc = counters[0]; ins = counters[2]; br = counters[6]; brnt = counters[7]; jmp = counters[8];
      hz = counters[9]; ld = counters[11]; st = counters[12]; fet = counters[13];
      $display("cycles=%0d instret=%0d fetches=%0d hazards=%0d taken=%0d not-taken=%0d jumps=%0d loads=%0d stores=%0d",
               cyc, ins, fet, hz, br, brnt, jmp, ld, st);
      check(ins == t_ret && ld == t_ld && st == t_st && br == t_br && brnt == t_brnt && jmp == t_jmp,
            "counters agree with the completed-instruction trace");
      check(counters[10] == ld + st, "memory accesses = loads + stores");
      check(fet == ins + 2 * (br + jmp), $sformatf("fetch relation (%0d vs %0d)", fet, ins + 2 * (br + jmp)));
      check(hz > 0 && br > 0 && brnt > 0, "hazards and both branch outcomes occurred");
      model = ins + (ins + 2 * (br + jmp) + 4) + hz + 2 * (br + jmp) + 2 * ld + st + 4;
      $display("execution model: %0d cycles, measured %0d", model, cyc);
      check(cyc == model, "cycle count follows the execution model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
