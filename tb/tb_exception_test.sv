// tb_exception_test: workload test on the complete on-board computer
// (obc_top at its default parameters): a program that raises an exception
// at a fixed instruction distance, the trap-heavy test used to compare how
// monitors count around traps, here at a smaller scale (an ECALL about every
// K = 200 instructions, R = 12 times, instead of every 100000).
//
// How: main runs R rounds of a four-instruction loop (K/4 iterations) that
// ends in an ECALL. The handler at mtvec advances mepc past the ECALL with a
// CSR read / add / CSR write sequence (CSR hazards), counts the trap in x20
// and returns with MRET. After the rounds, two ECALLs in a row make an MRET
// be directly followed by another trap. main then freezes the counters
// through mcountinhibit and spins.
// Checks:
//   * exceptions counted = R + 2, interrupts 0, and the handler ran R + 2 times;
//   * retired instructions = the completed instructions seen at write-back
//     (a trapping ECALL is never counted as retired), and loads, stores,
//     branches and jumps agree with the same trace;
//   * cycles = retired + (fetches + 4) + hazards + 2 x (taken branches +
//     jumps) + 2 x loads + stores + 4 + 9 x traps. Each trap costs the 4
//     cycles on entry and 4 on return of the execution model plus one cycle:
//     the ECALL, found in decode, waits there for the fetch of the slot
//     behind it to complete before that slot can be cancelled. This holds
//     for the MRET directly followed by a trap too (no one-cycle saving in
//     this design). The measured cost per trap is printed.
// Interface: none (top-level bench); TB_RESULT line at the end; watchdog
// after 200,000 cycles.
module tb_exception_test;
  import hpm_pkg::*;
  import rv_asm_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        retire;
  logic [31:0] retire_pc;
  logic [63:0] mtime;
  events_t     count_ev;
  logic [63:0] counters [14];

  obc_top dut (.clk, .rst_n, .ext_irq (1'b0), .count_ev, .counters, .retire, .retire_pc, .mtime);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // --------------------------------------------------------------- program
  localparam int K = 200, R = 12, HANDLER = 'h100, MAIN = 'h200, RES = 'h700;
  localparam longint NX = 64'(R) + 64'd2;             // exceptions raised
  logic [31:0] prog [1024];
  int pc, PC_INH;
  task automatic e(logic [31:0] w); prog[pc >> 2] = w; pc += 4; endtask
  localparam logic [31:0] ECALL = 32'h0000_0073, MRET = 32'h3020_0073;

  task automatic build();
    int outer, inner;
    for (int i = 0; i < 1024; i++) prog[i] = 32'd0;
    pc = 0;
    e(JAL(0, MAIN));
    pc = HANDLER;
    e(CSRR(5, CSR_MEPC));
    e(ADDI(5, 5, 4));
    e(CSRW(CSR_MEPC, 5));
    e(ADDI(20, 20, 1));
    e(MRET);
    pc = MAIN;
    e(ADDI(10, 0, R));
    outer = pc;
    e(ADDI(11, 0, K / 4));
    inner = pc;
    e(ADDI(12, 12, 1));
    e(ADDI(13, 13, 2));
    e(ADDI(11, 11, -1));
    e(BNE(11, 0, inner - pc));
    e(ECALL);
    e(ADDI(10, 10, -1));
    e(BNE(10, 0, outer - pc));
    e(ECALL);
    e(ECALL);                            // reached straight from an MRET
    e(SW(20, 0, RES));
    e(SW(12, 0, RES + 4));
    e(ADDI(30, 0, -1));
    PC_INH = pc;
    e(CSRW(CSR_MCOUNTINHIBIT, 30));
    e(JAL(0, 0));
  endtask

  // -------------------------------------------------------------- tracing
  longint t_ret, t_ld, t_st, t_br, t_brnt, t_jmp, t_trap;
  bit     counting = 1'b1, prev_br = 1'b0;
  logic [31:0] prev_pc;

  always @(negedge clk) if (rst_n && counting) begin
    if (retire) begin
      dec_t c;
      c = rdec(prog[retire_pc >> 2]);
      if (prev_br) begin
        if (retire_pc != prev_pc + 4) t_br++; else t_brnt++;
      end
      prev_br = c.is_branch; prev_pc = retire_pc;
      t_ret++;
      if (c.is_load) t_ld++;
      if (c.is_store) t_st++;
      if (c.is_jump) t_jmp++;
      if (retire_pc == PC_INH) counting = 1'b0;
    end else if (dut.u_core.trap_fire) begin
      if (prev_br) begin
        if (dut.u_core.memwb_q.pc != prev_pc + 4) t_br++; else t_brnt++;
      end
      prev_br = 1'b0;
      t_trap++;
    end
  end

  initial begin
    {t_ret, t_ld, t_st, t_br, t_brnt, t_jmp, t_trap} = '0;
    build();
    for (int i = 0; i < 16384; i++) dut.u_mem.mem[i] = (i < 1024) ? prog[i] : 32'd0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    while (counting) @(posedge clk);
    repeat (20) @(posedge clk);
    check(dut.u_mem.mem[RES >> 2] == 32'(R + 2), "the handler ran once per exception");
    check(dut.u_mem.mem[(RES >> 2) + 1] == 32'(R * K / 4), "the loop body ran K/4 times per round");
    begin
      longint cyc, ins, fet, hz, br, brnt, jmp, ld, st, exc, pm;
      cyc = counters[0]; ins = counters[2]; exc = counters[3]; br = counters[6]; brnt = counters[7];
      jmp = counters[8]; hz = counters[9]; ld = counters[11]; st = counters[12]; fet = counters[13];
      $display("cycles=%0d retired=%0d exceptions=%0d taken=%0d not-taken=%0d jumps=%0d hazards=%0d loads=%0d stores=%0d fetches=%0d",
               cyc, ins, exc, br, brnt, jmp, hz, ld, st, fet);
      check(exc == NX && t_trap == NX, "exceptions counted");
      check(counters[4] == 0 && counters[5] == 0, "no interrupts counted");
      check(ins == t_ret, $sformatf("retired %0d = completed instructions %0d (ECALLs not counted)", ins, t_ret));
      check(ld == t_ld && st == t_st && br == t_br && brnt == t_brnt && jmp == t_jmp,
            "loads, stores, branches and jumps agree with the trace");
      check(hz >= 2 * NX, "the handler's CSR sequence stalls");
      pm = ins + (fet + 4) + hz + 2 * (br + jmp) + 2 * ld + st + 4;
      $display("cycles beyond the trap-free terms: %0d for %0d traps (%0d.%02d per trap)",
               cyc - pm, exc, (cyc - pm) / exc, ((cyc - pm) * 100 / exc) % 100);
      check(cyc == pm + 9 * exc, "every trap costs 4 cycles on entry, 4 on return and 1 waiting in decode");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
