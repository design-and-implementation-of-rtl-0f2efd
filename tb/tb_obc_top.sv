// tb_obc_top: end-to-end test of the on-board computer at its default
// parameters.
//
// A program written with rv_asm_pkg is loaded into the main memory. It runs a
// summing loop over ten words (loads, load-use hazards, taken and not-taken
// branches), a call and return, a forward branch, a write to minstret
// followed by a read (the shadow write path), two back-to-back mcycle reads,
// an illegal instruction, a timer interrupt, an external interrupt, a drop to
// user mode that reads one counter it may read and one it may not, and an
// ECALL back to machine mode. The handler updates mepc with the
// read-modify-write sequence of CSR instructions that creates CSR hazards.
// At the end the program inhibits all counters and sets a done flag.
//
// Reference model: the testbench watches the completed instructions and the
// taken traps, decodes them itself and recomputes every event count:
// instructions, loads/stores, taken/not-taken branches, jumps, the bubbles
// the hazard rules must insert, and the fetches (completed slots plus two
// cancelled per taken branch or jump, one per trap entry or MRET). The final
// counters must match, mcycle must equal the clock edges seen up to the
// inhibiting write, and the program's own results in memory are checked.
// The cycle count is also checked against the execution model in its
// published form, each trap costing 4 cycles on entry and 4 on the MRET.
// Each mechanism (hazard bubble, CSR hazard, branch cancel, trap, both
// interrupts, MRET, user-mode denial, counter write) must have happened.
module tb_obc_top;
  import hpm_pkg::*;
  import rv_asm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, ext_irq = 1'b0;
  events_t     count_ev;
  logic [63:0] counters [14];
  logic        retire;
  logic [31:0] retire_pc;
  logic [63:0] mtime;

  obc_top dut (.clk, .rst_n, .ext_irq, .count_ev, .counters, .retire, .retire_pc, .mtime);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ program
  logic [31:0] prog [1024];
  int pc;
  task automatic e(logic [31:0] w); prog[pc >> 2] = w; pc += 4; endtask
  task automatic org(int a); while (pc < a) e(NOP); pc = a; endtask

  localparam int HANDLER = 'h100, USER = 'h180, SUBR = 'h1C0, MAIN = 'h200, CONT = 'h300;
  localparam int DATA = 'h600, RES = 'h700;
  int PC_INHIBIT, PC_RD1, L, S1, S2;
  longint t_rd1, t_rd2;

  task automatic build();
    for (int i = 0; i < 1024; i++) prog[i] = 32'd0;
    pc = 0;
    e(JAL(0, MAIN));
    // ---- trap handler
    org(HANDLER);
    e(CSRR(25, CSR_MCAUSE));
    e(BLT(25, 0, 'h28));            // -> IRQ
    e(ADDI(26, 0, 8));
    e(BEQ(25, 26, 'h50));           // -> FROM_USER
    e(LW(27, 0, 'h7E0));
    e(ADDI(27, 27, 1));
    e(SW(27, 0, 'h7E0));
    e(CSRR(28, CSR_MEPC));          // csrr t, mepc ; addi t, t, 4 ; csrw mepc, t
    e(ADDI(28, 28, 4));
    e(CSRW(CSR_MEPC, 28));
    e(MRET);
    e(SLLI(26, 25, 1));             // IRQ
    e(ADDI(27, 0, 14));
    e(BEQ(26, 27, 'h14));           // -> TMR
    e(ADDI(27, 0, 1));
    e(SW(27, 0, 'h7F8));            // acknowledge external interrupt
    e(SW(27, 0, 'h7F0));
    e(MRET);
    e(ADDI(27, 0, -1));             // TMR
    e(SW(27, 20, 12));              // mtimecmp high = all ones
    e(ADDI(27, 0, 1));
    e(SW(27, 0, 'h7F0));
    e(MRET);
    e(JALR(0, 29, 0));              // FROM_USER
    // ---- user code
    org(USER);
    e(CSRR(16, CSR_UCOUNTER0 + 2)); // instret: allowed
    e(CSRR(17, CSR_UCOUNTER0 + 3)); // hpmcounter3: not allowed
    e(ECALL);
    // ---- subroutine
    org(SUBR);
    e(ADDI(9, 0, 7));
    e(JALR(0, 8, 0));
    // ---- main
    org(MAIN);
    e(ADDI(5, 0, RES));
    e(ADDI(3, 0, DATA));
    e(ADDI(2, 0, 10));
    e(ADDI(1, 0, 0));
    L = pc;
    e(LW(4, 3, 0));
    e(ADD(1, 1, 4));                // load-use
    e(ADDI(3, 3, 4));
    e(ADDI(2, 2, -1));
    e(BNE(2, 0, L - pc));
    e(SW(1, 5, 0));
    e(JAL(8, SUBR - pc));
    e(SW(9, 5, 4));
    e(BLT(0, 9, 8));
    e(ADDI(9, 0, 0));               // skipped
    e(SW(9, 5, 24));
    e(ADDI(12, 0, 1000));
    e(CSRW(CSR_MCOUNTER0 + 2, 12)); // minstret = 1000
    e(CSRR(13, CSR_MCOUNTER0 + 2));
    e(SW(13, 5, 8));
    PC_RD1 = pc;
    e(CSRR(14, CSR_MCOUNTER0));
    e(CSRR(15, CSR_MCOUNTER0));
    e(SUB(15, 15, 14));
    e(SW(15, 5, 12));
    e(ILLEGAL);
    e(LUI(20, 'h20000));            // timer base
    e(LW(21, 20, 0));
    e(ADDI(21, 21, 80));
    e(SW(0, 20, 12));
    e(SW(21, 20, 8));
    e(LUI(22, 1));
    e(ADDI(22, 22, -1920));         // 0x880: MEIE | MTIE
    e(CSRW(CSR_MIE, 22));
    e(ADDI(23, 0, 8));
    e(CSRRS(0, CSR_MSTATUS, 23));   // MIE
    S1 = pc;
    e(LW(10, 0, 'h7F0));
    e(NOP);
    e(BEQ(10, 0, S1 - pc));
    e(SW(0, 0, 'h7F0));
    e(ADDI(24, 0, 1));
    e(SW(24, 0, 'h7F4));            // ask for an external interrupt
    S2 = pc;
    e(LW(10, 0, 'h7F0));
    e(NOP);
    e(BEQ(10, 0, S2 - pc));
    e(ADDI(29, 0, CONT));
    e(ADDI(22, 0, 5));
    e(CSRW(CSR_MCOUNTEREN, 22));
    e(ADDI(22, 0, USER));
    e(CSRW(CSR_MEPC, 22));
    e(LUI(22, 2));
    e(ADDI(22, 22, -2048));         // 0x1800: MPP
    e(CSRRC(0, CSR_MSTATUS, 22));   // MPP = U
    e(MRET);
    org(CONT);
    e(SW(16, 5, 16));
    e(SW(17, 5, 20));
    e(ADDI(30, 0, -1));
    PC_INHIBIT = pc;
    e(CSRW(CSR_MCOUNTINHIBIT, 30));
    e(ADDI(31, 0, 1));
    e(SW(31, 0, 'h7FC));
    e(JAL(0, 0));
    for (int i = 0; i < 10; i++) prog[(DATA >> 2) + i] = 32'(i + 1);
  endtask

  // ---------------------------------------------------- reference model
  longint exp_ret, exp_ld, exp_st, exp_br, exp_brnt, exp_jmp, exp_hz, exp_fetch;
  longint exp_exc, exp_ext, exp_tmr, exp_cycles, tb_cycles;
  int     n_mret, n_csr_hz, n_denied, n_wr;
  longint n_ret_all;                   // completed instructions, unaffected by the minstret write
  bit     counting = 1'b1, have_prev = 1'b0, prev_is_branch_or_jump = 1'b0;
  logic [31:0] prev_pc;
  dec_t   w1, w2;
  bit     w1v, w2v;

  function automatic bit dep(dec_t c, logic [4:0] r);
    return (c.use1 && c.rs1 == r) || (c.use2 && c.rs2 == r);
  endfunction

  function automatic bit hz(dec_t c);
    bit h = 0;
    if (w1v && w1.writes_rd && (w1.is_load || w1.is_csr) && dep(c, w1.rd)) h = 1;
    if (w2v && w2.writes_rd && w2.is_csr && dep(c, w2.rd)) h = 1;
    if (c.is_csr && c.use1 && ((w1v && w1.writes_rd && w1.rd == c.rs1) ||
                               (w2v && w2.writes_rd && w2.rd == c.rs1))) h = 1;
    return h;
  endfunction

  // resolve the previous branch with the PC that followed it
  task automatic resolve(logic [31:0] next_pc);
    if (have_prev && counting) begin
      if (next_pc != prev_pc + 4) exp_br++; else exp_brnt++;
      if (next_pc != prev_pc + 4) exp_fetch += 2;
    end
    have_prev = 1'b0;
  endtask

  task automatic on_retire(logic [31:0] p);
    logic [31:0] w;
    dec_t c;
    bit csr_hz_seen;
    w = prog[p >> 2];
    c = rdec(w);
    resolve(p);
    if (p == PC_RD1) t_rd1 = tb_cycles;
    if (p == PC_RD1 + 4) t_rd2 = tb_cycles;
    if (!counting) return;
    // hazards of this instruction
    csr_hz_seen = 0;
    while (hz(c)) begin
      exp_hz++;
      if ((w1v && w1.is_csr) || (w2v && w2.is_csr) || c.is_csr) csr_hz_seen = 1;
      w2 = w1; w2v = w1v; w1v = 0;
    end
    if (csr_hz_seen) n_csr_hz++;
    w2 = w1; w2v = w1v; w1 = c; w1v = 1;
    exp_ret++;
    n_ret_all++;
    exp_fetch++;
    if (c.is_load)  exp_ld++;
    if (c.is_store) exp_st++;
    if (c.is_jump) begin exp_jmp++; exp_fetch += 2; w1v = 0; w2v = 0; end
    if (c.is_branch) begin have_prev = 1; prev_pc = p; end
    if (c.is_mret) begin n_mret++; exp_fetch++; w1v = 0; w2v = 0; end
    if (c.is_csr && w[31:20] == CSR_MCOUNTER0 + 2 && w[14:12] == 3'b001) begin
      exp_ret = 1000;                  // written value; own retirement lost
      n_wr++;
    end
    if (c.is_csr && w[31:20] == CSR_MCOUNTINHIBIT) begin
      counting   = 1'b0;
      exp_cycles = tb_cycles + 1;
    end
  endtask

  task automatic on_trap(logic [31:0] p, logic [31:0] cause);
    resolve(p);
    if (!counting) return;
    exp_fetch += 2;                    // the trapping slot and the cancelled slot behind it
    w1v = 0; w2v = 0;
    if (cause[31]) begin
      if (cause[3:0] == 4'd11) exp_ext++; else exp_tmr++;
    end else begin
      exp_exc++;
      if (cause == CAUSE_ILLEGAL && prog[p >> 2][6:0] == 7'b1110011) n_denied++;
    end
  endtask

  // a taken branch resolved by a branch being the last instruction before
  // something already handled: sample at the falling edge, when the
  // write-back decisions of the coming rising edge are stable
  always @(posedge clk) if (rst_n) tb_cycles++;

  // structural properties of the pipeline-emptying mechanism
  always @(negedge clk) if (rst_n) begin
    if (dut.u_core.wb_redirect && dut.u_core.advance)
      check(!dut.u_core.ifid_v && !dut.u_core.idex_v && !dut.u_core.exmem_v,
            "trap/MRET reaches write-back with an empty pipeline");
    if (dut.u_core.drain_active) check(!dut.u_core.i_req, "no fetch while the pipeline is being emptied");
  end
  always @(negedge clk) begin
    if (rst_n) begin
      if (retire) begin on_retire(retire_pc); if ($test$plusargs("trace")) $display("%0d ret %h %h", tb_cycles, retire_pc, prog[retire_pc>>2]); end
      else if (dut.u_core.trap_fire) on_trap(dut.u_core.memwb_q.pc, dut.u_core.memwb_q.cause);
      // external interrupt request/acknowledge handshake with the program
      if (dut.u_mem.mem['h7F4 >> 2] == 32'd1 && dut.u_mem.mem['h7F8 >> 2] != 32'd1) ext_irq <= 1'b1;
      if (dut.u_mem.mem['h7F8 >> 2] == 32'd1) ext_irq <= 1'b0;
    end
  end

  // ----------------------------------------------------------- stimulus
  function automatic logic [31:0] memw(int a);
    return dut.u_mem.mem[a >> 2];
  endfunction

  initial begin
    {exp_ret, exp_ld, exp_st, exp_br, exp_brnt, exp_jmp, exp_hz, exp_fetch} = '0;
    {exp_exc, exp_ext, exp_tmr, exp_cycles, tb_cycles} = '0;
    {n_mret, n_csr_hz, n_denied, n_wr} = '0;
    n_ret_all = 0;
    w1v = 0; w2v = 0;
    build();
    for (int i = 0; i < 16384; i++) dut.u_mem.mem[i] = (i < 1024) ? prog[i] : 32'd0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    while (memw('h7FC) != 32'd1) @(posedge clk);
    repeat (20) @(posedge clk);

    // program results
    check(memw(RES + 0)  == 32'd55,  "sum of the ten loaded words");
    check(memw(RES + 4)  == 32'd7,   "value returned by the subroutine");
    check(memw(RES + 24) == 32'd7,   "forward branch skipped one instruction");
    check(memw(RES + 8)  == 32'd1000, "minstret reads the value just written");
    check(memw(RES + 12) == 32'(t_rd2 - t_rd1), "two mcycle reads differ by the cycles between their completions");
    check(t_rd2 > t_rd1, "mcycle reads completed in order");
    check(memw(RES + 16) >= 32'd1000, "user mode read instret");
    check(memw(RES + 20) == 32'd0,   "user mode read of hpmcounter3 was refused");
    check(memw('h7E0)    == 32'd2,   "two exceptions returned through mepc+4");

    // counters against the reference model
    $display("model: ret=%0d ld=%0d st=%0d br=%0d brnt=%0d jmp=%0d hz=%0d fetch=%0d exc=%0d ext=%0d tmr=%0d cyc=%0d",
             exp_ret, exp_ld, exp_st, exp_br, exp_brnt, exp_jmp, exp_hz, exp_fetch, exp_exc, exp_ext, exp_tmr, exp_cycles);
    $display("dut:   ret=%0d ld=%0d st=%0d br=%0d brnt=%0d jmp=%0d hz=%0d fetch=%0d exc=%0d ext=%0d tmr=%0d cyc=%0d mem=%0d",
             counters[2], counters[11], counters[12], counters[6], counters[7], counters[8], counters[9],
             counters[13], counters[3], counters[4], counters[5], counters[0], counters[10]);
    check(counters[0]  == 64'(exp_cycles), "mcycle = clock edges up to the inhibiting write");
    check(counters[2]  == 64'(exp_ret),   "minstret");
    check(counters[3]  == 64'(exp_exc),   "mhpmcounter3 exceptions");
    check(counters[4]  == 64'(exp_ext),   "mhpmcounter4 external interrupts");
    check(counters[5]  == 64'(exp_tmr),   "mhpmcounter5 timer interrupts");
    check(counters[6]  == 64'(exp_br),    "mhpmcounter6 taken branches");
    check(counters[7]  == 64'(exp_brnt),  "mhpmcounter7 not-taken branches");
    check(counters[8]  == 64'(exp_jmp),   "mhpmcounter8 jumps");
    check(counters[9]  == 64'(exp_hz),    "mhpmcounter9 hazards");
    check(counters[10] == 64'(exp_ld + exp_st), "mhpmcounter10 memory accesses");
    check(counters[11] == 64'(exp_ld),    "mhpmcounter11 loads");
    check(counters[12] == 64'(exp_st),    "mhpmcounter12 stores");
    check(counters[13] == 64'(exp_fetch), "mhpmcounter13 fetches");
    check(counters[1]  == 64'd0,          "no counter in the time slot");

    // counters stay frozen once inhibited
    begin
      logic [63:0] c0, c13;
      c0 = counters[0]; c13 = counters[13];
      repeat (50) @(posedge clk);
      check(counters[0] == c0 && counters[13] == c13, "inhibited counters hold");
    end

    // cost of traps: cycles not explained by the trap-free execution model
    // (2 x instret + 4 x (taken + jumps) + hazards + 2 x loads + stores + 8,
    // the form the model takes in this design, see tb_rv32_core)
    begin
      longint base, extra;
      base  = 2 * n_ret_all + 4 * (exp_br + exp_jmp) + exp_hz + 2 * exp_ld + exp_st + 8;
      extra = exp_cycles - base;
      $display("trap cost: %0d cycles for %0d traps and %0d MRETs", extra, exp_exc + exp_ext + exp_tmr, n_mret);
      // the trapping slot (fetched, not retired: 2 cycles) plus emptying and
      // refilling on entry and on the MRET: 11 cycles per trap entry/MRET pair
      check(longint'(n_mret) == exp_exc + exp_ext + exp_tmr && extra == 11 * longint'(n_mret),
            "each trap entry plus one MRET costs 11 cycles beyond the trap-free model");
    end
    // the same cycles in the published form of the model, with the fetch
    // counter itself (which includes the trapping slot and the slots
    // cancelled when the pipeline is emptied) plus its constant 4:
    // every trap adds 4 cycles on entry and 4 on the MRET
    begin
      longint pm;
      pm = n_ret_all + (exp_fetch + 4) + exp_hz + 2 * (exp_br + exp_jmp) + 2 * exp_ld + exp_st + 4;
      $display("execution model with the fetch counter: %0d + 8 x %0d traps, measured %0d",
               pm, exp_exc + exp_ext + exp_tmr, exp_cycles);
      check(exp_cycles == pm + 8 * (exp_exc + exp_ext + exp_tmr),
            "cycles = retired + fetches + 4 + hazards + 2 x (taken + jumps) + 2 x loads + stores + 4 + 8 x traps");
    end

    // every mechanism happened
    $display("mechanisms: hazards=%0d csr_hazard_instrs=%0d taken=%0d jumps=%0d exceptions=%0d ext=%0d timer=%0d mret=%0d denied=%0d counter_writes=%0d",
             exp_hz, n_csr_hz, exp_br, exp_jmp, exp_exc, exp_ext, exp_tmr, n_mret, n_denied, n_wr);
    check(exp_hz > 0,   "a hazard bubble happened");
    check(n_csr_hz > 0, "a CSR hazard happened");
    check(exp_br > 0 && exp_brnt > 0 && exp_jmp > 0, "branches taken, not taken and jumps happened");
    check(exp_exc == 3, "three exceptions (illegal, refused counter read, ecall)");
    check(exp_ext == 1 && exp_tmr == 1, "one external and one timer interrupt");
    check(n_mret >= 4,  "MRETs happened");
    check(n_denied == 1, "one user-mode counter read refused");
    check(n_wr == 1,    "one counter write");

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
