// tb_csr_unit: self-checking test of the CSR unit and its atomic access.
//
// The testbench plays the part of the write-back stage. A CSR instruction is
// modelled as: rd_latch on the rising edge E0 on which it enters
// write-back, wb_csr_* held during the following cycle (the falling edge
// loads the shadow register) and the CSR written on the next rising edge E1.
// Checks:
//   * the worked example of the paper: with mcycle at some value V on E0,
//     CSRRW rd, mcycle, x0 returns V in rd and mcycle reads 0 right after
//     E1, then counts again (the increment of E1 is lost);
//   * CSRRS/CSRRC read-modify-write of mscratch, and a second CSR
//     instruction entering write-back on E1 reading the value just written
//     (through the shadow register);
//   * counter writes in the middle of counting (minstret, mhpmcounter
//     halves) and the counting of retired-instruction events;
//   * trap entry (mepc, mcause, mtval, MIE->MPIE, privilege to M) and MRET
//     (privilege from MPP, MIE restored);
//   * the legality check: unknown CSR, write to a read-only CSR, machine CSR
//     from user mode, user counter read with and without its mcounteren bit;
//   * interrupt pending/cause with enables, priority of the external
//     interrupt, interrupts always enabled in user mode.
module tb_csr_unit;
  import hpm_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic [11:0] chk_addr = '0, rd_addr = '0, wb_csr_addr = '0;
  logic        chk_write = 1'b0, chk_legal, rd_latch = 1'b0;
  priv_e       priv;
  logic [31:0] rd_data_q, wb_csr_src = '0, trap_cause = '0, trap_pc = '0, trap_tval = '0;
  logic [31:0] mtvec_o, mepc_o, irq_cause;
  logic        wb_csr_fire = 1'b0, wb_csr_wr = 1'b0, trap_fire = 1'b0, mret_fire = 1'b0;
  csr_op_e     wb_csr_op = CSR_NONE;
  logic        ext_irq = 1'b0, timer_irq = 1'b0, irq_pending, count_en = 1'b0;
  events_t     count_ev = '0, count_ev_q;
  logic [63:0] mtime = 64'h1234_5678_9ABC_DEF0;
  logic [63:0] counters [14];

  csr_unit dut (.clk, .rst_n, .chk_addr, .chk_write, .chk_legal, .priv,
                .rd_latch, .rd_addr, .rd_data_q,
                .wb_csr_fire, .wb_csr_op, .wb_csr_addr, .wb_csr_wr, .wb_csr_src,
                .trap_fire, .trap_cause, .trap_pc, .trap_tval, .mret_fire, .mtvec_o, .mepc_o,
                .ext_irq, .timer_irq, .irq_pending, .irq_cause,
                .count_en, .count_ev, .count_ev_q, .mtime, .counters);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one CSR instruction; returns the old value (rd). Starts and ends at a negedge.
  task automatic csr(csr_op_e op, logic [11:0] a, logic [31:0] src, bit wr, output logic [31:0] old);
    rd_latch = 1'b1; rd_addr = a;
    @(posedge clk);                       // E0: enters write-back
    #1;
    rd_latch = 1'b0;
    wb_csr_fire = 1'b1; wb_csr_op = op; wb_csr_addr = a; wb_csr_wr = wr; wb_csr_src = src;
    old = rd_data_q;
    @(posedge clk);                       // E1: CSR written
    #1;
    wb_csr_fire = 1'b0; wb_csr_wr = 1'b0;
    @(negedge clk);
  endtask

  task automatic legal(logic [11:0] a, bit w, bit exp, string what);
    chk_addr = a; chk_write = w;
    #1 check(chk_legal == exp, what);
  endtask

  logic [31:0] old, v;
  logic [63:0] mc_old;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (80) @(negedge clk);

    // ---- worked example: csrrw t2, mcycle, t1 (t1 = 0)
    rd_latch = 1'b1; rd_addr = CSR_MCOUNTER0;
    mc_old = counters[0];                 // value sampled on E0
    @(posedge clk); #1;
    rd_latch = 1'b0;
    check(rd_data_q == mc_old[31:0], $sformatf("rd gets mcycle as it was on entry (%0d vs %0d)", rd_data_q, mc_old));
    wb_csr_fire = 1'b1; wb_csr_op = CSR_RW; wb_csr_addr = CSR_MCOUNTER0; wb_csr_wr = 1'b1; wb_csr_src = 0;
    @(negedge clk); #1;
    check(dut.sh_valid && dut.sh_data == 0, "shadow register loaded on the falling edge");
    check(counters[0] == mc_old + 1, "mcycle still counting during write-back");
    @(posedge clk); #1;
    wb_csr_fire = 1'b0; wb_csr_wr = 1'b0;
    check(counters[0] == 0, "mcycle = 0 after the write edge (increment lost)");
    @(posedge clk); #1;
    check(counters[0] == 1, "mcycle counts again");

    // ---- read-modify-write and back-to-back read through the shadow
    @(negedge clk);
    csr(CSR_RW, CSR_MSCRATCH, 32'hA5A5_0F0F, 1, old);
    csr(CSR_RS, CSR_MSCRATCH, 32'h0000_F000, 1, old);
    check(old == 32'hA5A5_0F0F, "CSRRS returns old value");
    csr(CSR_RC, CSR_MSCRATCH, 32'hA000_0000, 1, old);
    check(old == 32'hA5A5_FF0F, "CSRRS set bits");
    // back-to-back: second instruction enters write-back on the first one's E1
    rd_latch = 1'b1; rd_addr = CSR_MSCRATCH;
    @(posedge clk); #1;
    wb_csr_fire = 1'b1; wb_csr_op = CSR_RW; wb_csr_addr = CSR_MSCRATCH; wb_csr_wr = 1'b1; wb_csr_src = 32'h1111_2222;
    @(posedge clk); #1;                   // E1 of the first = E0 of the second
    wb_csr_op = CSR_RS; wb_csr_src = 32'h0000_0001;
    check(rd_data_q == 32'h1111_2222, "back-to-back CSR read sees the previous write");
    @(posedge clk); #1;
    wb_csr_fire = 1'b0; wb_csr_wr = 1'b0; rd_latch = 1'b0;
    @(negedge clk);
    csr(CSR_RS, CSR_MSCRATCH, 0, 0, old);
    check(old == 32'h1111_2223, "back-to-back write applied on top");

    // ---- counter writes and retired instructions counted
    count_ev = EV_FETCHED; count_en = 1'b1;
    repeat (5) @(negedge clk);
    check(counters[2] == 5 && counters[13] == 5, "instret/fetch counted per completed slot");
    csr(CSR_RW, CSR_MCOUNTER0 + 12'd2, 32'd1000, 1, old);
    // the write edge drops that edge's increment
    check(counters[2] == 1000, $sformatf("minstret written then counts (%0d)", counters[2]));
    count_en = 1'b0;
    @(negedge clk);
    csr(CSR_RW, CSR_MCOUNTERH0 + 12'd13, 32'd7, 1, old);
    // low half: 5 + the two edges of the minstret write
    check(counters[13] == {32'd7, 32'd7}, $sformatf("mhpmcounter13h written (%h)", counters[13]));
    csr(CSR_RS, CSR_MCOUNTERH0 + 12'd13, 0, 0, old);
    check(old == 32'd7, "mhpmcounter13h reads back");

    // ---- traps
    csr(CSR_RW, CSR_MSTATUS, 32'h0000_0008, 1, old);      // MIE = 1
    trap_fire = 1'b1; trap_cause = CAUSE_ILLEGAL; trap_pc = 32'h0000_0444; trap_tval = 32'hDEAD_BEEF;
    @(posedge clk); #1;
    trap_fire = 1'b0;
    check(mepc_o == 32'h444 && priv == PRIV_M && mtvec_o == 32'h100, "trap entry: mepc, privilege, mtvec");
    @(negedge clk);
    csr(CSR_RS, CSR_MSTATUS, 0, 0, v);
    check(v[3] == 1'b0 && v[7] == 1'b1 && v[12:11] == 2'b11, "trap entry: MIE->MPIE, MPP=M");
    csr(CSR_RS, CSR_MCAUSE, 0, 0, v);  check(v == CAUSE_ILLEGAL, "mcause");
    csr(CSR_RS, CSR_MTVAL, 0, 0, v);   check(v == 32'hDEAD_BEEF, "mtval");
    csr(CSR_RC, CSR_MSTATUS, 32'h0000_1800, 1, v);        // MPP = U
    mret_fire = 1'b1;
    @(posedge clk); #1;
    mret_fire = 1'b0;
    check(priv == PRIV_U, "MRET returns to user mode");
    @(negedge clk);

    // ---- legality (user mode)
    legal(CSR_UCOUNTER0, 0, 0, "user counter read refused without mcounteren");
    legal(CSR_MSCRATCH, 0, 0, "machine CSR refused in user mode");
    legal(CSR_MCOUNTER0, 0, 0, "machine counter refused in user mode");
    // back to M through a trap, grant cycle and hpmcounter5
    trap_fire = 1'b1; trap_cause = CAUSE_ECALL_U; trap_pc = 32'h200;
    @(posedge clk); #1; trap_fire = 1'b0;
    check(priv == PRIV_M, "ECALL trap returns to machine mode");
    @(negedge clk);
    csr(CSR_RS, CSR_MSTATUS, 0, 0, v);
    check(v[12:11] == 2'b00, "MPP records user mode");
    csr(CSR_RW, CSR_MCOUNTEREN, 32'h0000_0021, 1, v);
    legal(12'h7C0, 0, 0, "unknown CSR refused");
    legal(CSR_UCOUNTER0, 1, 0, "write to read-only counter alias refused");
    legal(CSR_MHARTID, 1, 0, "write to mhartid refused");
    legal(CSR_MHARTID, 0, 1, "read mhartid allowed");
    legal(CSR_MCOUNTER0 + 12'd13, 1, 1, "machine counter write allowed");
    legal(CSR_MCOUNTER0 + 12'd1, 0, 0, "no machine time counter");
    mret_fire = 1'b1;
    @(posedge clk); #1; mret_fire = 1'b0;
    check(priv == PRIV_U, "back in user mode");
    legal(CSR_UCOUNTER0, 0, 1, "user cycle read allowed by mcounteren[0]");
    legal(CSR_UCOUNTER0 + 12'd5, 0, 1, "user hpmcounter5 allowed by mcounteren[5]");
    legal(CSR_UCOUNTERH0 + 12'd5, 0, 1, "user hpmcounter5h allowed by mcounteren[5]");
    legal(CSR_UCOUNTER0 + 12'd2, 0, 0, "user instret refused");

    // ---- interrupts: user mode -> enabled regardless of MIE, needs mie bits
    ext_irq = 1'b1; timer_irq = 1'b1;
    #1 check(!irq_pending, "masked by mie");
    trap_fire = 1'b1; trap_cause = CAUSE_ECALL_U;
    @(posedge clk); #1; trap_fire = 1'b0;
    @(negedge clk);
    csr(CSR_RW, CSR_MIE, 32'h0000_0880, 1, v);
    #1 check(!irq_pending, "machine mode with MIE = 0: no interrupt");
    csr(CSR_RS, CSR_MSTATUS, 32'h8, 1, v);
    #1 check(irq_pending && irq_cause == CAUSE_MEI, "external has priority over timer");
    ext_irq = 1'b0;
    #1 check(irq_pending && irq_cause == CAUSE_MTI, "timer interrupt");
    csr(CSR_RS, CSR_MIP, 0, 0, v);
    check(v == 32'h0000_0080, "mip shows the timer line");
    timer_irq = 1'b0;
    #1 check(!irq_pending, "no request, no interrupt");
    csr(CSR_RS, CSR_UCOUNTER0 + 12'd1, 0, 0, v);
    check(v == mtime[31:0], "time reads the real-time timer");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
