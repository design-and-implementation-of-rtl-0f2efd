// tb_id_stage: self-checking test of the decode stage (control unit, hazard
// unit and trap conversion).
//
// Part 1, hazards: 4000 random instructions (ALU, loads, stores, branches,
// jumps, CSR register and immediate forms) meet random producers in EX and
// MEM. The expected bubble request is computed from the three rules of the
// design: load-use (source written by a load in EX), CSR result (source
// written by a CSR instruction in EX or MEM) and CSR source (a CSR
// instruction whose rs1 is written by anything in EX or MEM). Source usage
// comes from the testbench's own decoder. Decoded fields (rd, rs1/rs2,
// write enable, load/store/branch/jump/CSR kind) are compared too, and the
// events vector must pass through unchanged.
// Part 2, traps: illegal instruction, ECALL from M and U, EBREAK, MRET in U
// (illegal), MRET in M (pipeline emptying but no trap), a CSR access the
// CSR unit refuses, an external and a timer interrupt (EXT_INT / TIME_INT
// event, retirement bit cleared), and no interrupt while the pipeline is
// being emptied or the slot is invalid.
module tb_id_stage;
  import hpm_pkg::*;
  import rv_asm_pkg::*;

  ifid_t       q;
  logic        q_valid;
  events_t     q_ev;
  logic [4:0]  rs1_addr, rs2_addr, ex_rd, mem_rd;
  logic [31:0] rs1_data, rs2_data, irq_cause;
  logic [11:0] chk_addr;
  logic        chk_write, chk_legal, irq_pending, drain_active;
  priv_e       priv;
  logic        ex_valid, ex_is_load, ex_is_csr, ex_reg_we, mem_valid, mem_is_csr, mem_reg_we;
  idex_t       d;
  logic        d_valid, hazard, drain;
  events_t     d_ev;
  logic        clk = 1'b0;

  id_stage dut (.q, .q_valid, .q_ev, .rs1_addr, .rs2_addr, .rs1_data, .rs2_data,
                .chk_addr, .chk_write, .chk_legal, .priv, .irq_pending, .irq_cause, .drain_active,
                .ex_valid, .ex_is_load, .ex_is_csr, .ex_reg_we, .ex_rd,
                .mem_valid, .mem_is_csr, .mem_reg_we, .mem_rd,
                .d, .d_valid, .d_ev, .hazard, .drain);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [4:0] r();
    return 5'($urandom_range(0, 4));
  endfunction

  function automatic logic [31:0] rand_instr();
    case ($urandom_range(0, 9))
      0: return ADDI(r(), r(), $urandom_range(0, 100));
      1: return ADD(r(), r(), r());
      2: return LW(r(), r(), 4);
      3: return SW(r(), r(), 8);
      4: return BEQ(r(), r(), 16);
      5: return JAL(r(), 64);
      6: return JALR(r(), r(), 0);
      7: return CSRRW(r(), CSR_MSCRATCH, r());
      8: return CSRRWI(r(), CSR_MSCRATCH, r());
      default: return LUI(r(), 5);
    endcase
  endfunction

  task automatic idle();
    q_valid = 1'b1; q_ev = EV_FETCHED; q.pc = 32'h100; q.instr = NOP;
    rs1_data = 32'h11; rs2_data = 32'h22; chk_legal = 1'b1; priv = PRIV_M;
    irq_pending = 1'b0; irq_cause = '0; drain_active = 1'b0;
    {ex_valid, ex_is_load, ex_is_csr, ex_reg_we, mem_valid, mem_is_csr, mem_reg_we} = '0;
    ex_rd = '0; mem_rd = '0;
  endtask

  int n_hz = 0;

  initial begin
    idle();
    // ---------------------------------------------------------- hazards
    for (int n = 0; n < 4000; n++) begin
      dec_t c;
      bit   exp_hz, s1e, s2e, s1m, s2m, is_csr;
      q.instr = rand_instr();
      q_ev = events_t'($urandom);
      c = rdec(q.instr);
      ex_valid = 1'($urandom_range(0, 1)); ex_reg_we = 1'($urandom_range(0, 1)); ex_rd = r();
      ex_is_load = 1'($urandom_range(0, 1)); ex_is_csr = !ex_is_load && 1'($urandom_range(0, 1));
      mem_valid = 1'($urandom_range(0, 1)); mem_reg_we = 1'($urandom_range(0, 1)); mem_rd = r();
      mem_is_csr = 1'($urandom_range(0, 1));
      if (ex_rd == 0) ex_reg_we = 1'b0;                 // as the pipeline presents them
      if (mem_rd == 0) mem_reg_we = 1'b0;
      #1;
      is_csr = c.is_csr;
      s1e = c.use1 && c.rs1 != 0 && ex_valid && ex_reg_we && ex_rd == c.rs1;
      s2e = c.use2 && c.rs2 != 0 && ex_valid && ex_reg_we && ex_rd == c.rs2;
      s1m = c.use1 && c.rs1 != 0 && mem_valid && mem_reg_we && mem_rd == c.rs1;
      s2m = c.use2 && c.rs2 != 0 && mem_valid && mem_reg_we && mem_rd == c.rs2;
      exp_hz = ((s1e || s2e) && (ex_is_load || ex_is_csr)) || ((s1m || s2m) && mem_is_csr) ||
               (is_csr && (s1e || s1m));
      check(hazard == exp_hz, $sformatf("hazard for %h: got %0b expected %0b", q.instr, hazard, exp_hz));
      if (hazard) n_hz++;
      check(d.reg_we == (c.writes_rd && c.rd != 0) && d.rd == c.rd, $sformatf("rd/write enable of %h", q.instr));
      check(d.is_load == c.is_load && d.is_store == c.is_store && d.is_branch == c.is_branch &&
            (d.is_jal || d.is_jalr) == c.is_jump && (d.csr_op != CSR_NONE) == c.is_csr,
            $sformatf("instruction kind of %h", q.instr));
      check(d_ev == q_ev && d_valid && !d.trap && !drain, "events pass through");
      if (c.use1) check(rs1_addr == c.rs1 && d.rs1_val == rs1_data, "rs1 read");
    end
    $display("hazards requested: %0d", n_hz);
    check(n_hz > 100, "enough hazards seen");

    // ------------------------------------------------------------ traps
    idle();
    q.instr = ILLEGAL; #1;
    check(d.trap && d.cause == CAUSE_ILLEGAL && d.tval == ILLEGAL && drain, "illegal instruction trap");
    check(d_ev[EV_EXCEPTION] && !d_ev[EV_INSTRET] && d_ev[EV_FETCH] && d_ev[EV_CYCLE], "exception event, no retirement");
    q.instr = ECALL; #1;
    check(d.trap && d.cause == CAUSE_ECALL_M, "ECALL from M");
    priv = PRIV_U; #1;
    check(d.trap && d.cause == CAUSE_ECALL_U, "ECALL from U");
    q.instr = MRET; #1;
    check(d.trap && d.cause == CAUSE_ILLEGAL, "MRET in user mode is illegal");
    priv = PRIV_M; #1;
    check(!d.trap && d.is_mret && drain && d_ev == EV_FETCHED, "MRET empties the pipeline");
    q.instr = EBREAK; #1;
    check(d.trap && d.cause == CAUSE_BREAK && d.tval == q.pc, "EBREAK");
    q.instr = CSRR(5, CSR_MCOUNTER0); chk_legal = 1'b0; #1;
    check(d.trap && d.cause == CAUSE_ILLEGAL && chk_addr == CSR_MCOUNTER0 && !chk_write, "refused CSR access");
    q.instr = CSRW(CSR_MSCRATCH, 3); chk_legal = 1'b1; #1;
    check(!d.trap && chk_write, "CSR write reported to the legality check");
    // interrupts
    q.instr = ADD(1, 2, 3);
    ex_valid = 1'b1; ex_is_load = 1'b1; ex_reg_we = 1'b1; ex_rd = 2;   // would be a hazard
    irq_pending = 1'b1; irq_cause = CAUSE_MEI; #1;
    check(d.trap && d.cause == CAUSE_MEI && d_ev[EV_EXT_INT] && !d_ev[EV_INSTRET] && !hazard && drain,
          "external interrupt taken on the decoded slot");
    irq_cause = CAUSE_MTI; #1;
    check(d.trap && d_ev[EV_TIME_INT] && !d_ev[EV_EXT_INT], "timer interrupt");
    drain_active = 1'b1; #1;
    check(!d.trap && hazard, "no interrupt while the pipeline is being emptied");
    drain_active = 1'b0; q_valid = 1'b0; #1;
    check(!d.trap && !hazard && !drain, "empty slot: no interrupt, hazard or drain");

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
