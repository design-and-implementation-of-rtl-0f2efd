// tb_ex_stage: self-checking test of the execute stage.
//
// 6000 random ID/EX payloads: ALU operations with register or immediate
// operands (operands possibly forwarded from EX/MEM or MEM/WB), LUI/AUIPC
// operand selection, conditional branches of all six kinds, JAL and JALR.
// The testbench computes the expected result, the branch decision, the
// redirect target (JALR clears bit 0), the link value PC+4 and the events
// added to the vector: BRANCH for a taken branch, BRANCH_NT for a not-taken
// one, UNCOND_JUMP for jumps. An invalid (cancelled) slot must neither
// redirect nor add events.
module tb_ex_stage;
  import hpm_pkg::*;

  idex_t       q;
  logic        q_valid;
  events_t     q_ev, d_ev;
  logic        exmem_we, memwb_we, d_valid, redirect;
  logic [4:0]  exmem_rd, memwb_rd;
  logic [31:0] exmem_val, memwb_val, redirect_pc;
  exmem_t      d;
  logic        clk = 1'b0;

  ex_stage dut (.q, .q_valid, .q_ev, .exmem_we, .exmem_rd, .exmem_val, .memwb_we, .memwb_rd, .memwb_val,
                .d, .d_valid, .d_ev, .redirect, .redirect_pc);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] fwd(logic [4:0] rs, logic [31:0] v);
    if (rs == 0) return 0;
    if (exmem_we && exmem_rd == rs) return exmem_val;
    if (memwb_we && memwb_rd == rs) return memwb_val;
    return v;
  endfunction

  function automatic logic [31:0] ref_alu(alu_op_e op, logic [31:0] a, logic [31:0] b);
    case (op)
      ALU_SUB:  return a - b;
      ALU_SLL:  return a << b[4:0];
      ALU_SLT:  return ($signed(a) < $signed(b)) ? 1 : 0;
      ALU_SLTU: return (a < b) ? 1 : 0;
      ALU_XOR:  return a ^ b;
      ALU_SRL:  return a >> b[4:0];
      ALU_SRA:  return 32'($signed(a) >>> b[4:0]);
      ALU_OR:   return a | b;
      ALU_AND:  return a & b;
      ALU_PASSB: return b;
      default:  return a + b;
    endcase
  endfunction

  function automatic bit ref_take(logic [2:0] f3, logic [31:0] a, logic [31:0] b);
    case (f3)
      3'b000: return a == b;
      3'b001: return a != b;
      3'b100: return $signed(a) < $signed(b);
      3'b101: return $signed(a) >= $signed(b);
      3'b110: return a < b;
      default: return a >= b;
    endcase
  endfunction

  int n_taken = 0, n_nt = 0, n_jmp = 0;

  initial begin
    for (int n = 0; n < 6000; n++) begin
      logic [31:0] a, b, opa, opb, exp_res;
      int kind;
      bit tk;
      q = '0;
      q.pc = {$urandom} & 32'hFFFF_FFFC;
      q.rs1 = 5'($urandom_range(0, 3)); q.rs2 = 5'($urandom_range(0, 3));
      q.rs1_val = (q.rs1 == 0) ? 0 : $urandom; q.rs2_val = (q.rs2 == 0) ? 0 : $urandom;
      if ($urandom_range(0, 3) == 0) q.rs2_val = q.rs1_val;
      q.imm = {{20{1'b0}}, 12'($urandom)} - 32'd2048;
      q.rd = 5'($urandom_range(1, 31)); q.reg_we = 1'b1;
      exmem_we = 1'($urandom_range(0, 1)); exmem_rd = 5'($urandom_range(0, 3)); exmem_val = $urandom;
      memwb_we = 1'($urandom_range(0, 1)); memwb_rd = 5'($urandom_range(0, 3)); memwb_val = $urandom;
      q_valid = ($urandom_range(0, 7) != 0);
      q_ev = EV_FETCHED;
      kind = $urandom_range(0, 5);
      case (kind)
        0, 1: begin q.alu_op = alu_op_e'($urandom_range(0, 10)); q.opb_imm = 1'($urandom_range(0, 1));
                    q.opa_sel = opa_sel_e'($urandom_range(0, 2)); end
        2:    begin q.is_branch = 1'b1; q.reg_we = 1'b0; q.funct3 = 3'($urandom_range(0, 7));
                    if (q.funct3 inside {3'b010, 3'b011}) q.funct3 = 3'b000; end
        3:    q.is_jal = 1'b1;
        4:    begin q.is_jalr = 1'b1; q.opb_imm = 1'b1; end
        default: begin q.alu_op = ALU_ADD; q.opb_imm = 1'b1; q.is_load = 1'b1; q.funct3 = 3'b010; end
      endcase
      #1;
      a = fwd(q.rs1, q.rs1_val);
      b = fwd(q.rs2, q.rs2_val);
      opa = (q.opa_sel == OPA_PC) ? q.pc : (q.opa_sel == OPA_ZERO) ? 32'd0 : a;
      opb = q.opb_imm ? q.imm : b;
      tk  = q.is_branch && ref_take(q.funct3, a, b);
      exp_res = (q.is_jal || q.is_jalr) ? q.pc + 4 : ref_alu(q.alu_op, opa, opb);
      if (!q.is_branch) check(d.result == exp_res, $sformatf("result op=%0d a=%h b=%h got %h exp %h", q.alu_op, opa, opb, d.result, exp_res));
      check(d.store_data == b, "store data forwarded");
      check(redirect == (q_valid && (tk || q.is_jal || q.is_jalr)), "redirect decision");
      if (redirect)
        check(redirect_pc == (q.is_jalr ? ((a + q.imm) & ~32'd1) : q.pc + q.imm), "redirect target");
      begin
        events_t e;
        e = q_ev;
        if (q_valid && q.is_branch) e[tk ? EV_BRANCH : EV_BRANCH_NT] = 1'b1;
        if (q_valid && (q.is_jal || q.is_jalr)) e[EV_UNCOND_JUMP] = 1'b1;
        check(d_ev == e, "branch/jump events");
      end
      check(d_valid == q_valid && d.rd == q.rd && d.pc == q.pc, "slot passes through");
      if (q_valid && tk) n_taken++;
      if (q_valid && q.is_branch && !tk) n_nt++;
      if (q_valid && (q.is_jal || q.is_jalr)) n_jmp++;
      #1;
    end
    check(n_taken > 100 && n_nt > 100 && n_jmp > 100, "all branch outcomes exercised");
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
