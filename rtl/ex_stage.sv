// ex_stage: execute. ALU, branch decision and jump target, with the
// forwarding unit in front of the operands.
//
// The ALU computes the RV32I integer operations; its result is the value
// written to rd, or the address of a load or store. JAL and JALR write the
// link address PC+4. Conditional branches are decided here and jumps are
// committed here: when a branch is taken or a jump executes, `redirect` with
// `redirect_pc` sends fetch to the target and the core cancels the two
// younger slots in IF and ID, which costs the two cycles of the paper's
// execution model.
// Monitor events set here: BRANCH for a taken conditional branch,
// BRANCH_NT for one not taken, UNCOND_JUMP for JAL/JALR. They are written
// into the events field of the EX/MEM register beside the instruction.
// Combinational; misaligned jump targets are not checked (no trap is raised).
// The use_rs1/use_rs2 flags of the ID/EX payload are consumed by the hazard
// unit in decode and are not needed here (lint reports them unused).
// The slot's PC, rd, CSR fields, store data and trap fields go through to
// EX/MEM unchanged, so many output bits are plain copies of inputs.
module ex_stage
  import hpm_pkg::*;
(
  input  idex_t       q,
  input  logic        q_valid,
  input  events_t     q_ev,
  // forwarding sources
  input  logic        exmem_we,
  input  logic [4:0]  exmem_rd,
  input  logic [31:0] exmem_val,
  input  logic        memwb_we,
  input  logic [4:0]  memwb_rd,
  input  logic [31:0] memwb_val,
  // slot towards EX/MEM
  output exmem_t      d,
  output logic        d_valid,
  output events_t     d_ev,
  output logic        redirect,
  output logic [31:0] redirect_pc
);

  logic [31:0] a_reg, b_reg, opa, opb, alu;
  logic        take;

  fwd_unit u_fu (
    .rs1 (q.rs1), .rs2 (q.rs2),
    .rs1_reg (q.rs1_val), .rs2_reg (q.rs2_val),
    .exmem_we, .exmem_rd, .exmem_val,
    .memwb_we, .memwb_rd, .memwb_val,
    .rs1_val (a_reg), .rs2_val (b_reg)
  );

  always_comb begin
    unique case (q.opa_sel)
      OPA_PC:   opa = q.pc;
      OPA_ZERO: opa = 32'd0;
      default:  opa = a_reg;
    endcase
    opb = q.opb_imm ? q.imm : b_reg;
  end

  always_comb begin
    unique case (q.alu_op)
      ALU_SUB:  alu = opa - opb;
      ALU_SLL:  alu = opa << opb[4:0];
      ALU_SLT:  alu = {31'b0, $signed(opa) < $signed(opb)};
      ALU_SLTU: alu = {31'b0, opa < opb};
      ALU_XOR:  alu = opa ^ opb;
      ALU_SRL:  alu = opa >> opb[4:0];
      ALU_SRA:  alu = 32'($signed(opa) >>> opb[4:0]);
      ALU_OR:   alu = opa | opb;
      ALU_AND:  alu = opa & opb;
      ALU_PASSB: alu = opb;
      default:  alu = opa + opb;
    endcase
  end

  always_comb begin
    unique case (q.funct3)
      3'b000:  take = (a_reg == b_reg);
      3'b001:  take = (a_reg != b_reg);
      3'b100:  take = ($signed(a_reg) <  $signed(b_reg));
      3'b101:  take = ($signed(a_reg) >= $signed(b_reg));
      3'b110:  take = (a_reg <  b_reg);
      default: take = (a_reg >= b_reg);
    endcase
  end

  assign redirect    = q_valid && ((q.is_branch && take) || q.is_jal || q.is_jalr);
  assign redirect_pc = q.is_jalr ? ((a_reg + q.imm) & ~32'd1) : (q.pc + q.imm);

  always_comb begin
    d            = '0;
    d.pc         = q.pc;
    d.rd         = q.rd;
    d.reg_we     = q.reg_we;
    d.result     = (q.is_jal || q.is_jalr) ? q.pc + 32'd4 : alu;
    d.store_data = b_reg;
    d.is_load    = q.is_load;
    d.is_store   = q.is_store;
    d.funct3     = q.funct3;
    d.csr_op     = q.csr_op;
    d.csr_addr   = q.csr_addr;
    d.csr_wr     = q.csr_wr;
    d.csr_src    = q.csr_src;
    d.is_mret    = q.is_mret;
    d.trap       = q.trap;
    d.cause      = q.cause;
    d.tval       = q.tval;
    d_valid      = q_valid;
    d_ev         = q_ev;
    if (q_valid && q.is_branch &&  take) d_ev[EV_BRANCH]      = 1'b1;
    if (q_valid && q.is_branch && !take) d_ev[EV_BRANCH_NT]   = 1'b1;
    if (q_valid && (q.is_jal || q.is_jalr)) d_ev[EV_UNCOND_JUMP] = 1'b1;
  end

endmodule
