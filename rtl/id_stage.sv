// id_stage: instruction decode, with the control unit, the hazard unit and
// the detection of the events that belong to decode.
//
// Control unit: decodes RV32I, Zicsr, ECALL, EBREAK, MRET, FENCE and WFI (the
// last two execute as no-operations) into the ID/EX payload, reading the
// source registers from the register file. Anything else, and a CSR access
// that the CSR unit reports illegal (`chk_legal`, e.g. a user-mode read of a
// counter whose mcounteren bit is clear), is an illegal instruction.
//
// Hazard unit: asks for one bubble (`hazard`) when the instruction cannot
// take its operands through the forwarding unit:
//   * load-use: a source is the rd of a load now in EX;
//   * CSR result: a source is the rd of a CSR instruction in EX or MEM (the
//     old CSR value only reaches rd in the middle of its write-back cycle);
//   * CSR source: a CSR instruction whose rs1 is written by an instruction
//     in EX or MEM (the CSR operand is taken from the register file, not
//     forwarded, to keep the CSR access atomic).
// While `hazard` is high the core holds IF and IF/ID and loads a bubble into
// ID/EX; the bubble carries the HAZARD event (the "insert hazard bubble"
// signal of the control unit, copied into the events register of ID/EX).
//
// Traps: an exception (illegal instruction, ECALL, EBREAK) or a pending
// interrupt (`irq_pending`, taken on the instruction in decode) turns the
// slot into a trap carrier: it goes on as a no-operation, its presumed
// retirement bit is cleared and the EXCEPTION, EXT_INT or TIME_INT bit is
// set. `drain` tells the core to stop fetching and cancel younger slots
// until the trap (or an MRET, which also empties the pipeline) has reached
// write-back. Interrupts are not taken while `drain_active` is high.
// The event rules follow the paper; which exceptions exist, and that
// interrupts are attached in decode, are this implementation's choices.
// The PC and the register-file read data are copied into the ID/EX payload
// unchanged.
module id_stage
  import hpm_pkg::*;
(
  // slot from IF/ID
  input  ifid_t       q,
  input  logic        q_valid,
  input  events_t     q_ev,
  // register file read
  output logic [4:0]  rs1_addr,
  output logic [4:0]  rs2_addr,
  input  logic [31:0] rs1_data,
  input  logic [31:0] rs2_data,
  // CSR legality check
  output logic [11:0] chk_addr,
  output logic        chk_write,
  input  logic        chk_legal,
  input  priv_e       priv,
  // interrupts
  input  logic        irq_pending,
  input  logic [31:0] irq_cause,
  input  logic        drain_active,
  // producers in later stages, for the hazard unit
  input  logic        ex_valid,
  input  logic        ex_is_load,
  input  logic        ex_is_csr,
  input  logic        ex_reg_we,
  input  logic [4:0]  ex_rd,
  input  logic        mem_valid,
  input  logic        mem_is_csr,
  input  logic        mem_reg_we,
  input  logic [4:0]  mem_rd,
  // slot towards ID/EX
  output idex_t       d,
  output logic        d_valid,
  output events_t     d_ev,
  output logic        hazard,
  output logic        drain
);

  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;

  logic [31:0] ins;
  logic [6:0]  opc;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  logic        illegal, is_ecall, is_ebreak;

  assign ins   = q.instr;
  assign opc   = ins[6:0];
  assign f3    = ins[14:12];
  assign f7    = ins[31:25];
  assign imm_i = {{20{ins[31]}}, ins[31:20]};
  assign imm_s = {{20{ins[31]}}, ins[31:25], ins[11:7]};
  assign imm_b = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
  assign imm_u = {ins[31:12], 12'b0};
  assign imm_j = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};

  assign rs1_addr  = ins[19:15];
  assign rs2_addr  = ins[24:20];
  assign chk_addr  = ins[31:20];

  // ------------------------------------------------------- control unit
  idex_t c;
  always_comb begin
    c          = '0;
    c.pc       = q.pc;
    c.rs1      = ins[19:15];
    c.rs2      = ins[24:20];
    c.rd       = ins[11:7];
    c.rs1_val  = rs1_data;
    c.rs2_val  = rs2_data;
    c.funct3   = f3;
    c.alu_op   = ALU_ADD;
    c.opa_sel  = OPA_RS1;
    c.csr_addr = ins[31:20];
    illegal    = 1'b0;
    is_ecall   = 1'b0;
    is_ebreak  = 1'b0;
    chk_write  = 1'b0;
    unique case (opc)
      OP_LUI:   begin c.opa_sel = OPA_ZERO; c.opb_imm = 1'b1; c.imm = imm_u; c.reg_we = 1'b1; end
      OP_AUIPC: begin c.opa_sel = OPA_PC;   c.opb_imm = 1'b1; c.imm = imm_u; c.reg_we = 1'b1; end
      OP_JAL:   begin c.is_jal = 1'b1; c.imm = imm_j; c.reg_we = 1'b1; end
      OP_JALR:  begin
        c.is_jalr = 1'b1; c.imm = imm_i; c.reg_we = 1'b1; c.use_rs1 = 1'b1;
        illegal = (f3 != 3'b000);
      end
      OP_BRANCH: begin
        c.is_branch = 1'b1; c.imm = imm_b; c.use_rs1 = 1'b1; c.use_rs2 = 1'b1;
        illegal = (f3 == 3'b010) || (f3 == 3'b011);
      end
      OP_LOAD: begin
        c.is_load = 1'b1; c.imm = imm_i; c.opb_imm = 1'b1; c.reg_we = 1'b1; c.use_rs1 = 1'b1;
        illegal = (f3 == 3'b011) || (f3 == 3'b110) || (f3 == 3'b111);
      end
      OP_STORE: begin
        c.is_store = 1'b1; c.imm = imm_s; c.opb_imm = 1'b1; c.use_rs1 = 1'b1; c.use_rs2 = 1'b1;
        illegal = (f3 > 3'b010);
      end
      OP_IMM, OP_REG: begin
        c.use_rs1 = 1'b1;
        c.reg_we  = 1'b1;
        c.opb_imm = (opc == OP_IMM);
        c.use_rs2 = (opc == OP_REG);
        c.imm     = imm_i;
        unique case (f3)
          3'b000: c.alu_op = (opc == OP_REG && f7[5]) ? ALU_SUB : ALU_ADD;
          3'b001: c.alu_op = ALU_SLL;
          3'b010: c.alu_op = ALU_SLT;
          3'b011: c.alu_op = ALU_SLTU;
          3'b100: c.alu_op = ALU_XOR;
          3'b101: c.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
          3'b110: c.alu_op = ALU_OR;
          default: c.alu_op = ALU_AND;
        endcase
        if (opc == OP_REG)
          illegal = !(f7 == 7'b0 || (f7 == 7'b0100000 && (f3 == 3'b000 || f3 == 3'b101)));
        else if (f3 == 3'b001 || f3 == 3'b101)
          illegal = !(f7 == 7'b0 || (f7 == 7'b0100000 && f3 == 3'b101));
      end
      OP_FENCE: ;                                   // no-operation
      OP_SYSTEM: begin
        if (f3 == 3'b000) begin
          if (ins == 32'h0000_0073)      is_ecall  = 1'b1;
          else if (ins == 32'h0010_0073) is_ebreak = 1'b1;
          else if (ins == 32'h3020_0073) begin
            c.is_mret = 1'b1;
            illegal   = (priv != PRIV_M);
          end
          else if (ins == 32'h1050_0073) ;          // WFI: no-operation
          else illegal = 1'b1;
        end else if (f3 == 3'b100) begin
          illegal = 1'b1;
        end else begin
          c.csr_op  = csr_op_e'(f3[1:0]);
          c.reg_we  = 1'b1;
          c.use_rs1 = !f3[2];
          c.csr_wr  = (f3[1:0] == 2'b01) || (ins[19:15] != 5'd0);
          c.csr_src = f3[2] ? {27'b0, ins[19:15]} : rs1_data;
          chk_write = c.csr_wr;
          illegal   = !chk_legal;
        end
      end
      default: illegal = 1'b1;
    endcase
    if (c.rd == 5'd0) c.reg_we = 1'b0;
  end

  // ------------------------------------------------------- hazard unit
  logic dep_ex, dep_mem, src1_ex, src2_ex, src1_mem, src2_mem;
  assign src1_ex  = c.use_rs1 && c.rs1 != 5'd0 && ex_valid  && ex_reg_we  && ex_rd  == c.rs1;
  assign src2_ex  = c.use_rs2 && c.rs2 != 5'd0 && ex_valid  && ex_reg_we  && ex_rd  == c.rs2;
  assign src1_mem = c.use_rs1 && c.rs1 != 5'd0 && mem_valid && mem_reg_we && mem_rd == c.rs1;
  assign src2_mem = c.use_rs2 && c.rs2 != 5'd0 && mem_valid && mem_reg_we && mem_rd == c.rs2;
  assign dep_ex   = src1_ex || src2_ex;
  assign dep_mem  = src1_mem || src2_mem;

  logic take_irq, take_exc, hz;
  assign take_irq = q_valid && irq_pending && !drain_active;
  assign take_exc = q_valid && !take_irq && (illegal || is_ecall || is_ebreak);

  always_comb begin
    hz = 1'b0;
    if (dep_ex && (ex_is_load || ex_is_csr)) hz = 1'b1;               // load-use, CSR result
    if (dep_mem && mem_is_csr)               hz = 1'b1;               // CSR result
    if (c.csr_op != CSR_NONE && src1_ex)     hz = 1'b1;               // CSR source
    if (c.csr_op != CSR_NONE && src1_mem)    hz = 1'b1;
  end
  assign hazard = q_valid && !take_irq && !take_exc && hz;

  // ------------------------------------------------- outgoing slot/events
  always_comb begin
    d       = c;
    d_valid = q_valid;
    d_ev    = q_ev;
    if (take_irq || take_exc) begin
      d           = '0;
      d.pc        = q.pc;
      d.trap      = 1'b1;
      d.cause     = take_irq ? irq_cause
                  : is_ecall ? ((priv == PRIV_M) ? CAUSE_ECALL_M : CAUSE_ECALL_U)
                  : is_ebreak ? CAUSE_BREAK : CAUSE_ILLEGAL;
      d.tval      = (take_exc && illegal) ? ins : (is_ebreak && take_exc) ? q.pc : 32'd0;
      d_ev[EV_INSTRET] = 1'b0;
      if (take_exc)                      d_ev[EV_EXCEPTION] = 1'b1;
      else if (irq_cause == CAUSE_MEI)   d_ev[EV_EXT_INT]   = 1'b1;
      else                               d_ev[EV_TIME_INT]  = 1'b1;
    end
  end

  assign drain = q_valid && (take_irq || take_exc || (c.is_mret && !illegal));

endmodule
