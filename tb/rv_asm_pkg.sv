// rv_asm_pkg: a small RV32I/Zicsr instruction encoder for the testbenches,
// plus a reference decoder used to predict monitor events from the stream of
// completed instructions. Encodings follow the RISC-V unprivileged and
// privileged specifications.
package rv_asm_pkg;

  function automatic logic [31:0] r_t(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                      logic [2:0] f3, logic [4:0] rd, logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] i_t(int imm, logic [4:0] rs1, logic [2:0] f3,
                                      logic [4:0] rd, logic [6:0] op);
    return {imm[11:0], rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] s_t(int imm, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(int off, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    return {off[12], off[10:5], rs2, rs1, f3, off[4:1], off[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] ADDI(logic [4:0] rd, logic [4:0] rs1, int imm); return i_t(imm, rs1, 3'b000, rd, 7'b0010011); endfunction
  function automatic logic [31:0] XORI(logic [4:0] rd, logic [4:0] rs1, int imm); return i_t(imm, rs1, 3'b100, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(logic [4:0] rd, logic [4:0] rs1, int sh);  return i_t(sh, rs1, 3'b001, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRAI(logic [4:0] rd, logic [4:0] rs1, int sh);  return i_t(sh | 32'h400, rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ADD (logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2); return r_t(7'b0, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB (logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2); return r_t(7'b0100000, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] AND_(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2); return r_t(7'b0, rs2, rs1, 3'b111, rd, 7'b0110011); endfunction
  function automatic logic [31:0] OR_ (logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2); return r_t(7'b0, rs2, rs1, 3'b110, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLT (logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2); return r_t(7'b0, rs2, rs1, 3'b010, rd, 7'b0110011); endfunction
  function automatic logic [31:0] XOR_(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2); return r_t(7'b0, rs2, rs1, 3'b100, rd, 7'b0110011); endfunction
  function automatic logic [31:0] LUI (logic [4:0] rd, int imm20); return {imm20[19:0], rd, 7'b0110111}; endfunction
  function automatic logic [31:0] AUIPC(logic [4:0] rd, int imm20); return {imm20[19:0], rd, 7'b0010111}; endfunction
  function automatic logic [31:0] LW  (logic [4:0] rd, logic [4:0] rs1, int imm); return i_t(imm, rs1, 3'b010, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LBU (logic [4:0] rd, logic [4:0] rs1, int imm); return i_t(imm, rs1, 3'b100, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LH  (logic [4:0] rd, logic [4:0] rs1, int imm); return i_t(imm, rs1, 3'b001, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SW  (logic [4:0] rs2, logic [4:0] rs1, int imm); return s_t(imm, rs2, rs1, 3'b010); endfunction
  function automatic logic [31:0] SB  (logic [4:0] rs2, logic [4:0] rs1, int imm); return s_t(imm, rs2, rs1, 3'b000); endfunction
  function automatic logic [31:0] BEQ (logic [4:0] rs1, logic [4:0] rs2, int off); return b_t(off, rs2, rs1, 3'b000); endfunction
  function automatic logic [31:0] BNE (logic [4:0] rs1, logic [4:0] rs2, int off); return b_t(off, rs2, rs1, 3'b001); endfunction
  function automatic logic [31:0] BLT (logic [4:0] rs1, logic [4:0] rs2, int off); return b_t(off, rs2, rs1, 3'b100); endfunction
  function automatic logic [31:0] JAL (logic [4:0] rd, int off);
    return {off[20], off[10:1], off[11], off[19:12], rd, 7'b1101111};
  endfunction
  function automatic logic [31:0] JALR(logic [4:0] rd, logic [4:0] rs1, int imm); return i_t(imm, rs1, 3'b000, rd, 7'b1100111); endfunction
  function automatic logic [31:0] CSRRW(logic [4:0] rd, logic [11:0] csr, logic [4:0] rs1); return {csr, rs1, 3'b001, rd, 7'b1110011}; endfunction
  function automatic logic [31:0] CSRRS(logic [4:0] rd, logic [11:0] csr, logic [4:0] rs1); return {csr, rs1, 3'b010, rd, 7'b1110011}; endfunction
  function automatic logic [31:0] CSRRC(logic [4:0] rd, logic [11:0] csr, logic [4:0] rs1); return {csr, rs1, 3'b011, rd, 7'b1110011}; endfunction
  function automatic logic [31:0] CSRRWI(logic [4:0] rd, logic [11:0] csr, logic [4:0] uimm); return {csr, uimm, 3'b101, rd, 7'b1110011}; endfunction
  function automatic logic [31:0] CSRR(logic [4:0] rd, logic [11:0] csr); return CSRRS(rd, csr, 5'd0); endfunction
  function automatic logic [31:0] CSRW(logic [11:0] csr, logic [4:0] rs1); return CSRRW(5'd0, csr, rs1); endfunction
  localparam logic [31:0] NOP   = 32'h0000_0013;
  localparam logic [31:0] ECALL = 32'h0000_0073;
  localparam logic [31:0] EBREAK= 32'h0010_0073;
  localparam logic [31:0] MRET  = 32'h3020_0073;
  localparam logic [31:0] ILLEGAL = 32'h0000_0000;

  // ---------------------------------------------------- reference decode
  typedef struct {
    bit        is_load, is_store, is_branch, is_jump, is_csr, is_mret;
    bit        writes_rd, use1, use2;
    bit [4:0]  rd, rs1, rs2;
  } dec_t;

  function automatic dec_t rdec(logic [31:0] w);
    dec_t r;
    logic [6:0] op;
    op = w[6:0];
    r = '{default: 0};
    r.rd = w[11:7]; r.rs1 = w[19:15]; r.rs2 = w[24:20];
    case (op)
      7'b0110111, 7'b0010111: r.writes_rd = 1;
      7'b1101111: begin r.is_jump = 1; r.writes_rd = 1; end
      7'b1100111: begin r.is_jump = 1; r.writes_rd = 1; r.use1 = 1; end
      7'b1100011: begin r.is_branch = 1; r.use1 = 1; r.use2 = 1; end
      7'b0000011: begin r.is_load = 1; r.writes_rd = 1; r.use1 = 1; end
      7'b0100011: begin r.is_store = 1; r.use1 = 1; r.use2 = 1; end
      7'b0010011: begin r.writes_rd = 1; r.use1 = 1; end
      7'b0110011: begin r.writes_rd = 1; r.use1 = 1; r.use2 = 1; end
      7'b1110011: begin
        if (w == MRET) r.is_mret = 1;
        else if (w[14:12] != 3'b000) begin
          r.is_csr = 1; r.writes_rd = 1; r.use1 = !w[14];
        end
      end
      default: ;
    endcase
    if (r.rd == 0) r.writes_rd = 0;
    if (r.rs1 == 0) r.use1 = 0;
    if (r.rs2 == 0) r.use2 = 0;
    return r;
  endfunction

endpackage
