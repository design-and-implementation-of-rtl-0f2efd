// fwd_unit: the data forwarding unit (FU) of the execute stage.
//
// For each source operand of the instruction in EX it picks, in order of
// priority, the result of the instruction in EX/MEM, the result being
// written back from MEM/WB, or the value read from the register file in
// decode. A source only matches a producer that is a valid instruction
// writing a non-zero rd. Purely combinational.
// Producers whose value is not ready in time (a load still in MEM, a CSR
// read before write-back) are never forwarded: the hazard unit in decode
// holds the consumer back with a bubble instead, and those bubbles are what
// the monitor's HAZARD event counts. The paper names this unit; its
// priority scheme is the standard one for a five-stage pipeline.
module fwd_unit (
  input  logic [4:0]  rs1,
  input  logic [4:0]  rs2,
  input  logic [31:0] rs1_reg,
  input  logic [31:0] rs2_reg,
  input  logic        exmem_we,
  input  logic [4:0]  exmem_rd,
  input  logic [31:0] exmem_val,
  input  logic        memwb_we,
  input  logic [4:0]  memwb_rd,
  input  logic [31:0] memwb_val,
  output logic [31:0] rs1_val,
  output logic [31:0] rs2_val
);

  function automatic logic [31:0] pick(logic [4:0] rs, logic [31:0] reg_val,
                                       logic ew, logic [4:0] erd, logic [31:0] ev,
                                       logic ww, logic [4:0] wrd, logic [31:0] wv);
    if (rs == 5'd0)             return 32'd0;
    if (ew && erd == rs)        return ev;
    if (ww && wrd == rs)        return wv;
    return reg_val;
  endfunction

  assign rs1_val = pick(rs1, rs1_reg, exmem_we, exmem_rd, exmem_val, memwb_we, memwb_rd, memwb_val);
  assign rs2_val = pick(rs2, rs2_reg, exmem_we, exmem_rd, exmem_val, memwb_we, memwb_rd, memwb_val);

endmodule
