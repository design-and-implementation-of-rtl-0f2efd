// rv32_core: five-stage in-order RV32I + Zicsr pipeline (IF, ID, EX, MEM,
// WB) with a synchronous performance monitor.
//
// Monitor principle. No event is counted where it is detected. Each stage
// writes the events it detects into the triggered-events field of the
// instruction's own inter-stage register (IF/ID, ID/EX, EX/MEM, MEM/WB), and
// later stages may still clear an event of that instruction (the presumed
// retirement of an instruction that turns into a trap, or that is cancelled).
// The vector reaches the counters in the CSR unit only when the slot leaves
// write-back, so every count belongs to the instruction that completed, and a
// cancelled instruction is counted only for what really happened to it (its
// fetch). The events path is a parallel register beside the pipeline's own
// registers and adds no logic in series with them.
//
// Pipeline control (the "pipeline logic"):
//   * Global stall: while a fetch (`if_wait`) or a load/store (`mem_wait`) is
//     outstanding, every stage register holds (`advance` low). Memory wait
//     cycles therefore add up, as in the paper's execution model.
//   * Hazard: the hazard unit in ID holds IF and IF/ID for one cycle and
//     loads a bubble carrying the HAZARD event into ID/EX.
//   * Taken branch / jump (resolved in EX): IF/ID and ID/EX receive the two
//     younger slots cancelled (they keep their FETCH event, lose INSTRET).
//   * Trap or MRET (seen in ID): the younger slot in IF is cancelled and
//     fetching stops (`drain_active`) until the trap or MRET leaves
//     write-back, where the CSR unit takes the trap (mepc, mcause, ...) or
//     returns from it, and fetch restarts at mtvec or mepc.
//
// Write-back stage (in this module): on the falling edge of the write-back
// cycle rd is written (for a CSR instruction with the old CSR value latched
// by the CSR unit on the rising edge) and the new CSR value goes to the CSR
// unit's shadow register; trap entry, MRET and the counting of the slot's
// events happen on the rising edge that ends the cycle.
//
// Interfaces: instruction port (i_req/i_addr/i_ack/i_rdata) and data port
// (d_req/d_we/d_be/d_addr/d_wdata/d_ack/d_rdata), both request/acknowledge;
// interrupt lines; the 64-bit real-time counter value for the time CSR.
// Observation outputs: the vector counted last (`count_ev`), the counters,
// and a retirement strobe with the PC of each completed instruction.
// counters[1] (time slot) is the constant zero; event bit 1 is never set.
// The stages and the monitor follow the paper; the pipeline control details
// above (global stall, trap in ID, exact stall rules) are this
// implementation's choices where the paper gives only the cycle costs.
module rv32_core
  import hpm_pkg::*;
#(
  parameter logic [31:0] RESET_PC    = 32'h0000_0000,
  parameter logic [31:0] MTVEC_RESET = 32'h0000_0100,
  parameter int unsigned NUM_HPM     = 11
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction port
  output logic        i_req,
  output logic [31:0] i_addr,
  input  logic        i_ack,
  input  logic [31:0] i_rdata,
  // data port
  output logic        d_req,
  output logic        d_we,
  output logic [3:0]  d_be,
  output logic [31:0] d_addr,
  output logic [31:0] d_wdata,
  input  logic        d_ack,
  input  logic [31:0] d_rdata,
  // interrupts and real time
  input  logic        ext_irq,
  input  logic        timer_irq,
  input  logic [63:0] mtime,
  // observation
  output events_t     count_ev,
  output logic [63:0] counters [3+NUM_HPM],
  output logic        retire,
  output logic [31:0] retire_pc
);

  // ----------------------------------------------------------- signals
  logic    advance, if_wait, mem_wait, drain_active;
  logic    hazard, id_drain, ex_redirect, wb_redirect, redirect;
  logic [31:0] ex_redirect_pc, wb_redirect_pc, redirect_pc;

  ifid_t   if_d, ifid_q;      logic if_dv, ifid_v;     events_t if_de, ifid_e;
  idex_t   id_d, idex_q;      logic id_dv, idex_v;     events_t id_de, idex_e;
  exmem_t  ex_d, exmem_q;     logic ex_dv, exmem_v;    events_t ex_de, exmem_e;
  memwb_t  mem_d, memwb_q;    logic mem_dv, memwb_v;   events_t mem_de, memwb_e;

  assign advance = !(if_wait || mem_wait);

  // ---------------------------------------------------------------- IF
  logic if_adv;
  assign if_adv = advance && !(hazard && !ex_redirect && !wb_redirect);

  if_stage #(.RESET_PC(RESET_PC)) u_if (
    .clk, .rst_n,
    .advance     (if_adv),
    .fetch_en    (!drain_active),
    .bus_busy    (mem_wait),
    .redirect,
    .redirect_pc,
    .i_req, .i_addr, .i_ack, .i_rdata,
    .d (if_d), .d_valid (if_dv), .d_ev (if_de),
    .if_wait
  );

  // cancel the slot in IF on a redirect or when a trap/MRET leaves ID
  logic id_drain_go;
  assign id_drain_go = id_drain && !ex_redirect && !wb_redirect;

  stage_reg #(.T(ifid_t)) u_rifid (
    .clk, .rst_n,
    .advance (if_adv),
    .squash  (redirect || id_drain_go),
    .bubble  (1'b0),
    .d (if_d), .d_valid (if_dv), .d_ev (if_de),
    .q (ifid_q), .q_valid (ifid_v), .q_ev (ifid_e)
  );

  // ---------------------------------------------------------------- ID
  logic [4:0]  rs1_addr, rs2_addr;
  logic [31:0] rs1_data, rs2_data;
  logic [11:0] chk_addr;
  logic        chk_write, chk_legal, irq_pending;
  logic [31:0] irq_cause;
  priv_e       priv;

  id_stage u_id (
    .q (ifid_q), .q_valid (ifid_v), .q_ev (ifid_e),
    .rs1_addr, .rs2_addr, .rs1_data, .rs2_data,
    .chk_addr, .chk_write, .chk_legal, .priv,
    .irq_pending, .irq_cause, .drain_active,
    .ex_valid   (idex_v),
    .ex_is_load (idex_q.is_load),
    .ex_is_csr  (idex_q.csr_op != CSR_NONE),
    .ex_reg_we  (idex_q.reg_we),
    .ex_rd      (idex_q.rd),
    .mem_valid  (exmem_v),
    .mem_is_csr (exmem_q.csr_op != CSR_NONE),
    .mem_reg_we (exmem_q.reg_we),
    .mem_rd     (exmem_q.rd),
    .d (id_d), .d_valid (id_dv), .d_ev (id_de),
    .hazard,
    .drain (id_drain)
  );

  // A slot cancelled in ID keeps only the events it had on entering ID.
  stage_reg #(.T(idex_t)) u_ridex (
    .clk, .rst_n,
    .advance (advance),
    .squash  (redirect),
    .bubble  (hazard),
    .d (id_d), .d_valid (id_dv), .d_ev (redirect ? ifid_e : id_de),
    .q (idex_q), .q_valid (idex_v), .q_ev (idex_e)
  );

  // ---------------------------------------------------------------- EX
  logic        wb_we;
  logic [31:0] wb_wdata, csr_rdata;

  ex_stage u_ex (
    .q (idex_q), .q_valid (idex_v), .q_ev (idex_e),
    .exmem_we  (exmem_v && exmem_q.reg_we && !exmem_q.is_load && exmem_q.csr_op == CSR_NONE),
    .exmem_rd  (exmem_q.rd),
    .exmem_val (exmem_q.result),
    .memwb_we  (wb_we),
    .memwb_rd  (memwb_q.rd),
    .memwb_val (wb_wdata),
    .d (ex_d), .d_valid (ex_dv), .d_ev (ex_de),
    .redirect    (ex_redirect),
    .redirect_pc (ex_redirect_pc)
  );

  stage_reg #(.T(exmem_t)) u_rexmem (
    .clk, .rst_n,
    .advance (advance),
    .squash  (1'b0),
    .bubble  (1'b0),
    .d (ex_d), .d_valid (ex_dv), .d_ev (ex_de),
    .q (exmem_q), .q_valid (exmem_v), .q_ev (exmem_e)
  );

  // --------------------------------------------------------------- MEM
  mem_stage u_mem (
    .clk, .rst_n, .advance,
    .q (exmem_q), .q_valid (exmem_v), .q_ev (exmem_e),
    .d_req, .d_we, .d_be, .d_addr, .d_wdata, .d_ack, .d_rdata,
    .d (mem_d), .d_valid (mem_dv), .d_ev (mem_de),
    .mem_wait
  );

  stage_reg #(.T(memwb_t)) u_rmemwb (
    .clk, .rst_n,
    .advance (advance),
    .squash  (1'b0),
    .bubble  (1'b0),
    .d (mem_d), .d_valid (mem_dv), .d_ev (mem_de),
    .q (memwb_q), .q_valid (memwb_v), .q_ev (memwb_e)
  );

  // ---------------------------------------------------------------- WB
  logic wb_fire, wb_is_csr, trap_fire, mret_fire;
  logic [31:0] mtvec, mepc;

  assign wb_fire   = advance && memwb_v;
  assign wb_is_csr = memwb_q.csr_op != CSR_NONE;
  assign trap_fire = wb_fire && memwb_q.trap;
  assign mret_fire = wb_fire && memwb_q.is_mret;
  assign wb_we     = memwb_v && memwb_q.reg_we && !memwb_q.trap;
  assign wb_wdata  = wb_is_csr ? csr_rdata : memwb_q.wdata;

  assign wb_redirect    = trap_fire || mret_fire;
  assign wb_redirect_pc = trap_fire ? mtvec : mepc;
  assign redirect       = wb_redirect || ex_redirect;
  assign redirect_pc    = wb_redirect ? wb_redirect_pc : ex_redirect_pc;

  // The slot's events are final here: a slot that does not complete is never
  // counted as retired.
  events_t wb_ev;
  always_comb begin
    wb_ev = memwb_e;
    if (!memwb_v || memwb_q.trap) wb_ev[EV_INSTRET] = 1'b0;
  end

  gpr u_gpr (
    .clk, .rst_n,
    .raddr1 (rs1_addr), .rdata1 (rs1_data),
    .raddr2 (rs2_addr), .rdata2 (rs2_data),
    .we     (wb_fire && wb_we),
    .waddr  (memwb_q.rd),
    .wdata  (wb_wdata)
  );

  csr_unit #(.NUM_HPM(NUM_HPM), .MTVEC_RESET(MTVEC_RESET)) u_csr (
    .clk, .rst_n,
    .chk_addr, .chk_write, .chk_legal, .priv,
    .rd_latch    (advance && exmem_v && exmem_q.csr_op != CSR_NONE),
    .rd_addr     (exmem_q.csr_addr),
    .rd_data_q   (csr_rdata),
    .wb_csr_fire (wb_fire && wb_is_csr && !memwb_q.trap),
    .wb_csr_op   (memwb_q.csr_op),
    .wb_csr_addr (memwb_q.csr_addr),
    .wb_csr_wr   (memwb_q.csr_wr),
    .wb_csr_src  (memwb_q.csr_src),
    .trap_fire,
    .trap_cause  (memwb_q.cause),
    .trap_pc     (memwb_q.pc),
    .trap_tval   (memwb_q.tval),
    .mret_fire,
    .mtvec_o     (mtvec),
    .mepc_o      (mepc),
    .ext_irq, .timer_irq,
    .irq_pending, .irq_cause,
    .count_en    (advance),
    .count_ev    (wb_ev),
    .count_ev_q  (count_ev),
    .mtime,
    .counters
  );

  // ------------------------------------------------------- drain control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      drain_active <= 1'b0;
    else if (advance) begin
      if (wb_redirect)      drain_active <= 1'b0;
      else if (id_drain_go) drain_active <= 1'b1;
    end
  end

  assign retire    = wb_fire && !memwb_q.trap;
  assign retire_pc = memwb_q.pc;

endmodule
