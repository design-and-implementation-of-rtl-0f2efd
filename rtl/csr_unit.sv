// csr_unit: control and status registers of the core, including the
// performance monitor (hpm_unit), with the atomic read/write sequence.
//
// Atomic CSR access (one CSR instruction, one write-back cycle):
//   1. rising edge on which the CSR instruction enters write-back: the old
//      value of the CSR is latched in `rd_data_q`, the register at the exit
//      of the unit;
//   2. falling edge in the middle of the write-back cycle: the new value
//      (CSRRW/RS/RC of the old value and rs1 or uimm) is stored in the shadow
//      register, and, in the register file, rd receives `rd_data_q`;
//   3. next rising edge: the shadow value is written into the CSR itself, on
//      the same edge on which the counters are incremented. A written counter
//      takes the written value and the increment of that edge is dropped.
// A CSR instruction entering write-back on the same edge as step 3 of its
// predecessor reads the shadow value (the latched read looks through the
// shadow), so back-to-back CSR instructions see each other's writes.
//
// Other registers: mstatus (MIE, MPIE, MPP), misa, mie (MEIE, MTIE), mtvec
// (direct mode), mscratch, mepc, mcause, mtval, mip (MEIP, MTIP, read only),
// mhartid. Privilege modes M and U. Trap entry (`trap_fire`) and MRET
// (`mret_fire`) are applied on the rising edge that ends the write-back cycle
// of the trapping slot or MRET.
//
// `chk_*` is a combinational legality check used by decode: the CSR must
// exist, the current privilege must be high enough (for user-mode counter
// reads, the counter's mcounteren bit must be set) and read-only CSRs must
// not be written. An illegal access becomes an illegal-instruction
// exception in decode.
// The paper specifies the three-step sequence, the shadow registers and the
// counter CSRs; the selection of other CSRs and their fields follows the
// RISC-V privileged specification and is this implementation's choice.
// counters[1] (time slot) is the constant zero; event bit 1 is never set.
module csr_unit
  import hpm_pkg::*;
#(
  parameter int unsigned NUM_HPM     = 11,
  parameter logic [31:0] MTVEC_RESET = 32'h0000_0100
) (
  input  logic        clk,
  input  logic        rst_n,
  // legality check for decode
  input  logic [11:0] chk_addr,
  input  logic        chk_write,
  output logic        chk_legal,
  output priv_e       priv,
  // read, latched on the edge the CSR instruction enters write-back
  input  logic        rd_latch,
  input  logic [11:0] rd_addr,
  output logic [31:0] rd_data_q,
  // write from write-back, sampled on the falling edge
  input  logic        wb_csr_fire,
  input  csr_op_e     wb_csr_op,
  input  logic [11:0] wb_csr_addr,
  input  logic        wb_csr_wr,
  input  logic [31:0] wb_csr_src,
  // traps
  input  logic        trap_fire,
  input  logic [31:0] trap_cause,
  input  logic [31:0] trap_pc,
  input  logic [31:0] trap_tval,
  input  logic        mret_fire,
  output logic [31:0] mtvec_o,
  output logic [31:0] mepc_o,
  // interrupts
  input  logic        ext_irq,
  input  logic        timer_irq,
  output logic        irq_pending,
  output logic [31:0] irq_cause,
  // performance monitor
  input  logic        count_en,
  input  events_t     count_ev,
  output events_t     count_ev_q,
  input  logic [63:0] mtime,
  output logic [63:0] counters [3+NUM_HPM]
);

  // ------------------------------------------------------------ registers
  logic        mie_bit, mpie_bit;
  priv_e       mpp;
  logic        meie, mtie;
  logic [31:0] mtvec, mscratch, mepc, mcause, mtval;

  // shadow register, loaded on the falling edge
  logic        sh_valid;
  logic [11:0] sh_addr;
  logic [31:0] sh_data;

  // ------------------------------------------------------ monitor instance
  logic        hpm_hit;
  logic [31:0] hpm_rdata, mcounteren;

  hpm_unit #(.NUM_HPM(NUM_HPM)) u_hpm (
    .clk, .rst_n,
    .count_en, .count_ev, .count_ev_q,
    .wr_en   (sh_valid),
    .wr_addr (sh_addr),
    .wr_data (sh_data),
    .rd_addr,
    .rd_hit  (hpm_hit),
    .rd_data (hpm_rdata),
    .mtime,
    .counters,
    .mcounteren_o    (mcounteren)
  );

  // ---------------------------------------------------------------- read
  function automatic logic [11:0] norm(logic [11:0] a);
    // user counter aliases name the same storage as the machine counters
    if (a[11:8] == 4'hC && a[4:0] != 5'd1) return {4'hB, a[7:0]};
    return a;
  endfunction

  logic [31:0] mstatus_v, mip_v, mie_v, local_rdata;
  logic        local_hit;
  assign mstatus_v = {19'b0, {2{mpp == PRIV_M}}, 3'b0, mpie_bit, 3'b0, mie_bit, 3'b0};
  assign mip_v     = {20'b0, ext_irq, 3'b0, timer_irq, 7'b0};
  assign mie_v     = {20'b0, meie, 3'b0, mtie, 7'b0};

  always_comb begin
    local_hit   = 1'b1;
    local_rdata = '0;
    unique case (rd_addr)
      CSR_MSTATUS:  local_rdata = mstatus_v;
      CSR_MISA:     local_rdata = 32'h4010_0100;   // RV32 I, U
      CSR_MIE:      local_rdata = mie_v;
      CSR_MTVEC:    local_rdata = mtvec;
      CSR_MSCRATCH: local_rdata = mscratch;
      CSR_MEPC:     local_rdata = mepc;
      CSR_MCAUSE:   local_rdata = mcause;
      CSR_MTVAL:    local_rdata = mtval;
      CSR_MIP:      local_rdata = mip_v;
      CSR_MHARTID:  local_rdata = '0;
      default:      local_hit   = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      rd_data_q <= '0;
    else if (rd_latch) begin
      if (sh_valid && norm(sh_addr) == norm(rd_addr) && rd_addr != CSR_MIP)
        rd_data_q <= sh_data;
      else
        rd_data_q <= local_hit ? local_rdata : (hpm_hit ? hpm_rdata : 32'd0);
    end
  end

  // -------------------------------------------------------- legality check
  function automatic logic exists(logic [11:0] a);
    unique case (a)
      CSR_MSTATUS, CSR_MISA, CSR_MIE, CSR_MTVEC, CSR_MCOUNTEREN, CSR_MCOUNTINHIBIT,
      CSR_MSCRATCH, CSR_MEPC, CSR_MCAUSE, CSR_MTVAL, CSR_MIP, CSR_MHARTID: return 1'b1;
      default: ;
    endcase
    if (a[11:5] == CSR_MHPMEVENT0[11:5] && a[4:0] >= 5'd3) return 1'b1;
    if (a[11:8] == 4'hB && a[6:5] == 2'b00 && a[4:0] != 5'd1) return 1'b1;
    if (a[11:8] == 4'hC && a[6:5] == 2'b00) return 1'b1;
    return 1'b0;
  endfunction

  always_comb begin
    chk_legal = exists(chk_addr);
    if (chk_write && chk_addr[11:10] == 2'b11) chk_legal = 1'b0;      // read-only
    if (priv == PRIV_U) begin
      if (chk_addr[11:8] == 4'hC && chk_addr[6:5] == 2'b00)
        chk_legal = chk_legal && mcounteren[chk_addr[4:0]];
      else
        chk_legal = 1'b0;                                            // machine CSR
    end
  end

  // -------------------------------------------------------- write (shadow)
  logic [31:0] wval;
  always_comb begin
    unique case (wb_csr_op)
      CSR_RS:  wval = rd_data_q | wb_csr_src;
      CSR_RC:  wval = rd_data_q & ~wb_csr_src;
      default: wval = wb_csr_src;
    endcase
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_valid <= 1'b0;
      sh_addr  <= '0;
      sh_data  <= '0;
    end else begin
      sh_valid <= wb_csr_fire && wb_csr_wr;
      sh_addr  <= wb_csr_addr;
      sh_data  <= wval;
    end
  end

  // ------------------------------------------- machine registers, traps
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      priv     <= PRIV_M;
      mie_bit  <= 1'b0;
      mpie_bit <= 1'b0;
      mpp      <= PRIV_M;
      meie     <= 1'b0;
      mtie     <= 1'b0;
      mtvec    <= MTVEC_RESET;
      mscratch <= '0;
      mepc     <= '0;
      mcause   <= '0;
      mtval    <= '0;
    end else begin
      if (sh_valid) begin
        unique case (sh_addr)
          CSR_MSTATUS: begin
            mie_bit  <= sh_data[3];
            mpie_bit <= sh_data[7];
            mpp      <= (sh_data[12:11] == 2'b11) ? PRIV_M : PRIV_U;
          end
          CSR_MIE: begin
            meie <= sh_data[11];
            mtie <= sh_data[7];
          end
          CSR_MTVEC:    mtvec    <= {sh_data[31:2], 2'b00};
          CSR_MSCRATCH: mscratch <= sh_data;
          CSR_MEPC:     mepc     <= {sh_data[31:2], 2'b00};
          CSR_MCAUSE:   mcause   <= sh_data;
          CSR_MTVAL:    mtval    <= sh_data;
          default: ;
        endcase
      end
      if (trap_fire) begin
        mepc     <= trap_pc;
        mcause   <= trap_cause;
        mtval    <= trap_tval;
        mpie_bit <= mie_bit;
        mie_bit  <= 1'b0;
        mpp      <= priv;
        priv     <= PRIV_M;
      end else if (mret_fire) begin
        mie_bit  <= mpie_bit;
        mpie_bit <= 1'b1;
        priv     <= mpp;
        mpp      <= PRIV_U;
      end
    end
  end

  // ------------------------------------------------------------ interrupts
  logic irq_enabled;
  assign irq_enabled = (priv == PRIV_U) || mie_bit;
  always_comb begin
    irq_pending = 1'b0;
    irq_cause   = '0;
    if (irq_enabled && ext_irq && meie) begin
      irq_pending = 1'b1;
      irq_cause   = CAUSE_MEI;
    end else if (irq_enabled && timer_irq && mtie) begin
      irq_pending = 1'b1;
      irq_cause   = CAUSE_MTI;
    end
  end

  assign mtvec_o = mtvec;
  assign mepc_o  = mepc;

endmodule
