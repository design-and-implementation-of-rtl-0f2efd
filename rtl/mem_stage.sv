// mem_stage: memory access stage. Loads and stores go to the data port,
// everything else passes through to write-back.
//
// A load or store raises `d_req` with the word address, byte enables and
// store data aligned to the byte lanes (SB/SH/SW) and waits for `d_ack`;
// `mem_wait` stalls the whole pipeline meanwhile. Data that arrives while the
// pipeline is stalled for another reason is kept in a one-entry buffer until
// the slot moves on. Load data is extracted from the addressed lanes and
// sign- or zero-extended (LB/LH/LW/LBU/LHU). The number of wait cycles is set
// by the memory (one for a store, two for a load in the paper's model).
// Monitor events set here: MEM_ACCESS for every load or store, plus LOAD or
// STORE.
// Accesses are assumed naturally aligned: the low address bits select the
// lanes and no misaligned-access trap is raised.
// The half-word store lane `sh` keeps only its low 16 bits; its upper bits
// are unused by construction.
module mem_stage
  import hpm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        advance,
  input  exmem_t      q,
  input  logic        q_valid,
  input  events_t     q_ev,
  // data port
  output logic        d_req,
  output logic        d_we,
  output logic [3:0]  d_be,
  output logic [31:0] d_addr,
  output logic [31:0] d_wdata,
  input  logic        d_ack,
  input  logic [31:0] d_rdata,
  // slot towards MEM/WB
  output memwb_t      d,
  output logic        d_valid,
  output events_t     d_ev,
  output logic        mem_wait
);

  logic        acc, done;
  logic [31:0] buf_data, word;
  logic [1:0]  off;

  assign acc      = q_valid && (q.is_load || q.is_store);
  assign d_req    = acc && !done;
  assign d_we     = q.is_store;
  assign d_addr   = {q.result[31:2], 2'b00};
  assign off      = q.result[1:0];
  assign mem_wait = d_req && !d_ack;
  assign word     = done ? buf_data : d_rdata;

  always_comb begin
    unique case (q.funct3[1:0])
      2'b00:   begin d_be = 4'b0001 << off;        d_wdata = {4{q.store_data[7:0]}};  end
      2'b01:   begin d_be = 4'b0011 << {off[1], 1'b0}; d_wdata = {2{q.store_data[15:0]}}; end
      default: begin d_be = 4'b1111;               d_wdata = q.store_data;            end
    endcase
  end

  logic [31:0] ld;
  always_comb begin
    logic [31:0] sh;
    sh = word >> {off, 3'b000};
    unique case (q.funct3)
      3'b000:  ld = {{24{sh[7]}},  sh[7:0]};
      3'b001:  ld = {{16{sh[15]}}, sh[15:0]};
      3'b100:  ld = {24'b0, sh[7:0]};
      3'b101:  ld = {16'b0, sh[15:0]};
      default: ld = word;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done     <= 1'b0;
      buf_data <= '0;
    end else if (advance) begin
      done <= 1'b0;
    end else if (d_req && d_ack) begin
      done     <= 1'b1;
      buf_data <= d_rdata;
    end
  end

  always_comb begin
    d          = '0;
    d.pc       = q.pc;
    d.rd       = q.rd;
    d.reg_we   = q.reg_we;
    d.wdata    = q.is_load ? ld : q.result;
    d.csr_op   = q.csr_op;
    d.csr_addr = q.csr_addr;
    d.csr_wr   = q.csr_wr;
    d.csr_src  = q.csr_src;
    d.is_mret  = q.is_mret;
    d.trap     = q.trap;
    d.cause    = q.cause;
    d.tval     = q.tval;
    d_valid    = q_valid;
    d_ev       = q_ev;
    if (acc) begin
      d_ev[EV_MEM_ACCESS] = 1'b1;
      d_ev[q.is_load ? EV_LOAD : EV_STORE] = 1'b1;
    end
  end

endmodule
