// obc_top: the on-board computer. The RV32 core with its synchronous
// performance monitor, the on-chip main memory and the real-time timer.
//
// The core's instruction port goes straight to the memory. Its data port is
// decoded on the address: the TIMER_BASE region (16 bytes) selects the
// real-time timer (mtime/mtimecmp), everything else the main memory. The
// timer's counter feeds the core's time CSR and its compare output the
// machine timer interrupt. The external interrupt line is a port: the
// platform interrupt controller that would drive it is not part of this
// design. The counters, the last counted events vector and the retirement
// strobe are brought out for observation.
// counters[1] is the constant zero of the time slot (time is read from the
// real-time timer), and bit 1 of the events vector is never set.
// Memory latencies default to the paper's execution model (fetch 1, load 2,
// store 1 extra cycle); the memory size and the address map are this
// implementation's choices.
module obc_top
  import hpm_pkg::*;
#(
  parameter int unsigned MEM_WORDS   = 16384,
  parameter logic [31:0] TIMER_BASE  = 32'h2000_0000,
  parameter logic [31:0] RESET_PC    = 32'h0000_0000,
  parameter logic [31:0] MTVEC_RESET = 32'h0000_0100,
  parameter int unsigned NUM_HPM     = 11,
  parameter int unsigned FETCH_WAIT  = 1,
  parameter int unsigned LOAD_WAIT   = 2,
  parameter int unsigned STORE_WAIT  = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ext_irq,
  output events_t     count_ev,
  output logic [63:0] counters [3+NUM_HPM],
  output logic        retire,
  output logic [31:0] retire_pc,
  output logic [63:0] mtime
);

  logic        i_req, i_ack;
  logic [31:0] i_addr, i_rdata;
  logic        d_req, d_we, d_ack;
  logic [3:0]  d_be;
  logic [31:0] d_addr, d_wdata, d_rdata;
  logic        timer_irq;

  rv32_core #(.RESET_PC(RESET_PC), .MTVEC_RESET(MTVEC_RESET), .NUM_HPM(NUM_HPM)) u_core (
    .clk, .rst_n,
    .i_req, .i_addr, .i_ack, .i_rdata,
    .d_req, .d_we, .d_be, .d_addr, .d_wdata, .d_ack, .d_rdata,
    .ext_irq, .timer_irq, .mtime,
    .count_ev, .counters, .retire, .retire_pc
  );

  // data bus decode
  logic        sel_tmr;
  logic        m_ack, t_ack;
  logic [31:0] m_rdata, t_rdata;
  assign sel_tmr = (d_addr[31:4] == TIMER_BASE[31:4]);
  assign d_ack   = sel_tmr ? t_ack : m_ack;
  assign d_rdata = sel_tmr ? t_rdata : m_rdata;

  main_mem #(
    .MEM_WORDS(MEM_WORDS), .FETCH_WAIT(FETCH_WAIT),
    .LOAD_WAIT(LOAD_WAIT), .STORE_WAIT(STORE_WAIT)
  ) u_mem (
    .clk, .rst_n,
    .i_req, .i_addr, .i_ack, .i_rdata,
    .d_req (d_req && !sel_tmr), .d_we, .d_be, .d_addr, .d_wdata,
    .d_ack (m_ack), .d_rdata (m_rdata)
  );

  rt_timer u_tmr (
    .clk, .rst_n,
    .req   (d_req && sel_tmr),
    .we    (d_we),
    .addr  (d_addr[3:0]),
    .wdata (d_wdata),
    .rdata (t_rdata),
    .ack   (t_ack),
    .mtime,
    .timer_irq
  );

endmodule
