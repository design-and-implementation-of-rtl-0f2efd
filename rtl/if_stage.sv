// if_stage: instruction fetch.
//
// Holds the program counter and fetches one instruction at a time over a
// request/acknowledge port. While `fetch_en` is high and no fetched
// instruction is waiting, `i_req` is raised for the current PC; an
// instruction that arrives while the pipeline is stalled is kept in a
// one-entry buffer. `if_wait` asks for a pipeline stall while the fetch of
// the current PC is still outstanding.
// On a clock edge with `advance` high the slot is handed to the IF/ID
// register and the PC moves to PC+4, or to `redirect_pc` when `redirect` is
// high (taken branch or jump from EX, trap entry or MRET from WB). With
// `fetch_en` low (the pipeline is being emptied before a trap entry or an
// MRET) nothing is fetched and empty slots are produced.
// A fetch is not started while `bus_busy` is high (a load or store is
// waiting in MEM): instruction and data accesses are serialised, as over a
// single memory interface, so their wait cycles add up the way the paper's
// execution model counts them.
// Monitor events: a fetched instruction leaves IF with the cycle, presumed
// retirement and fetch bits set, as in the first row of the paper's worked
// example. Those bits stay with the instruction; later stages clear the
// retirement bit if it does not complete, but the fetch is always counted.
module if_stage
  import hpm_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        advance,
  input  logic        fetch_en,
  input  logic        bus_busy,
  input  logic        redirect,
  input  logic [31:0] redirect_pc,
  // instruction memory port
  output logic        i_req,
  output logic [31:0] i_addr,
  input  logic        i_ack,
  input  logic [31:0] i_rdata,
  // slot towards IF/ID
  output ifid_t       d,
  output logic        d_valid,
  output events_t     d_ev,
  output logic        if_wait
);

  logic [31:0] pc;
  logic        have;
  logic [31:0] buf_instr;

  assign i_req   = fetch_en && !have && !bus_busy;
  assign i_addr  = pc;
  assign d_valid = fetch_en && (have || i_ack);
  assign d_ev    = d_valid ? EV_FETCHED : '0;
  assign d.pc    = pc;
  assign d.instr = have ? buf_instr : i_rdata;
  assign if_wait = i_req && !i_ack;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc        <= RESET_PC;
      have      <= 1'b0;
      buf_instr <= '0;
    end else if (advance) begin
      have <= 1'b0;
      if (redirect)     pc <= redirect_pc;
      else if (d_valid) pc <= pc + 32'd4;
    end else if (i_req && i_ack) begin
      have      <= 1'b1;
      buf_instr <= i_rdata;
    end
  end

endmodule
