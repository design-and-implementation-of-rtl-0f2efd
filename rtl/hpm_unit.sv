// hpm_unit: the counting end of the synchronous performance monitor, inside
// the CSR unit.
//
// What it holds
//   * the counters: mcycle, minstret and mhpmcounter3..(2+NUM_HPM), 64 bits
//     each, readable and writable as low/high 32-bit CSR halves;
//   * the general configuration CSRs: mcountinhibit (stops the selected
//     counters) and mcounteren (lets user mode read the selected counters
//     through the read-only cycle/time/instret/hpmcounterN aliases);
//   * the specific configuration CSRs mhpmevent3..: the event number counted
//     by each programmable counter. Event number k selects bit k of the
//     triggered-events vector (0 = clock cycle, 2 = retired instruction,
//     3..13 the platform events); any other value counts nothing. The reset
//     values program counter n with event n, which is the assignment of the
//     paper's event table (mhpmcounter3 = exceptions ... mhpmcounter13 =
//     fetches).
//
// COUNT process
//   `count_en` is high on the clock edge on which a pipeline slot leaves the
//   write-back stage, and `count_ev` is that slot's final events vector. On
//   that edge every counter whose event bit is set and which is not inhibited
//   is incremented, so an event is counted only once the instruction that
//   raised it has completed, never earlier and never for a cancelled
//   instruction's cancelled events. The cycle event is the exception: it is
//   counted on every rising edge (not only when a slot retires) for as long
//   as the counter is not inhibited. `count_ev_q` keeps the last counted
//   vector (the COUNT stage of the worked example) for observation.
//
// Writes
//   CSR writes arrive from the CSR unit's shadow register (`wr_*`), which was
//   loaded on the falling edge of the write-back cycle. They are applied on
//   the next rising edge, together with the increments. A write to a counter
//   wins over an increment of the same counter on that edge: the event is
//   lost, which is the intended behaviour (writing a counter restarts it).
//
// Reads are combinational (`rd_addr` -> `rd_data`, `rd_hit`). Counters
// numbered beyond 2+NUM_HPM read as zero and ignore writes, as the RISC-V
// specification permits; `counters` exports only the implemented range
// 0..2+NUM_HPM (entry 1, the time slot, is the constant zero: time lives in
// the real-time timer).
module hpm_unit
  import hpm_pkg::*;
#(
  parameter int unsigned NUM_HPM = 11,   // programmable counters, mhpmcounter3..(2+NUM_HPM)
  parameter int unsigned CNT_W   = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // COUNT process
  input  logic              count_en,
  input  events_t           count_ev,
  output events_t           count_ev_q,
  // write from the shadow register
  input  logic              wr_en,
  input  logic [11:0]       wr_addr,
  input  logic [31:0]       wr_data,
  // read
  input  logic [11:0]       rd_addr,
  output logic              rd_hit,
  output logic [31:0]       rd_data,
  input  logic [63:0]       mtime,
  // observation
  output logic [CNT_W-1:0]  counters [3+NUM_HPM],
  output logic [31:0]       mcounteren_o
);

  localparam int unsigned NCNT = 3 + NUM_HPM;    // counters 0..2+NUM_HPM

  logic [CNT_W-1:0] cnt [NCNT];
  logic [31:0]      mhpmevent [NCNT];
  logic [NCNT-1:0]  inhibit;
  logic [31:0]      mcounteren;

  // ------------------------------------------------------------ counters
  for (genvar i = 0; i < NCNT; i++) begin : g_cnt
    if (i == 1) begin : g_time_slot
      assign cnt[i]       = '0;
      assign mhpmevent[i] = '0;
      assign inhibit[i]   = 1'b0;
    end else begin : g_counter
      logic [31:0] ev_sel;
      logic        inc;
      if (i < 3) begin : g_fixed
        assign mhpmevent[i] = '0;
        assign ev_sel       = (i == 0) ? 32'(EV_CYCLE) : 32'(EV_INSTRET);
      end else begin : g_prog
        always_ff @(posedge clk or negedge rst_n)
          if (!rst_n)                                       mhpmevent[i] <= 32'(i);
          else if (wr_en && wr_addr == CSR_MHPMEVENT0 + 12'(i)) mhpmevent[i] <= wr_data;
        assign ev_sel = mhpmevent[i];
      end

      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n)                                 inhibit[i] <= 1'b0;
        else if (wr_en && wr_addr == CSR_MCOUNTINHIBIT) inhibit[i] <= wr_data[i];

      // event k: bit k of the vector; 0 counts every clock, 1 and >13 nothing
      always_comb begin
        inc = 1'b0;
        if (!inhibit[i]) begin
          if (ev_sel == 32'(EV_CYCLE))
            inc = 1'b1;
          else if (ev_sel < NUM_EVENTS && ev_sel != 32'(EV_TIME))
            inc = count_en && count_ev[ev_sel[$clog2(NUM_EVENTS)-1:0]];
        end
      end

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)
          cnt[i] <= '0;
        else if (wr_en && wr_addr == CSR_MCOUNTER0 + 12'(i))
          cnt[i] <= {cnt[i][CNT_W-1:32], wr_data};
        else if (wr_en && wr_addr == CSR_MCOUNTERH0 + 12'(i))
          cnt[i] <= {wr_data[CNT_W-33:0], cnt[i][31:0]};
        else if (inc)
          cnt[i] <= cnt[i] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mcounteren <= '0;
      count_ev_q <= '0;
    end else begin
      if (count_en) count_ev_q <= count_ev;
      if (wr_en && wr_addr == CSR_MCOUNTEREN) mcounteren <= wr_data;
    end
  end

  // ------------------------------------------------------------------ read
  always_comb begin
    logic [4:0]       idx;
    logic [CNT_W-1:0] c;
    logic [31:0]      ev;
    idx     = rd_addr[4:0];
    c       = '0;
    ev      = '0;
    for (int unsigned i = 0; i < NCNT; i++)
      if (idx == 5'(i)) begin
        c  = cnt[i];
        ev = mhpmevent[i];
      end
    rd_hit  = 1'b0;
    rd_data = '0;
    if (rd_addr == CSR_MCOUNTINHIBIT) begin
      rd_hit  = 1'b1;
      rd_data = 32'(inhibit);
    end else if (rd_addr == CSR_MCOUNTEREN) begin
      rd_hit  = 1'b1;
      rd_data = mcounteren;
    end else if (rd_addr[11:5] == CSR_MHPMEVENT0[11:5] && idx >= 5'd3) begin
      rd_hit  = 1'b1;
      rd_data = ev;
    end else if ((rd_addr[11:8] == 4'hB || rd_addr[11:8] == 4'hC) &&
                 rd_addr[6:5] == 2'b00) begin
      // machine counters B00-B1F/B80-B9F, user aliases C00-C1F/C80-C9F
      if (rd_addr[11:8] == 4'hC && idx == 5'd1) begin
        rd_hit  = 1'b1;
        rd_data = rd_addr[7] ? mtime[63:32] : mtime[31:0];
      end else if (idx != 5'd1) begin
        rd_hit  = 1'b1;
        rd_data = rd_addr[7] ? 32'(c >> 32) : c[31:0];
      end
    end
  end

  assign counters     = cnt;
  assign mcounteren_o = mcounteren;

endmodule
