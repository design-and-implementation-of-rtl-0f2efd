// rt_timer: the real-time counter of the on-board computer and its timer
// interrupt.
//
// `mtime` is a 64-bit counter advanced on every clock edge. It is the
// real-time source of the core (read through the time/timeh CSRs) and,
// unlike the monitor's mcycle, it cannot be inhibited. A 64-bit compare
// register `mtimecmp` raises `timer_irq` while mtime >= mtimecmp; it resets
// to all ones, so no interrupt is pending after reset.
// Both registers are memory mapped as four 32-bit words on a simple bus
// (`req`/`we`/`addr`/`wdata`, acknowledged in the same cycle, read data
// combinational):
//   +0x0 mtime[31:0]   +0x4 mtime[63:32]   +0x8 mtimecmp[31:0]   +0xC mtimecmp[63:32]
// The paper describes the counter (constant-frequency cycle counter, not
// inhibitable); the compare register and the register map follow the usual
// RISC-V machine-timer layout and are this implementation's choice. A write
// to mtime replaces the addressed half instead of incrementing it.
// Registers are word-wide: addr[1:0] (byte offset) is ignored.
module rt_timer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [3:0]  addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        ack,
  output logic [63:0] mtime,
  output logic        timer_irq
);

  logic [63:0] mtimecmp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mtime    <= '0;
      mtimecmp <= '1;
    end else begin
      if (req && we && addr[3:2] == 2'd0)      mtime    <= {mtime[63:32], wdata};
      else if (req && we && addr[3:2] == 2'd1) mtime    <= {wdata, mtime[31:0]};
      else                                     mtime    <= mtime + 64'd1;
      if (req && we && addr[3:2] == 2'd2)      mtimecmp <= {mtimecmp[63:32], wdata};
      if (req && we && addr[3:2] == 2'd3)      mtimecmp <= {wdata, mtimecmp[31:0]};
    end
  end

  always_comb begin
    unique case (addr[3:2])
      2'd0: rdata = mtime[31:0];
      2'd1: rdata = mtime[63:32];
      2'd2: rdata = mtimecmp[31:0];
      default: rdata = mtimecmp[63:32];
    endcase
  end

  assign ack       = req;
  assign timer_irq = (mtime >= mtimecmp);

endmodule
