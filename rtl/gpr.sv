// gpr: the 32 x 32-bit general-purpose register file (x0 reads as zero).
//
// Two combinational read ports serve the decode stage; one write port serves
// the write-back stage. The write happens on the falling clock edge, in the
// middle of the write-back cycle, which is also when a CSR instruction stores
// the old CSR value into rd (atomic CSR access, rising edge read / falling
// edge write). Because of the mid-cycle write, an instruction in decode reads
// the value that write-back is committing in the same cycle, so no
// write-back-to-decode forwarding is needed.
// The register count and width follow RV32I; the falling-edge write is how
// this implementation realises the paper's falling-edge rd update.
// Registers are cleared by reset.
module gpr #(
  parameter int unsigned XLEN  = 32,
  parameter int unsigned NREGS = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREGS)-1:0] raddr1,
  output logic [XLEN-1:0]          rdata1,
  input  logic [$clog2(NREGS)-1:0] raddr2,
  output logic [XLEN-1:0]          rdata2,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] waddr,
  input  logic [XLEN-1:0]          wdata
);

  logic [XLEN-1:0] regs [NREGS];

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NREGS); i++) regs[i] <= '0;
    end else if (we && waddr != '0) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata1 = (raddr1 == '0) ? '0 : regs[raddr1];
  assign rdata2 = (raddr2 == '0) ? '0 : regs[raddr2];

endmodule
