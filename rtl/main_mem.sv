// main_mem: on-chip main memory of the on-board computer, with one
// instruction port and one data port and the access latencies of the
// processor's execution model.
//
// Both ports use a request/acknowledge handshake: the requester holds `req`
// (and address/data) until `ack` is high for one cycle; read data is valid
// in that cycle. An access takes 1 + WAIT cycles, WAIT being FETCH_WAIT for
// the instruction port, LOAD_WAIT for data reads and STORE_WAIT for data
// writes. The defaults (1, 2, 1 extra cycles) are the latencies of the
// paper's execution model: a store costs one extra cycle, a load two, and
// each instruction fetch one. Stores honour the byte enables.
// The storage is a word array of MEM_WORDS words addressed by addr[..:2]
// (addresses wrap); its size is not given by the paper. There is no reset
// of the contents: software is loaded before the core leaves reset.
// Only the word-address bits of i_addr/d_addr inside the memory size are
// decoded; the byte-offset bits and the bits above the memory are ignored
// (the top-level decoder has already selected the memory).
module main_mem #(
  parameter int unsigned MEM_WORDS  = 16384,  // 64 KiB
  parameter int unsigned FETCH_WAIT = 1,
  parameter int unsigned LOAD_WAIT  = 2,
  parameter int unsigned STORE_WAIT = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction port
  input  logic        i_req,
  input  logic [31:0] i_addr,
  output logic        i_ack,
  output logic [31:0] i_rdata,
  // data port
  input  logic        d_req,
  input  logic        d_we,
  input  logic [3:0]  d_be,
  input  logic [31:0] d_addr,
  input  logic [31:0] d_wdata,
  output logic        d_ack,
  output logic [31:0] d_rdata
);

  localparam int unsigned AW = $clog2(MEM_WORDS);

  logic [31:0] mem [MEM_WORDS];
  logic [3:0]  i_cnt, d_cnt;
  logic [AW-1:0] i_idx, d_idx;

  assign i_idx = i_addr[AW+1:2];
  assign d_idx = d_addr[AW+1:2];

  assign i_ack   = i_req && (i_cnt == 4'(FETCH_WAIT));
  assign d_ack   = d_req && (d_cnt == 4'(d_we ? STORE_WAIT : LOAD_WAIT));
  assign i_rdata = mem[i_idx];
  assign d_rdata = mem[d_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_cnt <= '0;
      d_cnt <= '0;
    end else begin
      i_cnt <= (i_req && !i_ack) ? i_cnt + 4'd1 : 4'd0;
      d_cnt <= (d_req && !d_ack) ? d_cnt + 4'd1 : 4'd0;
    end
  end

  always_ff @(posedge clk) begin
    if (d_ack && d_we)
      for (int b = 0; b < 4; b++)
        if (d_be[b]) mem[d_idx][8*b +: 8] <= d_wdata[8*b +: 8];
  end

endmodule
