// tb_mem_stage: self-checking test of the memory stage.
//
// A testbench data memory (256 words, model array) acknowledges loads after
// two wait cycles and stores after one, the latencies of the execution
// model. Random slots (byte/half/word loads with sign or zero extension,
// byte/half/word stores at every legal offset, non-memory slots, invalid
// slots) are presented; the global advance is low while the stage waits
// (mem_wait) and on random extra stalls, during which a finished access
// must be kept and not repeated. Checked: the number of cycles each access
// keeps the pipeline waiting (2 for a load, 1 for a store), byte enables and
// lane placement of store data (through the memory contents), the loaded
// value, and the MEM_ACCESS plus LOAD or STORE events added to the vector.
module tb_mem_stage;
  import hpm_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0, advance, stall = 1'b0;
  exmem_t      q = '0;
  logic        q_valid = 1'b0, d_req, d_we, d_ack, mem_wait, d_valid;
  events_t     q_ev = '0, d_ev;
  logic [3:0]  d_be;
  logic [31:0] d_addr, d_wdata, d_rdata;
  memwb_t      d;

  mem_stage dut (.clk, .rst_n, .advance, .q, .q_valid, .q_ev, .d_req, .d_we, .d_be, .d_addr, .d_wdata,
                 .d_ack, .d_rdata, .d, .d_valid, .d_ev, .mem_wait);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // memory: ack after LOAD 2 / STORE 1 wait cycles
  logic [31:0] mem [256];
  logic [1:0]  cnt;
  int          n_req;
  assign d_ack   = d_req && (cnt == (d_we ? 2'd1 : 2'd2));
  assign d_rdata = mem[d_addr[9:2]];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cnt <= '0;
    else        cnt <= (d_req && !d_ack) ? cnt + 2'd1 : 2'd0;
  always @(posedge clk)
    if (d_ack && d_we)
      for (int b = 0; b < 4; b++) if (d_be[b]) mem[d_addr[9:2]][8*b +: 8] <= d_wdata[8*b +: 8];
  always @(posedge clk) if (d_ack) n_req++;

  assign advance = !mem_wait && !stall;

  logic [31:0] m [256];
  int n_ld = 0, n_st = 0;

  initial begin
    for (int i = 0; i < 256; i++) begin m[i] = $urandom; mem[i] = m[i]; end
    n_req = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      int waits, reqs0, kind;
      logic [31:0] a, exp_ld, w;
      logic [1:0] off;
      q = '0;
      q.pc = 32'(n * 4); q.rd = 5'($urandom_range(1, 31)); q.reg_we = 1'b1;
      q_valid = ($urandom_range(0, 7) != 0);
      q_ev = EV_FETCHED;
      kind = $urandom_range(0, 2);                  // 0 load, 1 store, 2 other
      q.funct3 = (kind == 0) ? 3'($urandom_range(0, 5)) : 3'($urandom_range(0, 2));
      if (kind == 0 && q.funct3 == 3'b011) q.funct3 = 3'b010;
      off = 2'($urandom);
      if (q.funct3[1:0] == 2'b01) off[0] = 1'b0;
      if (q.funct3[1:0] == 2'b10) off = 2'b00;
      a = {22'd0, 8'($urandom), off};
      q.result = (kind == 2) ? $urandom : a;
      q.is_load = (kind == 0); q.is_store = (kind == 1);
      q.store_data = $urandom;
      if (kind == 1) q.reg_we = 1'b0;
      // count the cycles the slot keeps the pipeline waiting
      waits = 0; reqs0 = n_req;
      #1;
      while (mem_wait) begin waits++; @(negedge clk); #1; end
      // extra stalls after completion: the access must not be repeated
      repeat ($urandom_range(0, 2)) begin
        stall = 1'b1;
        @(negedge clk); #1;
        check(!d_req, "finished access not repeated during a stall");
      end
      stall = 1'b0;
      #1;
      w = m[a[9:2]];
      case (q.funct3)
        3'b000: exp_ld = {{24{w[8*off+7]}}, w[8*off +: 8]};
        3'b001: exp_ld = {{16{w[8*off+15]}}, w[8*off +: 16]};
        3'b100: exp_ld = {24'd0, w[8*off +: 8]};
        3'b101: exp_ld = {16'd0, w[8*off +: 16]};
        default: exp_ld = w;
      endcase
      if (q_valid && kind == 0) begin
        check(waits == 2, $sformatf("load waits 2 cycles (%0d)", waits));
        check(d.wdata == exp_ld, $sformatf("load f3=%0d off=%0d got %h exp %h", q.funct3, off, d.wdata, exp_ld));
        n_ld++;
      end else if (q_valid && kind == 1) begin
        check(waits == 1, $sformatf("store waits 1 cycle (%0d)", waits));
        n_st++;
      end else begin
        check(waits == 0 && !d_req, "no access for other or invalid slots");
        if (kind == 2) check(d.wdata == q.result, "result passes through");
      end
      begin
        events_t e;
        e = q_ev;
        if (q_valid && kind < 2) begin
          e[EV_MEM_ACCESS] = 1'b1;
          e[kind == 0 ? EV_LOAD : EV_STORE] = 1'b1;
        end
        check(d_ev == e && d_valid == q_valid && d.rd == q.rd, "memory events and slot");
      end
      @(posedge clk);                              // advance
      if (q_valid && kind == 1)
        for (int b = 0; b < 4; b++) begin
          logic [3:0] be;
          be = (q.funct3 == 3'b000) ? (4'b0001 << off) : (q.funct3 == 3'b001) ? (4'b0011 << off) : 4'b1111;
          if (be[b]) m[a[9:2]][8*b +: 8] = (q.funct3 == 3'b000) ? q.store_data[7:0] :
                                            (q.funct3 == 3'b001) ? q.store_data[8*(b - int'(off)) +: 8] :
                                            q.store_data[8*b +: 8];
        end
      @(negedge clk);
      check(n_req - reqs0 == ((q_valid && kind < 2) ? 1 : 0), "exactly one memory access per slot");
    end
    for (int i = 0; i < 256; i++) check(mem[i] == m[i], $sformatf("memory word %0d after stores", i));
    check(n_ld > 300 && n_st > 300, "enough loads and stores");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
