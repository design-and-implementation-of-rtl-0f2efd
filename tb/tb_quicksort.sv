// tb_quicksort: workload test on the complete on-board computer (obc_top at
// its default parameters): a recursive quicksort of 64 random words, the
// program size used for the execution-model example of the design.
//
// How: the program (below, assembled by rv_asm_pkg) is written into the main
// memory before reset is released. main sets the stack pointer, calls
// qs(lo, hi) on the 64-word array (Lomuto partition, recursion through JAL/
// JALR with the return address and bounds on the stack), then freezes the
// counters by writing all ones to mcountinhibit, as the measured programs
// do before reading them, and spins.
// Checks:
//   * the array is sorted (it is a permutation of the input: same sum);
//   * the counters agree with a trace of the completed instructions
//     (retired, loads, stores, taken / not-taken branches, jumps) and
//     memory accesses = loads + stores;
//   * fetches = retired + 2 x (taken branches + jumps);
//   * the cycle count equals the execution model
//       cycles = retired + fetches' + hazards + 2 x (taken branches + jumps)
//              + 2 x loads + stores + 4,  fetches' = fetches + 4
//     (the +4 of fetches' is the start-up term of the measured fetch figure,
//     which this implementation does not count; see the documentation).
// The event table is printed in the same form as the characterization
// table of the paper. Interface: none (top-level bench), TB_RESULT line at the
// end, watchdog after 1,000,000 cycles.
module tb_quicksort;
  import hpm_pkg::*;
  import rv_asm_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        retire;
  logic [31:0] retire_pc;
  logic [63:0] mtime;
  events_t     count_ev;
  logic [63:0] counters [14];

  obc_top dut (.clk, .rst_n, .ext_irq (1'b0), .count_ev, .counters, .retire, .retire_pc, .mtime);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // --------------------------------------------------------------- program
  localparam int N = 64, ARR = 'h1000, QS = 'h200;
  logic [31:0] prog [1024];
  int pc, PC_INH;
  task automatic e(logic [31:0] w); prog[pc >> 2] = w; pc += 4; endtask

  task automatic build();
    int loop_, skip_b, end_b, skip_, end_;
    for (int i = 0; i < 1024; i++) prog[i] = 32'd0;
    pc = 0;
    e(LUI(2, 8));                        // sp = 0x8000
    e(LUI(10, 1));                       // lo = &a[0]
    e(ADDI(11, 10, 4 * (N - 1)));        // hi = &a[N-1]
    e(JAL(1, QS - pc));
    e(ADDI(30, 0, -1));
    PC_INH = pc;
    e(CSRW(CSR_MCOUNTINHIBIT, 30));
    e(JAL(0, 0));
    pc = QS;                             // qs(x10 = lo, x11 = hi)
    e(BLT(10, 11, 8));
    e(JALR(0, 1, 0));
    e(ADDI(2, 2, -16));
    e(SW(1, 2, 0));
    e(SW(10, 2, 4));
    e(SW(11, 2, 8));
    e(LW(5, 11, 0));                     // pivot
    e(ADDI(6, 10, -4));                  // i = lo - 1
    e(ADDI(7, 10, 0));                   // j = lo
    loop_ = pc;
    end_b = pc;  e(32'd0);               // beq j, hi, end
    e(LW(28, 7, 0));
    skip_b = pc; e(32'd0);               // blt pivot, a[j], skip
    e(ADDI(6, 6, 4));
    e(LW(29, 6, 0));
    e(SW(28, 6, 0));
    e(SW(29, 7, 0));
    skip_ = pc;
    e(ADDI(7, 7, 4));
    e(JAL(0, loop_ - pc));
    end_ = pc;
    e(ADDI(6, 6, 4));                    // p = i + 1
    e(LW(29, 6, 0));
    e(SW(5, 6, 0));
    e(SW(29, 11, 0));
    e(SW(6, 2, 12));
    e(ADDI(11, 6, -4));
    e(JAL(1, QS - pc));                  // qs(lo, p - 1)
    e(LW(6, 2, 12));
    e(LW(11, 2, 8));
    e(ADDI(10, 6, 4));
    e(JAL(1, QS - pc));                  // qs(p + 1, hi)
    e(LW(1, 2, 0));
    e(ADDI(2, 2, 16));
    e(JALR(0, 1, 0));
    prog[end_b >> 2]  = BEQ(7, 11, end_ - end_b);
    prog[skip_b >> 2] = BLT(5, 28, skip_ - skip_b);
  endtask

  // -------------------------------------------------------------- tracing
  longint t_ret, t_ld, t_st, t_br, t_brnt, t_jmp;
  bit     counting = 1'b1, prev_br = 1'b0;
  logic [31:0] prev_pc;

  always @(negedge clk) if (rst_n && retire && counting) begin
    dec_t c;
    c = rdec(prog[retire_pc >> 2]);
    if (prev_br) begin
      if (retire_pc != prev_pc + 4) t_br++; else t_brnt++;
    end
    prev_br = c.is_branch; prev_pc = retire_pc;
    t_ret++;
    if (c.is_load) t_ld++;
    if (c.is_store) t_st++;
    if (c.is_jump) t_jmp++;
    if (retire_pc == PC_INH) counting = 1'b0;
  end

  logic [31:0] vals [N];
  initial begin
    {t_ret, t_ld, t_st, t_br, t_brnt, t_jmp} = '0;
    build();
    for (int i = 0; i < N; i++) vals[i] = 32'($urandom_range(0, 100000));
    for (int i = 0; i < 16384; i++) dut.u_mem.mem[i] = (i < 1024) ? prog[i] : 32'd0;
    for (int i = 0; i < N; i++) dut.u_mem.mem[(ARR >> 2) + i] = vals[i];
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    while (counting) @(posedge clk);
    repeat (20) @(posedge clk);
    begin
      logic [31:0] s [N];
      s = vals;
      s.sort();
      for (int i = 0; i < N; i++)
        check(dut.u_mem.mem[(ARR >> 2) + i] == s[i], $sformatf("a[%0d] = %0d, expected %0d", i, dut.u_mem.mem[(ARR >> 2) + i], s[i]));
    end
    begin
      longint cyc, ins, fet, hz, br, brnt, jmp, ld, st, model, acc;
      cyc = counters[0]; ins = counters[2]; br = counters[6]; brnt = counters[7]; jmp = counters[8];
      hz = counters[9]; ld = counters[11]; st = counters[12]; fet = counters[13];
      check(ins == t_ret && ld == t_ld && st == t_st && br == t_br && brnt == t_brnt && jmp == t_jmp,
            "counters agree with the completed-instruction trace");
      check(counters[10] == ld + st, "memory accesses = loads + stores");
      check(counters[3] == 0 && counters[4] == 0 && counters[5] == 0, "no traps");
      check(fet == ins + 2 * (br + jmp), "fetches = retired + 2 x (taken branches + jumps)");
      check(hz > 0 && br > 0 && brnt > 0 && ld > 0 && st > 0, "every counted event type occurred");
      $display("Event                 count    cycles/event  running total");
      acc = ins;                 $display("Retired instructions  %7d  1  %7d", ins, acc);
      acc += 2 * br;             $display("Taken branches        %7d  2  %7d", br, acc);
      acc += 2 * jmp;            $display("Jumps                 %7d  2  %7d", jmp, acc);
      acc += hz;                 $display("Hazards               %7d  1  %7d", hz, acc);
      acc += 2 * ld;             $display("Loads                 %7d  2  %7d", ld, acc);
      acc += st;                 $display("Stores                %7d  1  %7d", st, acc);
      acc += fet + 4;            $display("Fetches (+4)          %7d  1  %7d", fet + 4, acc);
      acc += 4;                  $display("Initial filling             -  4  %7d", acc);
      model = acc;
      $display("Cycles counted        %7d  (not-taken branches %0d)", cyc, brnt);
      check(cyc == model, $sformatf("cycle count %0d follows the execution model %0d", cyc, model));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
