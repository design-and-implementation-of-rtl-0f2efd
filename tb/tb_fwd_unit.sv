// tb_fwd_unit: self-checking test of the forwarding unit.
//
// 5000 random cases with deliberately colliding register numbers. The
// expected operand is computed independently: register 0 gives zero, else
// the EX/MEM result if that stage writes the register, else the MEM/WB
// value if that stage writes it, else the register-file value.
module tb_fwd_unit;
  logic [4:0]  rs1, rs2, exmem_rd, memwb_rd;
  logic [31:0] rs1_reg, rs2_reg, exmem_val, memwb_val, rs1_val, rs2_val;
  logic        exmem_we, memwb_we;
  logic        clk = 1'b0;

  fwd_unit dut (.rs1, .rs2, .rs1_reg, .rs2_reg, .exmem_we, .exmem_rd, .exmem_val,
                .memwb_we, .memwb_rd, .memwb_val, .rs1_val, .rs2_val);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] expect_val(logic [4:0] rs, logic [31:0] reg_v);
    if (rs == 0) return 32'd0;
    if (exmem_we && exmem_rd == rs) return exmem_val;
    if (memwb_we && memwb_rd == rs) return memwb_val;
    return reg_v;
  endfunction

  initial begin
    for (int n = 0; n < 5000; n++) begin
      rs1 = 5'($urandom_range(0, 3)); rs2 = 5'($urandom_range(0, 3));
      exmem_rd = 5'($urandom_range(0, 3)); memwb_rd = 5'($urandom_range(0, 3));
      exmem_we = 1'($urandom_range(0, 1)); memwb_we = 1'($urandom_range(0, 1));
      rs1_reg = (rs1 == 0) ? 32'd0 : $urandom;
      rs2_reg = (rs2 == 0) ? 32'd0 : $urandom;
      exmem_val = $urandom; memwb_val = $urandom;
      #1;
      check(rs1_val == expect_val(rs1, rs1_reg), $sformatf("rs1=%0d ex=%0b/%0d wb=%0b/%0d", rs1, exmem_we, exmem_rd, memwb_we, memwb_rd));
      check(rs2_val == expect_val(rs2, rs2_reg), $sformatf("rs2=%0d", rs2));
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
