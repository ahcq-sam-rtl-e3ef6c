// tb_quant_param_regs: the 4-group scale/zero-point register bank.
// Checks the reset values, random writes of each field of each group through
// both read ports, and that a write leaves the other groups untouched.
module tb_quant_param_regs;
  import ahcq_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, fld = 0;
  logic [1:0] idx = '0, rd_a = '0, rd_b = '0;
  logic [31:0] wdata = '0;
  qparam_t qp_a, qp_b;
  logic [31:0] ms [NGROUPS];
  logic [3:0]  mz [NGROUPS];
  int checks = 0, failures = 0;

  quant_param_regs dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input longint got, exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  task automatic check_all();
    for (int g = 0; g < NGROUPS; g++) begin
      rd_a = 2'(g); rd_b = 2'(3 - g);
      #1;
      chk(qp_a.scale, ms[g], $sformatf("scale %0d port a", g));
      chk(qp_a.zp, mz[g], $sformatf("zp %0d port a", g));
      chk(qp_b.scale, ms[3 - g], "scale port b");
      chk(qp_b.zp, mz[3 - g], "zp port b");
    end
  endtask

  initial begin
    for (int g = 0; g < NGROUPS; g++) begin ms[g] = 32'h0100_0000; mz[g] = 4'd0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_all();
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      we = 1; idx = 2'($urandom_range(0, 3)); fld = 1'($urandom); wdata = $urandom;
      if (fld) mz[idx] = wdata[3:0]; else ms[idx] = wdata;
      @(negedge clk); we = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
