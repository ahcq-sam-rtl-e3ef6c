// tb_shift_pe_lane: random reductions through one bit-shift PE lane.
// The expected value sum(w * 2^-sh) is formed here in fixed point with 16
// fractional bits (w * 2^16 / 2^sh, exact for shifts up to 15 and an arithmetic
// right shift for negative weights) and compared with acc.
module tb_shift_pe_lane;
  import ahcq_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, first = 0, last = 0;
  logic [ABITS-1:0] sh [PE_IN];
  logic signed [WBITS-1:0] w [PE_IN];
  logic [PE_IN-1:0] w_en;
  logic signed [SACC_W-1:0] acc;
  logic done;
  int checks = 0, failures = 0;

  shift_pe_lane dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < PE_IN; i++) begin sh[i] = '0; w[i] = '0; end
    w_en = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      automatic int nb = $urandom_range(1, 40);
      automatic longint exp = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        valid = 1; first = (b == 0); last = (b == nb - 1);
        w_en = 8'($urandom);
        for (int i = 0; i < PE_IN; i++) begin
          sh[i] = 4'($urandom_range(0, 15));
          w[i]  = 5'($urandom_range(0, 31));
          if (w_en[i]) exp += (longint'(w[i]) * 65536) >>> sh[i];
        end
      end
      @(negedge clk);
      valid = 0;
      checks++;
      if (!done || acc != SACC_W'(exp)) begin
        failures++;
        $display("FAIL reduction %0d: acc=%0d expected %0d", r, acc, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
