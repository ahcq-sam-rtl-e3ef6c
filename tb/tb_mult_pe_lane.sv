// tb_mult_pe_lane: random reductions through one multiplier PE lane.
// Each reduction has a random number of beats with random operands and
// enables; the expected sum of enabled products is accumulated here and
// compared with acc when done pulses, one cycle after the last beat.
module tb_mult_pe_lane;
  import ahcq_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, first = 0, last = 0;
  logic signed [ABITS:0] a [PE_IN];
  logic signed [WBITS-1:0] w [PE_IN];
  logic [PE_IN-1:0] w_en;
  logic signed [MACC_W-1:0] acc;
  logic done;
  int checks = 0, failures = 0;

  mult_pe_lane dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < PE_IN; i++) begin a[i] = '0; w[i] = '0; end
    w_en = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      automatic int nb = $urandom_range(1, 40);
      automatic int exp = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        valid = 1; first = (b == 0); last = (b == nb - 1);
        w_en = 8'($urandom);
        for (int i = 0; i < PE_IN; i++) begin
          a[i] = 5'($urandom_range(0, 31));
          w[i] = 5'($urandom_range(0, 31));
          if (w_en[i]) exp += int'(a[i]) * int'(w[i]);
        end
      end
      @(negedge clk);
      valid = 0;
      checks++;
      if (!done || acc != MACC_W'(exp)) begin
        failures++;
        $display("FAIL reduction %0d: done=%0d acc=%0d expected %0d", r, done, acc, exp);
      end
      @(negedge clk);
      checks++;
      if (done) begin failures++; $display("FAIL done longer than one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
