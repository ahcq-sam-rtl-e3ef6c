// tb_msb_router: checks the MSB-label routing of activation codes.
// For every mode, every label width n = 1..3, several zero points and random
// code vectors, the expected routing is computed here from the rule "top n
// bits all zero -> power-of-two code" and compared with the router's outputs.
module tb_msb_router;
  import ahcq_pkg::*;
  mm_mode_e mode;
  logic [1:0] label_bits;
  logic [ZP_W-1:0] azp;
  logic [PE_IN-1:0][ABITS-1:0] code;
  logic signed [ABITS:0] mul_a [PE_IN];
  logic [ABITS-1:0] sh_amt [PE_IN];
  logic [PE_IN-1:0] to_mul, to_shift;
  int checks = 0, failures = 0;

  msb_router dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int got, exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int m = 0; m < 3; m++) for (int n = 1; n <= 3; n++) for (int t = 0; t < 40; t++) begin
      mode = mm_mode_e'(m); label_bits = 2'(n); azp = 4'($urandom_range(0, 15));
      for (int i = 0; i < PE_IN; i++) code[i] = 4'($urandom_range(0, 15));
      #1;
      for (int i = 0; i < PE_IN; i++) begin
        automatic int c = int'(code[i]);
        automatic bit is_log = (c < (16 >> n));
        if (m == 1) begin
          chk(int'(to_shift[i]), 1, "hluq to_shift");
          chk(int'(to_mul[i]), is_log ? 0 : 1, $sformatf("hluq to_mul code=%0d n=%0d", c, n));
          chk(int'(mul_a[i]), is_log ? 0 : c, "hluq mul_a");
          chk(int'(sh_amt[i]), is_log ? c : 0, "hluq sh_amt");
        end else begin
          chk(int'(to_mul[i]), 1, "uniform to_mul");
          chk(int'(to_shift[i]), 0, "uniform to_shift");
          chk(int'(mul_a[i]), c - int'(azp), "uniform operand");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
