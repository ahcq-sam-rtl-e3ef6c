// tb_act_unit: self-checking testbench for the activation stage.
//
// Drives random Q16.16 values through ACT_NONE, ACT_RELU and ACT_GELU and
// compares each output with a reference computed in real arithmetic:
// identity, max(x,0), and x * sigmoid(1.702 x) with the same piecewise-linear
// (PLAN) sigmoid the unit uses. GELU is allowed a small tolerance for the
// truncations of the fixed-point path. It also checks that GELU stays within
// 0.03*|x| + 0.01 of the exact x*sigmoid(1.702x), that the stage has one
// cycle of latency (out_valid and out_dest follow in_valid by one clock) and
// that out_valid is low after reset.
module tb_act_unit;
  import ahcq_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  act_mode_e mode;
  logic in_valid;
  logic signed [FX_W-1:0] in_x, out_y;
  logic [CH_W-1:0] in_dest, out_dest;
  logic out_valid;
  int checks = 0, failures = 0;

  act_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real plan(input real t);
    real a, s;
    a = (t < 0.0) ? -t : t;
    if (a >= 5.0)        s = 1.0;
    else if (a >= 2.375) s = a / 32.0 + 0.84375;
    else if (a >= 1.0)   s = a / 8.0 + 0.625;
    else                 s = a / 4.0 + 0.5;
    return (t < 0.0) ? 1.0 - s : s;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    mode = ACT_NONE; in_valid = 1'b0; in_x = '0; in_dest = '0;
    repeat (3) @(posedge clk);
    #1 check(out_valid == 1'b0, "out_valid after reset");
    rst_n = 1'b1;
    for (int m = 0; m < 3; m++) begin
      for (int i = 0; i < 400; i++) begin
        automatic real xr, ref_y, got, tol, exact;
        automatic logic signed [FX_W-1:0] x;
        automatic logic [CH_W-1:0] d = CH_W'($urandom);
        // values from -16 to +16, with some small ones
        x = (i % 4 == 0) ? FX_W'($signed($urandom_range(0, 131072)) - 65536)
                         : FX_W'($signed($urandom_range(0, 2097152)) - 1048576);
        @(negedge clk);
        mode = act_mode_e'(m); in_valid = 1'b1; in_x = x; in_dest = d;
        @(posedge clk); #1;
        in_valid = 1'b0;
        check(out_valid && out_dest == d, "valid/dest after one cycle");
        xr  = real'(x) / 65536.0;
        got = real'(out_y) / 65536.0;
        case (m)
          0: check(out_y == x, "identity");
          1: check(out_y == ((x < 0) ? 0 : x), "relu");
          default: begin
            ref_y = xr * plan(1.702 * xr);
            tol = 4.0 / 65536.0 + ((xr < 0) ? -xr : xr) * 0.0005;
            check((got - ref_y) <= tol && (ref_y - got) <= tol, "gelu vs PLAN reference");
            exact = xr / (1.0 + $exp(-1.702 * xr));
            check((got - exact) <= 0.03 * ((xr < 0) ? -xr : xr) + 0.01 &&
                  (exact - got) <= 0.03 * ((xr < 0) ? -xr : xr) + 0.01, "gelu vs exact");
            if (failures > 0 && failures < 4)
              $display("  x=%f got=%f ref=%f exact=%f", xr, got, ref_y, exact);
          end
        endcase
        @(posedge clk); #1;
        check(!out_valid, "valid is a single pulse");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
