// tb_softmax_unit: self-checking testbench for the row-wise Softmax.
//
// Sends rows of N random Q16.16 scores (spreads from tight to wide, with
// ties and a row of equal values) and compares each output with the exact
// softmax computed in real arithmetic: within 0.002 absolute plus 0.5 %
// relative. It also checks that the outputs keep the input order and
// addresses, that each row's outputs sum to 1 within 1 %, that inputs are
// spaced irregularly without effect, and the latency: first output N + 36
// cycles after the row's last input, then one output per cycle.
// Rows of 2 to 4 tiles are then run through the two-pass mode: the
// statistics pass must return the values unchanged (first output N + 3
// cycles after the last input), the normalising pass must match the softmax
// of the whole row within 0.002 + 1 %, and each row must sum to 1 within 2 %.
module tb_softmax_unit;
  import ahcq_pkg::*;

  localparam int N = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [FX_W-1:0] in_x = '0, out_y;
  logic [CH_W-1:0] in_dest = '0, out_dest;
  logic out_valid, busy;
  sm_pass_e pass = SM_ROW;

  softmax_unit #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 40; r++) begin
      automatic real xs [N], ex [N], s = 0.0, mx, tot = 0.0;
      automatic int spread = (r % 4 == 0) ? 65536 : (r % 4 == 1) ? 4 * 65536 : (r % 4 == 2) ? 16 * 65536 : 0;
      automatic logic signed [FX_W-1:0] xv [N];
      automatic logic [CH_W-1:0] dv [N];
      automatic int lat = 0;
      for (int i = 0; i < N; i++) begin
        xv[i] = FX_W'($signed($urandom_range(0, 2 * spread)) - spread + (r * 10000 - 200000));
        if (i == 3 && r % 3 == 0) xv[i] = xv[2];
        dv[i] = CH_W'($urandom);
        xs[i] = real'(xv[i]) / 65536.0;
      end
      mx = xs[0];
      for (int i = 1; i < N; i++) if (xs[i] > mx) mx = xs[i];
      for (int i = 0; i < N; i++) begin ex[i] = $exp(xs[i] - mx); s += ex[i]; end
      for (int i = 0; i < N; i++) begin
        if (r % 2 == 1 && i % 5 == 2) begin
          @(negedge clk);
          in_valid = 1'b0;
          @(negedge clk);
        end
        @(negedge clk);
        in_valid = 1'b1; in_x = xv[i]; in_dest = dv[i];
      end
      @(negedge clk);
      in_valid = 1'b0;
      check(busy, "busy after a full row");
      lat = 1;
      while (!out_valid && lat < 200) begin
        @(negedge clk);
        lat++;
      end
      check(lat == N + 36, $sformatf("first output %0d cycles after the last input, expected %0d", lat, N + 36));
      for (int i = 0; i < N; i++) begin
        automatic real got = real'(out_y) / 65536.0, rf = ex[i] / s, err;
        err = got - rf;
        if (err < 0) err = -err;
        check(out_valid, "one output per cycle");
        check(out_dest == dv[i], "address order");
        check(err <= 0.002 + 0.005 * rf, $sformatf("row %0d elem %0d got %f exp %f", r, i, got, rf));
        tot += got;
        @(negedge clk);
      end
      check(!out_valid, "exactly N outputs");
      check(tot > 0.99 && tot < 1.01, $sformatf("row sum %f", tot));
      check(!busy, "idle after the row");
    end

    // ---- rows of R tiles: statistics pass, then normalising pass ----
    for (int r = 0; r < 12; r++) begin
      automatic int R = 2 + r % 3;
      automatic logic signed [FX_W-1:0] xv [4][N];
      automatic real s = 0.0, mx = -1.0e30, tot = 0.0;
      for (int t = 0; t < R; t++)
        for (int i = 0; i < N; i++) begin
          // tiles with different offsets, so the running maximum moves up and down
          xv[t][i] = FX_W'($signed($urandom_range(0, 6 * 65536)) - 3 * 65536 +
                           ((t * 7 + r) % 3 - 1) * 2 * 65536);
          if (real'(xv[t][i]) / 65536.0 > mx) mx = real'(xv[t][i]) / 65536.0;
        end
      for (int t = 0; t < R; t++)
        for (int i = 0; i < N; i++) s += $exp(real'(xv[t][i]) / 65536.0 - mx);
      for (int ph = 0; ph < 2; ph++)
        for (int t = 0; t < R; t++) begin
          automatic int lat;
          pass = (ph == 1) ? SM_NORM : (t == 0) ? SM_STAT_FIRST : SM_STAT_NEXT;
          for (int i = 0; i < N; i++) begin
            @(negedge clk);
            in_valid = 1'b1; in_x = xv[t][i]; in_dest = CH_W'(t * N + i);
          end
          @(negedge clk);
          in_valid = 1'b0;
          lat = 1;
          while (!out_valid && lat < 200) begin
            @(negedge clk);
            lat++;
          end
          check(lat == ((ph == 0) ? N + 3 : N + 36), $sformatf("pass %0d latency %0d", ph, lat));
          for (int i = 0; i < N; i++) begin
            automatic real got = real'(out_y) / 65536.0;
            automatic real rf = $exp(real'(xv[t][i]) / 65536.0 - mx) / s, err = got - rf;
            if (err < 0) err = -err;
            check(out_valid && out_dest == CH_W'(t * N + i), "long row: order");
            if (ph == 0) check(out_y == xv[t][i], "statistics pass leaves values unchanged");
            else begin
              check(err <= 0.002 + 0.01 * rf,
                    $sformatf("long row %0d tile %0d elem %0d got %f exp %f", r, t, i, got, rf));
              tot += got;
            end
            @(negedge clk);
          end
        end
      check(tot > 0.98 && tot < 1.02, $sformatf("long row sum %f", tot));
      pass = SM_ROW;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
