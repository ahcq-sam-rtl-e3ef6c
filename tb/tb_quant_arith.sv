// tb_quant_arith: self-checking testbench for the quantization arithmetic.
//
// The testbench plays the parameter bank: it holds four (reciprocal scale,
// zero point) pairs and feeds back the one the unit selects with g_sel. Random
// values are quantized in all four modes and compared with a reference in
// real arithmetic:
//   Q_FX      : value passed unchanged
//   Q_UNIFORM : group chosen from the destination address and the group
//               boundaries, q = clamp(floor(y*inv + 0.5) + z, 0, 15)
//   Q_HLUQ    : y <= s1 -> log code round(-log2(y*inv_s1)) in 0..2^(4-n)-1,
//               y  > s1 -> uniform code round((y-s1)*inv_s2) in 2^(4-n)..15,
//               for n = 1, 2, 3; the log flag is checked too
//   Q_LNQ     : number of the 15 ascending thresholds that y reaches
// A log code that lies within 1e-4 of a rounding boundary may be off by one
// (the hardware compares with a 16-bit sqrt(2)). The one-cycle latency is
// checked on every sample.
module tb_quant_arith;
  import ahcq_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  q_mode_e mode;
  logic [1:0] label_bits;
  logic [SCALE_W-1:0] s1, inv_s1, inv_s2;
  logic [2:0] n_groups;
  logic [2:0][CH_W-1:0] bound;
  logic [1:0] g_sel;
  qparam_t qp;
  logic [NCODES-2:0][FX_W-1:0] thr;
  logic in_valid;
  logic signed [FX_W-1:0] in_y;
  logic [CH_W-1:0] in_dest, out_dest;
  logic out_valid, out_is_log;
  logic [31:0] out_data;
  qparam_t bank [NGROUPS];
  int checks = 0, failures = 0;
  int cnt_log = 0, cnt_uni = 0, cnt_grp [NGROUPS];

  assign qp = bank[g_sel];

  quant_arith dut (.*);

  always #5 clk = ~clk;

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
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic int clampi(input int v, input int lo, input int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  // drive one value, wait for the registered result
  task automatic apply(input logic signed [FX_W-1:0] y, input logic [CH_W-1:0] d);
    @(negedge clk);
    in_valid = 1'b1; in_y = y; in_dest = d;
    #1;
    @(posedge clk); #1;
    in_valid = 1'b0;
    check(out_valid && out_dest == d, "valid/dest after one cycle");
  endtask

  initial begin
    foreach (cnt_grp[i]) cnt_grp[i] = 0;
    mode = Q_FX; label_bits = 2'd1; s1 = '0; inv_s1 = '0; inv_s2 = '0;
    n_groups = 3'd1; bound = '0; thr = '0; in_valid = 1'b0; in_y = '0; in_dest = '0;
    foreach (bank[i]) bank[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- Q_FX ----
    mode = Q_FX;
    for (int i = 0; i < 50; i++) begin
      automatic logic signed [FX_W-1:0] y = FX_W'($urandom);
      apply(y, CH_W'(i));
      check(out_data == 32'(y), "fx pass-through");
    end

    // ---- Q_UNIFORM with CAG output groups ----
    mode = Q_UNIFORM;
    for (int t = 0; t < 20; t++) begin
      n_groups = 3'($urandom_range(1, 4));
      bound[0] = CH_W'($urandom_range(100, 999));
      bound[1] = bound[0] + CH_W'($urandom_range(1, 999));
      bound[2] = bound[1] + CH_W'($urandom_range(1, 999));
      foreach (bank[g]) begin
        bank[g].scale = 32'($urandom_range(4096, 1 << 20));   // 1/s from 1/16 to 16
        bank[g].zp    = 4'($urandom_range(0, 15));
      end
      for (int i = 0; i < 50; i++) begin
        automatic logic signed [FX_W-1:0] y = FX_W'($signed($urandom_range(0, 1 << 21)) - (1 << 20));
        automatic logic [CH_W-1:0] d = CH_W'($urandom_range(0, 3500));
        automatic int g = 0, q;
        automatic real v;
        for (int k = 0; k < 3; k++) if (k + 1 < int'(n_groups) && d >= bound[k]) g = k + 1;
        apply(y, d);
        cnt_grp[g]++;
        v = real'(y) * real'(bank[g].scale) / 4294967296.0;
        q = clampi(int'($floor(v + 0.5)) + int'(bank[g].zp), 0, 15);
        check(out_data == 32'(q), $sformatf("uniform y=%0d g=%0d got %0d exp %0d", y, g, out_data, q));
      end
    end

    // ---- Q_HLUQ, n = 1..3 ----
    mode = Q_HLUQ;
    for (int t = 0; t < 30; t++) begin
      automatic real s1r, s2r;
      automatic int nlog;
      label_bits = 2'(1 + t % 3);
      nlog = 1 << (4 - int'(label_bits));
      s1r = 0.25 + real'($urandom_range(0, 1000)) / 250.0;   // 0.25 .. 4.25
      s2r = 0.01 + real'($urandom_range(0, 1000)) / 2000.0;  // 0.01 .. 0.51
      s1 = 32'($rtoi(s1r * 16777216.0));
      inv_s1 = 32'($rtoi(65536.0 / s1r));
      inv_s2 = 32'($rtoi(65536.0 / s2r));
      s1r = real'(s1) / 16777216.0;
      for (int i = 0; i < 60; i++) begin
        automatic logic signed [FX_W-1:0] y;
        automatic real yr, r, e;
        automatic int q;
        automatic bit lg, ok;
        if (i % 2 == 0) y = FX_W'($rtoi(s1r * 65536.0 * real'($urandom_range(0, 10000)) / 10000.0));
        else            y = FX_W'($signed($urandom_range(0, 1 << 20)) - (1 << 18));
        if (i == 1) y = '0;
        if (i == 3) y = -FX_W'(1000);
        yr = real'(y) / 65536.0;
        lg = (yr <= s1r);
        apply(y, '0);
        if (lg) begin
          cnt_log++;
          ok = 1'b0;
          if (y <= 0) q = nlog - 1;
          else begin
            r = real'(y) * real'(inv_s1) / 4294967296.0;
            e = -$ln(r) / $ln(2.0);
            q = clampi(int'($floor(e + 0.5)), 0, nlog - 1);
            if ((e + 0.5 - $floor(e + 0.5)) < 1e-4 || ($ceil(e + 0.5) - (e + 0.5)) < 1e-4)
              ok = (int'(out_data) == clampi(q - 1, 0, nlog - 1)) ||
                   (int'(out_data) == clampi(q + 1, 0, nlog - 1));
          end
        end else begin
          cnt_uni++;
          q = clampi(int'($floor((real'(y) * 256.0 - real'(s1)) * real'(inv_s2) / 1099511627776.0 + 0.5)),
                     nlog, 15);
          ok = 1'b0;
        end
        check(ok || out_data == 32'(q),
              $sformatf("hluq n=%0d y=%0d got %0d exp %0d", label_bits, y, out_data, q));
        check(out_is_log == lg, "hluq log flag");
        check(lg ? (out_data < 32'(nlog)) : (out_data >= 32'(nlog)), "hluq code range / MSB label");
      end
    end

    // ---- Q_LNQ thresholds ----
    mode = Q_LNQ;
    for (int t = 0; t < 10; t++) begin
      automatic int base = $signed($urandom_range(0, 1 << 18)) - (1 << 17);
      for (int k = 0; k < 15; k++) begin
        base += $urandom_range(1, 20000);
        thr[k] = FX_W'(base);
      end
      for (int i = 0; i < 50; i++) begin
        automatic logic signed [FX_W-1:0] y;
        automatic int q = 0;
        y = (i < 15) ? signed'(thr[i]) : FX_W'(int'(thr[0]) - 40000 + int'($urandom_range(0, 400000)));
        for (int k = 0; k < 15; k++) if (y >= signed'(thr[k])) q = k + 1;
        apply(y, '0);
        check(out_data == 32'(q), $sformatf("lnq got %0d exp %0d", out_data, q));
      end
    end

    check(cnt_log > 0 && cnt_uni > 0, "both HLUQ branches exercised");
    foreach (cnt_grp[g]) check(cnt_grp[g] > 0, "every output group exercised");
    $display("hluq log=%0d uniform=%0d groups=%0d/%0d/%0d/%0d", cnt_log, cnt_uni,
             cnt_grp[0], cnt_grp[1], cnt_grp[2], cnt_grp[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
