// tb_ahcq_accel_top: end-to-end testbench of the accelerator.
//
// The testbench plays the host: it loads the IA buffer, the weight buffer,
// the per-channel weight scales, the channel-index (reorder) table and the
// LNQ table pages, writes the configuration registers, starts one tile and
// reads the output buffer back. A reference model written here from the
// quantizer equations (integer dot products per CAG group, fixed-point
// dequantization, activation, quantization) predicts every output word.
//
// Runs (each on fresh random data):
//   1. uniform activations with 3 CAG input groups, ReLU, Q16.16 output
//   2. the same tile again, quantized with 4 CAG output groups
//   3. HLUQ activations (n = 1), GELU, Q16.16 output
//   4. the same tile quantized with HLUQ (n = 2 for the next layer)
//   5. LNQ (score x Value with the dequantization table), Q16.16 output
//   6. the same tile quantized with the LNQ threshold table
//   7. HLUQ with n = 3 and no activation, Q16.16 output
//   8. attention scores (uniform, one group) through Softmax, Q16.16 output
//   9. the same tile, probabilities quantized with the LNQ thresholds
//  10. a Softmax row of two tiles: statistics pass over both tiles (values
//      unchanged), then the normalising pass (probabilities of the long row)
// Mechanisms counted, each must occur at least once: CAG parameter
// switches, HLUQ elements routed to the bit-shift lanes, elements routed
// to the multiplier lanes in HLUQ, LNQ table reads, reordered channels,
// each activation and each quantizer mode, HLUQ output codes from the log
// branch and from the uniform branch, and each CAG output group.
// Timing: the start-to-done cycle count must equal
// n_beats + 4 + LANES*groups + 7 (compute, wait, drain, pipeline), plus
// 2*LANES + 34 with Softmax (the row is collected, exponentiated, divided
// and sent out after the last drain read), 2*LANES + 1 in a Softmax
// statistics pass.
// Parameter L sets the number of lanes; NB the reduction length in beats.
// A wrapper runs it at the full default size.
module tb_ahcq_accel_top #(
  parameter int L  = 8,
  parameter int NB = 12
);
  import ahcq_pkg::*;

  localparam int IA_D = (L == 128) ? 1024 : 64;
  localparam int W_D  = (L == 128) ? 512 : 64;
  localparam int LP   = (L == 128) ? 100 : 4;
  localparam int IA_AW = $clog2(IA_D);
  localparam int W_AW  = $clog2(W_D);
  localparam int PW    = $clog2(LP);
  localparam int WW    = L * PE_IN * WBITS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done;
  logic cfg_we = 1'b0; logic [7:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic ia_we = 1'b0; logic [IA_AW-1:0] ia_waddr = '0; logic [PE_IN*ABITS-1:0] ia_wdata = '0;
  logic w_we = 1'b0;  logic [W_AW-1:0] w_waddr = '0;   logic [WW-1:0] w_wdata = '0;
  logic ws_we = 1'b0; logic [CH_W-1:0] ws_waddr = '0;  logic [SCALE_W-1:0] ws_wdata = '0;
  logic perm_we = 1'b0; logic [CH_W-1:0] perm_addr = '0, perm_data = '0;
  logic lut_we = 1'b0; logic [PW-1:0] lut_wpage = '0; logic [LUT_AW-1:0] lut_waddr = '0;
  logic [LUT_W-1:0] lut_wdata = '0;
  logic out_re = 1'b0; logic [CH_W-1:0] out_raddr = '0; logic [31:0] out_rdata;
  logic ev_grp_switch, ev_lut_read, ev_q_log;
  logic [PE_IN-1:0] ev_log_elems;

  if (L == 128) begin : g_full
    ahcq_accel_top dut (.*);
  end else begin : g_small
    ahcq_accel_top #(.LANES(L), .IA_DEPTH(IA_D), .W_DEPTH(W_D), .LUT_PAGES(LP)) dut (.*);
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_grp_switch = 0, n_log_elems = 0, n_lut_reads = 0, n_q_log = 0;
  int n_hluq_mul = 0, n_reordered = 0, n_q_uni_branch = 0;
  int n_act [4], n_qmode [4], n_outgrp [4];

  always @(posedge clk) begin
    if (ev_grp_switch) n_grp_switch++;
    n_log_elems += $countones(ev_log_elems);
    if (ev_lut_read) n_lut_reads++;
    if (ev_q_log) n_q_log++;
  end

  initial begin
    repeat (400000) @(posedge clk);
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

  // ---------------- host side ----------------
  int  ia   [NB][PE_IN];
  int  wt   [NB][L][PE_IN];
  longint sw [L];
  int  dest [L];
  int  lut  [LP][1024];
  int  grp_beats [4];
  int  zp_in [4];
  longint sc_in [4];
  longint inv_out [4];
  int  zp_out [4];
  int  bound [3];
  int  thr [15];
  longint y_fx [L];   // Q_FX results of the previous run, by lane
  longint s1, s2;     // HLUQ dequantization scales of the current data
  int sm_pass_g = 0;  // Softmax pass written with each tile
  int sm_dup = 1;     // the row is this many copies of the tile (two-pass Softmax)
  int n_sm_long = 0;

  task automatic cfg_wr(input int a, input longint d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = 8'(a); cfg_wdata = 32'(d);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic load_data(input int mode, input int tile_base, input bit lnq_pos);
    // activations and weights
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      ia_we = 1'b1; ia_waddr = IA_AW'(b);
      for (int i = 0; i < PE_IN; i++) begin
        ia[b][i] = $urandom_range(0, 15);
        ia_wdata[i*ABITS +: ABITS] = ABITS'(ia[b][i]);
      end
      w_we = 1'b1; w_waddr = W_AW'(b);
      for (int l = 0; l < L; l++)
        for (int i = 0; i < PE_IN; i++) begin
          wt[b][l][i] = lnq_pos ? $urandom_range(0, 7) : $urandom_range(0, 30) - 15;
          w_wdata[(l*PE_IN + i)*WBITS +: WBITS] = WBITS'(wt[b][l][i]);
        end
    end
    @(negedge clk);
    ia_we = 1'b0; w_we = 1'b0;
    // weight scales (0.02 .. 0.5) and a random reorder of the tile's channels
    for (int l = 0; l < L; l++) dest[l] = tile_base + l;
    for (int l = L - 1; l > 0; l--) begin
      automatic int j = $urandom_range(0, l);
      automatic int t = dest[l];
      dest[l] = dest[j]; dest[j] = t;
    end
    for (int l = 0; l < L; l++) begin
      @(negedge clk);
      sw[l] = longint'($urandom_range(335544, 8388608));
      ws_we = 1'b1; ws_waddr = CH_W'(tile_base + l); ws_wdata = 32'(sw[l]);
      perm_we = 1'b1; perm_addr = CH_W'(tile_base + l); perm_data = CH_W'(dest[l]);
      if (dest[l] != tile_base + l) n_reordered++;
    end
    @(negedge clk);
    ws_we = 1'b0; perm_we = 1'b0;
  endtask

  // fixed-point reference of one output channel (Q16.16 after dequantization)
  function automatic longint ref_dequant(input int mode, input int lane, input int ngrp,
                                         input int nlbl, input longint s1, input longint s2,
                                         input int page);
    longint sum = 0, mul, sh, yw;
    int b0 = 0;
    if (mode == 0) begin
      for (int g = 0; g < ngrp; g++) begin
        mul = 0;
        for (int b = b0; b < ((ngrp == 1) ? NB : b0 + grp_beats[g]); b++)
          for (int i = 0; i < PE_IN; i++) mul += longint'(ia[b][i] - zp_in[g]) * wt[b][lane][i];
        b0 += grp_beats[g];
        sum += (mul * sc_in[g]) >>> 8;
      end
    end else if (mode == 1) begin
      mul = 0; sh = 0;
      for (int b = 0; b < NB; b++)
        for (int i = 0; i < PE_IN; i++) begin
          if (ia[b][i] < (1 << (4 - nlbl))) sh += (longint'(wt[b][lane][i]) <<< 16) >>> ia[b][i];
          else begin
            mul += longint'(ia[b][i]) * wt[b][lane][i];
            sh  += longint'(wt[b][lane][i]) <<< 16;
          end
        end
      sum = ((mul * s2) >>> 8) + ((sh * s1) >>> 24);
    end else begin
      mul = 0;
      for (int b = 0; b < NB; b++)
        for (int i = 0; i < PE_IN; i++) mul += longint'(ia[b][i] - zp_in[0]) * wt[b][lane][i];
      sum = lut[page][(mul < 0) ? 0 : (mul > 1023) ? 1023 : mul];
    end
    yw = (sum * sw[lane]) >>> 24;
    if (yw > 64'sd2147483647) yw = 64'sd2147483647;
    if (yw < -64'sd2147483648) yw = -64'sd2147483648;
    return yw;
  endfunction

  function automatic real plan(input real t);
    real a, s;
    a = (t < 0.0) ? -t : t;
    if (a >= 5.0)        s = 1.0;
    else if (a >= 2.375) s = a / 32.0 + 0.84375;
    else if (a >= 1.0)   s = a / 8.0 + 0.625;
    else                 s = a / 4.0 + 0.5;
    return (t < 0.0) ? 1.0 - s : s;
  endfunction

  function automatic int clampi(input longint v, input int lo, input int hi);
    return (v < lo) ? lo : (v > hi) ? hi : int'(v);
  endfunction

  // start a tile and measure start-to-done cycles
  task automatic run_tile(input int ngrp_used, input bit sm);
    int cyc = 0, exp_cyc = NB + 4 + L * ngrp_used + 7 +
                           (!sm ? 0 : (sm_pass_g == 1 || sm_pass_g == 2) ? 2 * L + 1 : 2 * L + 34);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == exp_cyc, $sformatf("start-to-done %0d cycles, expected %0d", cyc, exp_cyc));
  endtask

  task automatic read_out(input int lane, output logic [31:0] v);
    @(negedge clk);
    out_re = 1'b1; out_raddr = CH_W'(dest[lane]);
    @(negedge clk);
    out_re = 1'b0;
    v = out_rdata;
  endtask

  // one tile: configure, run, compare with the reference
  // qm: 0 FX, 1 uniform, 2 HLUQ, 3 LNQ;  act: 0 none, 1 relu, 2 gelu
  task automatic tile(input int mode, input int act, input int qm, input int ngrp,
                      input int nlbl, input int nlbl_out, input bit reuse, input int tile_base);
    longint qs1 = 0;
    int page = 0;
    if (!reuse) load_data(mode, tile_base, mode == 2);
    cfg_wr('h00, mode);
    cfg_wr('h01, NB);
    cfg_wr('h02, (mode == 0) ? ngrp : 1);
    cfg_wr('h03, nlbl);
    cfg_wr('h18, nlbl_out);
    cfg_wr('h04, 0);
    cfg_wr('h05, 0);
    cfg_wr('h06, tile_base);
    cfg_wr('h07, act);
    cfg_wr('h1A, sm_pass_g);
    cfg_wr('h08, qm);
    if (!reuse) begin
      s1 = longint'($urandom_range(1 << 21, 1 << 23));   // 0.125 .. 0.5
      s2 = longint'($urandom_range(1 << 19, 1 << 21));   // 0.03 .. 0.125
    end
    cfg_wr('h0A, s1);
    cfg_wr('h0B, s2);
    page = (LP > 1) ? 1 : 0;
    cfg_wr('h09, page);
    if (mode == 0) begin
      // input CAG groups: beats per group, scale and zero point of each
      for (int g = 0; g < 4; g++) grp_beats[g] = 0;
      grp_beats[0] = NB / 4; grp_beats[1] = NB / 3; grp_beats[2] = NB - NB / 4 - NB / 3;
      for (int g = 0; g < 4; g++) begin
        cfg_wr('h10 + g, grp_beats[g]);
        if (!reuse) begin
          sc_in[g] = longint'($urandom_range(1 << 18, 1 << 21));
          zp_in[g] = $urandom_range(0, 15);
        end
        cfg_wr('h40 + g, sc_in[g]);
        cfg_wr('h44 + g, zp_in[g]);
      end
    end else begin
      zp_in[0] = 0;
      cfg_wr('h44, 0);
    end
    if (mode == 2 && !reuse) begin
      // LNQ dequantization table, page 'page': an increasing curve
      for (int a = 0; a < 1024; a++) begin
        @(negedge clk);
        lut[page][a] = (a * a * 3) - 200000 + a * 50;
        lut_we = 1'b1; lut_wpage = PW'(page); lut_waddr = LUT_AW'(a); lut_wdata = 32'(lut[page][a]);
      end
      @(negedge clk);
      lut_we = 1'b0;
    end
    // output quantizer parameters, chosen from the previous Q_FX results
    if (qm != 0) begin
      longint mx = 1;
      for (int l = 0; l < L; l++) mx = ((y_fx[l] < 0 ? -y_fx[l] : y_fx[l]) > mx) ?
                                         (y_fx[l] < 0 ? -y_fx[l] : y_fx[l]) : mx;
      if (qm == 1) begin
        bound[0] = tile_base + L / 4; bound[1] = tile_base + L / 2; bound[2] = tile_base + 3 * L / 4;
        for (int k = 0; k < 3; k++) cfg_wr('h14 + k, bound[k]);
        cfg_wr('h17, 4);
        for (int g = 0; g < 4; g++) begin
          inv_out[g] = (longint'(16 + g) <<< 32) / (2 * mx);   // about 16/(2 max|y|)
          zp_out[g]  = 4 + g;
          cfg_wr('h48 + g, inv_out[g]);
          cfg_wr('h4C + g, zp_out[g]);
        end
      end else if (qm == 2) begin
        // s1 at about a quarter of the range, s2 so that the uniform codes cover the rest
        qs1 = (mx <<< 8) / 4 + 1;
        cfg_wr('h19, qs1);
        cfg_wr('h0C, (longint'(1) <<< 40) / qs1);
        cfg_wr('h0D, (longint'(16) <<< 32) / (mx + 1));
      end else begin
        for (int k = 0; k < 15; k++) begin
          thr[k] = int'(-mx + (2 * mx * (k + 1)) / 16);
          cfg_wr('h20 + k, thr[k]);
        end
      end
    end
    run_tile((mode == 0) ? ngrp : 1, act == 3);
    n_act[act]++;
    n_qmode[qm]++;
    for (int l = 0; l < L; l++) begin
      logic [31:0] v;
      longint e;
      real xr, got, rf, tol;
      read_out(l, v);
      if (qm == 0 && act == 3) begin
        // softmax over the tile's lanes, in real arithmetic
        real ssum = 0.0, mxr = -1.0e30, ev;
        for (int k = 0; k < L; k++) begin
          xr = real'(ref_dequant(mode, k, ngrp, nlbl, s1, s2, page)) / 65536.0;
          if (xr > mxr) mxr = xr;
        end
        for (int k = 0; k < L; k++)
          ssum += $exp(real'(ref_dequant(mode, k, ngrp, nlbl, s1, s2, page)) / 65536.0 - mxr);
        ev  = $exp(real'(ref_dequant(mode, l, ngrp, nlbl, s1, s2, page)) / 65536.0 - mxr) / ssum;
        ev  = ev / real'(sm_dup);
        got = real'($signed(v)) / 65536.0;
        if (sm_pass_g == 1 || sm_pass_g == 2)
          check($signed(v) == int'(ref_dequant(mode, l, ngrp, nlbl, s1, s2, page)),
                $sformatf("lane %0d softmax statistics pass changed the value", l));
        else
          check((got - ev) <= 0.002 + 0.01 * ev && (ev - got) <= 0.002 + 0.01 * ev,
                $sformatf("lane %0d softmax got %f exp %f", l, got, ev));
        if (sm_pass_g == 3 && l == 0) n_sm_long++;
        y_fx[l] = longint'($signed(v));
      end else if (qm == 0) begin
        e = ref_dequant(mode, l, ngrp, nlbl, s1, s2, page);
        if (act == 1 && e < 0) e = 0;
        if (act == 2) begin
          xr  = real'(e) / 65536.0;
          rf  = xr * plan(1.702 * xr);
          got = real'($signed(v)) / 65536.0;
          tol = 4.0 / 65536.0 + ((xr < 0) ? -xr : xr) * 0.0005;
          check((got - rf) <= tol && (rf - got) <= tol,
                $sformatf("lane %0d gelu got %f exp %f", l, got, rf));
        end else begin
          check($signed(v) == int'(e), $sformatf("mode %0d lane %0d got %0d exp %0d",
                                                  mode, l, $signed(v), e));
        end
        y_fx[l] = longint'($signed(v));
      end else begin
        int q = 0;
        bit ok = 1'b0;
        longint y = y_fx[l];
        if (qm == 1) begin
          int g = 0;
          for (int k = 0; k < 3; k++) if (dest[l] >= bound[k]) g = k + 1;
          n_outgrp[g]++;
          q = clampi(((y * inv_out[g] + (longint'(1) <<< 31)) >>> 32) + zp_out[g], 0, 15);
        end else if (qm == 2) begin
          int nlog = 1 << (4 - nlbl_out);
          if ((y <<< 8) <= qs1) begin
            if (y <= 0) q = nlog - 1;
            else begin
              real e2;
              e2 = -$ln(real'(y) * real'((longint'(1) <<< 40) / qs1) / 4294967296.0) / $ln(2.0);
              q = clampi(longint'($floor(e2 + 0.5)), 0, nlog - 1);
              if ((e2 + 0.5 - $floor(e2 + 0.5)) < 1e-4 || ($ceil(e2 + 0.5) - (e2 + 0.5)) < 1e-4)
                ok = (int'(v) == clampi(q - 1, 0, nlog - 1)) || (int'(v) == clampi(q + 1, 0, nlog - 1));
            end
          end else begin
            q = clampi((((y <<< 8) - qs1) * ((longint'(16) <<< 32) / (y_fx_max() + 1))
                        + (longint'(1) <<< 39)) >>> 40, nlog, 15);
            n_q_uni_branch++;
          end
        end else begin
          for (int k = 0; k < 15; k++) if (y >= thr[k]) q = k + 1;
        end
        check(ok || v == 32'(q), $sformatf("qmode %0d lane %0d y=%0d got %0d exp %0d",
                                           qm, l, y, v, q));
      end
    end
  endtask

  function automatic longint y_fx_max();
    longint mx = 1;
    for (int l = 0; l < L; l++) mx = ((y_fx[l] < 0 ? -y_fx[l] : y_fx[l]) > mx) ?
                                       (y_fx[l] < 0 ? -y_fx[l] : y_fx[l]) : mx;
    return mx;
  endfunction

  initial begin
    int log0;
    foreach (n_act[i]) n_act[i] = 0;
    foreach (n_qmode[i]) n_qmode[i] = 0;
    foreach (n_outgrp[i]) n_outgrp[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    tile(0, 1, 0, 3, 1, 1, 1'b0, 0);         // CAG uniform, ReLU, Q16.16
    tile(0, 1, 1, 3, 1, 1, 1'b1, 0);         // same tile, CAG output quantization
    tile(1, 2, 0, 1, 1, 1, 1'b0, 3 * L);     // HLUQ n=1, GELU, Q16.16
    log0 = n_log_elems;
    tile(1, 2, 2, 1, 1, 2, 1'b1, 3 * L);     // same tile, HLUQ output (n=2)
    tile(2, 0, 0, 1, 1, 1, 1'b0, 5 * L);     // LNQ with the table, Q16.16
    tile(2, 0, 3, 1, 1, 1, 1'b1, 5 * L);     // same tile, LNQ thresholds
    tile(1, 0, 0, 1, 3, 3, 1'b0, 7 * L);     // HLUQ n=3, no activation
    tile(0, 3, 0, 1, 1, 1, 1'b0, 9 * L);     // attention scores: Softmax, Q16.16
    tile(0, 3, 3, 1, 1, 1, 1'b1, 9 * L);     // same tile, LNQ thresholds on the probabilities
    // a Softmax row of two tiles (the same scores twice): statistics, then normalise
    sm_pass_g = 1;
    tile(0, 3, 0, 1, 1, 1, 1'b0, 11 * L);
    sm_pass_g = 2;
    tile(0, 3, 0, 1, 1, 1, 1'b1, 11 * L);
    sm_pass_g = 3; sm_dup = 2;
    tile(0, 3, 0, 1, 1, 1, 1'b1, 11 * L);
    sm_pass_g = 0; sm_dup = 1;

    // multiplier-lane elements in HLUQ runs: all HLUQ elements minus the log ones
    n_hluq_mul = 3 * NB * PE_IN - n_log_elems;
    $display("grp_switch=%0d log_elems=%0d hluq_mul_elems=%0d lut_reads=%0d q_log=%0d q_uniform_branch=%0d reordered=%0d",
             n_grp_switch, n_log_elems, n_hluq_mul, n_lut_reads, n_q_log, n_q_uni_branch, n_reordered);
    $display("act none/relu/gelu/softmax=%0d/%0d/%0d/%0d  qmode fx/uni/hluq/lnq=%0d/%0d/%0d/%0d  outgrp=%0d/%0d/%0d/%0d",
             n_act[0], n_act[1], n_act[2], n_act[3], n_qmode[0], n_qmode[1], n_qmode[2], n_qmode[3],
             n_outgrp[0], n_outgrp[1], n_outgrp[2], n_outgrp[3]);
    check(n_grp_switch > 0, "CAG parameter switch never happened");
    check(n_log_elems > 0, "no element routed to the bit-shift lanes");
    check(n_hluq_mul > 0, "no HLUQ element routed to the multiplier lanes");
    check(n_lut_reads > 0, "LNQ table never read");
    check(n_q_log > 0, "HLUQ log-branch output code never produced");
    check(n_q_uni_branch > 0, "HLUQ uniform-branch output code never produced");
    check(n_reordered > 0, "no channel reordered");
    check(n_sm_long > 0, "two-pass Softmax over a multi-tile row never ran");
    foreach (n_act[i]) check(n_act[i] > 0, $sformatf("activation mode %0d never used", i));
    foreach (n_qmode[i]) check(n_qmode[i] > 0, $sformatf("quantizer mode %0d never used", i));
    foreach (n_outgrp[i]) check(n_outgrp[i] > 0, $sformatf("output group %0d never used", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
