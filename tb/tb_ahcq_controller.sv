// tb_ahcq_controller: self-checking testbench for the configuration
// registers and the tile sequencer.
//
// The testbench stands in for the rest of the accelerator: the PE array's
// done flag follows a group's last beat by one cycle, and a result is
// written back six cycles after each channel's last drain read (one cycle
// in the reorder buffer, five in the quantization processor), as in the top
// level. It checks
//   - reset values and every configuration register field,
//   - COMPUTE: one IA/weight read per cycle at base + beat, n_beats reads,
//   - the beat tags: first/last/group per CAG group (counter-based parameter
//     switching), the group-switch strobe, one capture per group with the
//     right row number,
//   - DRAIN: LANES x groups reads, lane-major, with first/last flags and the
//     weight-scale address tile_base + lane,
//   - done: a single pulse, busy until then, and a start-to-done time of
//     n_beats + 4 + LANES*groups + 7 cycles,
// for all three matmul modes and 1..4 input groups (HLUQ and LNQ use one).
module tb_ahcq_controller;
  import ahcq_pkg::*;

  localparam int L  = 8;
  localparam int LW = $clog2(L);

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0; logic [7:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  cfg_t cfg;
  logic [2:0][CH_W-1:0] out_bound;
  logic [NCODES-2:0][FX_W-1:0] thr;
  logic start = 1'b0, busy, done;
  logic ia_re, w_re;
  logic [15:0] ia_raddr, w_raddr;
  logic core_valid, core_first, core_last;
  logic [1:0] core_g;
  logic core_done;
  logic cap_valid;
  logic [1:0] cap_g;
  logic rd_en, rd_first, rd_last;
  logic [LW-1:0] rd_lane;
  logic [1:0] rd_g;
  logic ws_re;
  logic [CH_W-1:0] ws_raddr;
  logic res_valid;
  logic grp_switch;

  ahcq_controller #(.LANES(L)) dut (.*);

  always #5 clk = ~clk;

  // stand-ins for the PE array and the result pipeline
  logic [5:0] res_pipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      core_done <= 1'b0;
      res_pipe  <= '0;
    end else begin
      core_done <= core_valid && core_last;
      res_pipe  <= {res_pipe[4:0], rd_en && rd_last};
    end
  end
  assign res_valid = res_pipe[5];

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
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

  task automatic wr(input int a, input int d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = 8'(a); cfg_wdata = 32'(d);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // ---------- one tile with a cycle-by-cycle monitor ----------
  task automatic run(input int mode, input int nb, input int ngrp, input int gb[4],
                     input int ia_base, input int w_base, input int tile_base);
    int nused = (mode == 0) ? ngrp : 1;
    int exp_g = 0, exp_gb = 0, beat = 0, n_reads = 0, n_tags = 0, n_sw = 0;
    int n_cap = 0, n_rd = 0, cyc = 0, n_done = 0;
    bit seen_done = 1'b0;
    wr('h00, mode); wr('h01, nb); wr('h02, ngrp);
    wr('h04, ia_base); wr('h05, w_base); wr('h06, tile_base);
    for (int g = 0; g < 4; g++) wr('h10 + g, gb[g]);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!seen_done) begin
      // sample just before the rising edge
      cyc++;
      check(busy || done, "busy during the run");
      if (ia_re) begin
        check(w_re && ia_raddr == 16'(ia_base + n_reads) && w_raddr == 16'(w_base + n_reads),
              $sformatf("operand read %0d address", n_reads));
        n_reads++;
      end
      if (core_valid) begin
        automatic bit lastb = (n_tags == nb - 1) || (nused > 1 && exp_gb == gb[exp_g] - 1);
        check(core_first == (exp_gb == 0) && core_last == lastb && core_g == 2'(exp_g),
              $sformatf("beat %0d tags f%0d l%0d g%0d", n_tags, core_first, core_last, core_g));
        n_tags++;
        if (lastb) begin exp_g++; exp_gb = 0; end
        else exp_gb++;
      end
      if (grp_switch) n_sw++;
      if (cap_valid) begin
        check(cap_g == 2'(n_cap), $sformatf("capture row %0d got %0d", n_cap, cap_g));
        n_cap++;
      end
      if (rd_en) begin
        automatic int lane = n_rd / nused, g = n_rd % nused;
        check(n_cap == nused, "drain starts after the last capture");
        check(rd_lane == LW'(lane) && rd_g == 2'(g) && rd_first == (g == 0) &&
              rd_last == (g == nused - 1) && ws_re && ws_raddr == CH_W'(tile_base + lane),
              $sformatf("drain read %0d", n_rd));
        n_rd++;
      end
      if (done) begin
        n_done++;
        seen_done = 1'b1;
      end
      @(negedge clk);
    end
    check(n_reads == nb && n_tags == nb, $sformatf("%0d reads, %0d tags for %0d beats", n_reads, n_tags, nb));
    check(n_sw == nused - 1, $sformatf("%0d group switches, expected %0d", n_sw, nused - 1));
    check(n_cap == nused, "one capture per group");
    check(n_rd == L * nused, "drain length");
    check(cyc == nb + 4 + L * nused + 7 + 1,
          $sformatf("start-to-done %0d cycles, expected %0d", cyc - 1, nb + 4 + L * nused + 7));
    check(!busy, "idle after done");
    @(negedge clk);
    check(!done, "done is a single pulse");
  endtask

  initial begin
    int gb [4];
    repeat (2) @(posedge clk);
    #1;
    check(cfg.n_groups == 3'd1 && cfg.label_bits == 2'd1 && cfg.out_n_groups == 3'd1 &&
          cfg.s1 == 32'h0100_0000 && cfg.s2 == 32'h0100_0000 && cfg.inv_s1 == 32'h0001_0000 &&
          cfg.inv_s2 == 32'h0001_0000 && cfg.out_s1 == 32'h0100_0000 && cfg.out_label_bits == 2'd1,
          "reset values");
    check(!busy && !done && !ia_re && !rd_en, "idle after reset");
    rst_n = 1'b1;

    // ---- register fields ----
    for (int t = 0; t < 20; t++) begin
      automatic logic [31:0] v [32];
      foreach (v[i]) v[i] = $urandom;
      wr('h00, v[0] % 3); wr('h01, v[1]); wr('h02, v[2]); wr('h03, v[3]);
      wr('h04, v[4]); wr('h05, v[5]); wr('h06, v[6]); wr('h07, v[7] % 3);
      wr('h08, v[8]); wr('h09, v[9]); wr('h0A, v[10]); wr('h0B, v[11]);
      wr('h0C, v[12]); wr('h0D, v[13]); wr('h14, v[14]); wr('h15, v[15]); wr('h16, v[16]);
      wr('h17, v[17]); wr('h18, v[18]); wr('h19, v[19]); wr('h1A, v[20]);
      for (int k = 0; k < 15; k++) wr('h20 + k, v[k] ^ 32'h5a5a_0000);
      wr('h40, 32'hffff_ffff);   // parameter-bank address: no controller register changes
      #1;
      check(cfg.mm_mode == mm_mode_e'(v[0] % 3) && cfg.n_beats == v[1][15:0] &&
            cfg.n_groups == v[2][2:0] && cfg.label_bits == v[3][1:0] &&
            cfg.ia_base == v[4][15:0] && cfg.w_base == v[5][15:0] &&
            cfg.tile_base == v[6][CH_W-1:0] && cfg.act_mode == act_mode_e'(v[7] % 3) &&
            cfg.q_mode == q_mode_e'(v[8][1:0]) && cfg.lut_page == v[9][7:0] &&
            cfg.s1 == v[10] && cfg.s2 == v[11] && cfg.inv_s1 == v[12] && cfg.inv_s2 == v[13] &&
            cfg.out_n_groups == v[17][2:0] && cfg.out_label_bits == v[18][1:0] &&
            cfg.out_s1 == v[19] && cfg.sm_pass == sm_pass_e'(v[20][1:0]), "configuration fields");
      check(out_bound[0] == v[14][CH_W-1:0] && out_bound[1] == v[15][CH_W-1:0] &&
            out_bound[2] == v[16][CH_W-1:0], "output group boundaries");
      for (int k = 0; k < 15; k++) check(thr[k] == (v[k] ^ 32'h5a5a_0000), "threshold");
    end

    // ---- tiles ----
    gb = '{3, 5, 2, 4};
    run(0, 14, 4, gb, 7, 3, 100);
    gb = '{6, 6, 0, 0};
    run(0, 12, 2, gb, 0, 20, 0);
    gb = '{1, 1, 1, 0};
    run(0, 3, 3, gb, 50, 9, 4000);
    gb = '{5, 0, 0, 0};
    run(0, 5, 1, gb, 1, 1, 8);
    gb = '{3, 3, 3, 3};
    run(1, 9, 4, gb, 2, 2, 16);       // HLUQ: groups ignored
    run(2, 1, 4, gb, 0, 0, 24);       // LNQ, a single beat
    for (int t = 0; t < 10; t++) begin
      automatic int ng = $urandom_range(1, 4), nb = 0;
      for (int g = 0; g < 4; g++) begin
        gb[g] = (g < ng) ? $urandom_range(1, 6) : 0;
        nb += gb[g];
      end
      run(0, nb, ng, gb, $urandom_range(0, 100), $urandom_range(0, 100), $urandom_range(0, 4000));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
