// tb_quant_processor: self-checking testbench for the quantization processor
// (parameter banks, LNQ table, dequantization, activation, quantization).
//
// Channels are sent as element sequences (one element per CAG group) with
// random accumulators and weight scales, in each matmul mode, and the output
// is compared with a reference computed here:
//   uniform/CAG : sum_g (mul_g * s_g) >> 8, times s_w   (s_g from the input bank)
//   HLUQ        : (mul*s2) >> 8 + (sh*s1) >> 24, times s_w
//   LNQ         : table[page][sat(mul)] times s_w
// then ReLU, and the output quantizer (Q16.16 pass-through, uniform with the
// output bank's reciprocal scale and zero point by output group, or the LNQ
// threshold count). Also checked: the zero point handed to the PE array for
// a selected group, the LUT-read and log-code strobes, and the latency of
// five cycles from a channel's last element to its result.
module tb_quant_processor;
  import ahcq_pkg::*;

  localparam int LP = 4;
  localparam int PW = $clog2(LP);

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic [2:0][CH_W-1:0] out_bound;
  logic [NCODES-2:0][FX_W-1:0] thr;
  logic cfg_we = 1'b0; logic [7:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic [1:0] pe_g = '0;
  logic [ZP_W-1:0] pe_azp;
  logic lut_we = 1'b0; logic [PW-1:0] lut_wpage = '0; logic [LUT_AW-1:0] lut_waddr = '0;
  logic [LUT_W-1:0] lut_wdata = '0;
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic signed [MACC_W-1:0] in_mul = '0;
  logic signed [SACC_W-1:0] in_sh = '0;
  logic [1:0] in_g = '0;
  logic [CH_W-1:0] in_dest = '0;
  logic [SCALE_W-1:0] in_sw = '0;
  logic out_valid;
  logic [31:0] out_data;
  logic [CH_W-1:0] out_dest;
  logic lut_read, q_log;

  quant_processor #(.LUT_PAGES(LP)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_lut = 0, n_qlog = 0;
  always @(posedge clk) begin
    if (lut_read) n_lut++;
    if (q_log) n_qlog++;
  end

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic wr(input int a, input longint d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = 8'(a); cfg_wdata = 32'(d);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  longint sc_in [4], inv_out [4];
  int zp_in [4], zp_out [4], lut [LP][1024], bnd [3], th [15];

  // send one channel of ng elements; return the cycle count to out_valid
  task automatic channel(input int ng, input longint mul[4], input longint sh,
                         input longint sw, input int dest, output logic [31:0] res, output int lat);
    for (int g = 0; g < ng; g++) begin
      @(negedge clk);
      in_valid = 1'b1; in_mul = MACC_W'(mul[g]); in_sh = SACC_W'(sh); in_g = 2'(g);
      in_first = (g == 0); in_last = (g == ng - 1); in_dest = CH_W'(dest); in_sw = 32'(sw);
    end
    @(negedge clk);
    in_valid = 1'b0;
    lat = 1;
    while (!out_valid && lat < 20) begin
      @(negedge clk);
      lat++;
    end
    res = out_data;
    check(out_dest == CH_W'(dest), "destination carried through");
  endtask

  initial begin
    cfg = '0;
    cfg.s1 = 32'h0100_0000; cfg.s2 = 32'h0100_0000;
    cfg.inv_s1 = 32'h0001_0000; cfg.inv_s2 = 32'h0001_0000;
    cfg.out_s1 = 32'h0100_0000; cfg.label_bits = 2'd1; cfg.out_label_bits = 2'd1;
    cfg.n_groups = 3'd1; cfg.out_n_groups = 3'd1;
    out_bound = '0; thr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // parameter banks: input bank scales/zero points, output bank
    for (int g = 0; g < 4; g++) begin
      sc_in[g] = longint'($urandom_range(1 << 18, 1 << 22));
      zp_in[g] = $urandom_range(0, 15);
      wr('h40 + g, sc_in[g]); wr('h44 + g, zp_in[g]);
      inv_out[g] = longint'($urandom_range(1 << 12, 1 << 16));
      zp_out[g] = $urandom_range(0, 15);
      wr('h48 + g, inv_out[g]); wr('h4C + g, zp_out[g]);
    end
    for (int g = 0; g < 4; g++) begin
      pe_g = 2'(g); #1;
      check(pe_azp == 4'(zp_in[g]), "zero point for the PE array");
    end
    // LNQ table, two pages
    for (int p = 0; p < 2; p++)
      for (int a = 0; a < 1024; a++) begin
        @(negedge clk);
        lut[p][a] = (p == 0) ? a * 100 - 30000 : -(a * a);
        lut_we = 1'b1; lut_wpage = PW'(p); lut_waddr = LUT_AW'(a); lut_wdata = 32'(lut[p][a]);
      end
    @(negedge clk);
    lut_we = 1'b0;
    for (int k = 0; k < 3; k++) bnd[k] = 100 * (k + 1);
    for (int k = 0; k < 15; k++) th[k] = -200000 + k * 30000;
    for (int k = 0; k < 3; k++) out_bound[k] = CH_W'(bnd[k]);
    for (int k = 0; k < 15; k++) thr[k] = 32'(th[k]);

    for (int t = 0; t < 600; t++) begin
      automatic int mm = t % 3, qm = (t / 3) % 4, act = (t / 12) % 2;
      automatic int ng = (mm == 0) ? $urandom_range(1, 4) : 1;
      automatic longint mul [4], sh, sw, sum = 0, y, e;
      automatic int dest = $urandom_range(0, 399), lat, page = t % 2;
      automatic logic [31:0] res;
      cfg.mm_mode = mm_mode_e'(mm);
      cfg.q_mode = q_mode_e'((qm == 2) ? 0 : qm);   // HLUQ output quantization is covered elsewhere
      cfg.act_mode = act ? ACT_RELU : ACT_NONE;
      cfg.out_n_groups = 3'd4;
      cfg.lut_page = 8'(page);
      cfg.s1 = 32'($urandom_range(1 << 20, 1 << 24));
      cfg.s2 = 32'($urandom_range(1 << 18, 1 << 22));
      foreach (mul[g]) mul[g] = longint'($urandom_range(0, 40000)) - 20000;
      if (mm == 2) mul[0] = longint'($urandom_range(0, 1400)) - 200;
      sh = longint'($urandom_range(0, 1 << 24)) - (1 << 23);
      sw = longint'($urandom_range(1 << 20, 1 << 24));
      channel(ng, mul, sh, sw, dest, res, lat);
      check(lat == 5, $sformatf("latency %0d", lat));
      if (mm == 0) for (int g = 0; g < ng; g++) sum += (mul[g] * sc_in[g]) >>> 8;
      else if (mm == 1) sum = ((mul[0] * longint'(cfg.s2)) >>> 8) + ((sh * longint'(cfg.s1)) >>> 24);
      else sum = lut[page][(mul[0] < 0) ? 0 : (mul[0] > 1023) ? 1023 : mul[0]];
      y = (sum * sw) >>> 24;
      if (y > 64'sd2147483647) y = 64'sd2147483647;
      if (y < -64'sd2147483648) y = -64'sd2147483648;
      if (act && y < 0) y = 0;
      case (cfg.q_mode)
        Q_FX: e = y;
        Q_UNIFORM: begin
          automatic int g = 0;
          for (int k = 0; k < 3; k++) if (dest >= bnd[k]) g = k + 1;
          e = ((y * inv_out[g] + (longint'(1) <<< 31)) >>> 32) + zp_out[g];
          e = (e < 0) ? 0 : (e > 15) ? 15 : e;
        end
        default: begin
          e = 0;
          for (int k = 0; k < 15; k++) if (y >= th[k]) e = k + 1;
        end
      endcase
      check(res == 32'(e), $sformatf("t=%0d mm=%0d q=%0d got %0d exp %0d", t, mm, cfg.q_mode,
                                     $signed(res), e));
    end

    // HLUQ output: values below and above s1 give log and uniform codes
    cfg.mm_mode = MM_HLUQ; cfg.q_mode = Q_HLUQ; cfg.act_mode = ACT_NONE;
    cfg.s1 = 32'h0100_0000; cfg.s2 = 32'h0100_0000;
    cfg.out_s1 = 32'h0400_0000; cfg.inv_s1 = 32'h0000_4000; cfg.inv_s2 = 32'h0001_0000;
    cfg.out_label_bits = 2'd1;
    for (int t = 0; t < 2; t++) begin
      automatic longint mul [4] = '{0, 0, 0, 0};
      automatic int lat;
      automatic logic [31:0] res;
      // y = sh * s1 = 1.0 (t=0, below s1 = 4: code round(log2 4) = 2) or 9.0 (t=1: 5 -> clamp to 8..15)
      channel(1, mul, (t == 0) ? (longint'(1) <<< 16) : (longint'(9) <<< 16),
              longint'(1) <<< 24, 0, res, lat);
      check(res == ((t == 0) ? 32'd2 : 32'd8), $sformatf("hluq output code %0d", res));
    end
    check(n_lut > 0, "LNQ table read strobe");
    check(n_qlog == 1, "log-branch strobe once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
