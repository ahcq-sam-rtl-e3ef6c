// tb_dequant_unit: dequantization arithmetic.
// Streams random channels (1..4 group elements each, back to back) in all
// three modes. The expected Q16.16 result is computed here with 128-bit
// arithmetic from the definitions: uniform  sum_g floor(mul_g*s_g/2^8);
// HLUQ floor(mul*s2/2^8) + floor(shift*s1/2^24); LNQ the table value; then
// floor(sum*s_w/2^24) saturated to 32 bits. Also checks that each result
// appears exactly 3 cycles after the channel's last element.
module tb_dequant_unit;
  import ahcq_pkg::*;
  logic clk = 0, rst_n = 0;
  mm_mode_e mode = MM_UNIFORM;
  logic [SCALE_W-1:0] s1 = '0, s2 = '0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic signed [MACC_W-1:0] in_mul = '0;
  logic signed [SACC_W-1:0] in_sh = '0;
  logic [1:0] in_g = '0;
  logic [CH_W-1:0] in_dest = '0;
  logic [SCALE_W-1:0] in_sw = '0;
  logic [1:0] g_sel;
  logic [SCALE_W-1:0] g_scale;
  logic lut_re;
  logic [LUT_AW-1:0] lut_addr;
  logic [LUT_W-1:0] lut_data;
  logic out_valid;
  logic signed [FX_W-1:0] out_y;
  logic [CH_W-1:0] out_dest;
  logic [SCALE_W-1:0] gs [NGROUPS];
  int checks = 0, failures = 0, cyc = 0;
  longint exp_y [$];
  int     exp_d [$];
  int     exp_c [$];

  dequant_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  assign g_scale = gs[g_sel];
  function automatic logic [31:0] lutv(int a);
    return 32'(a * 977 - 300000);
  endfunction
  always_ff @(posedge clk) if (lut_re) lut_data <= lutv(int'(lut_addr));

  function automatic logic signed [127:0] fl(logic signed [127:0] v, int sh);
    return v >>> sh;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (exp_y.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      automatic longint ey = exp_y.pop_front();
      automatic int ed = exp_d.pop_front(), ec = exp_c.pop_front();
      if (out_y != FX_W'(ey)) begin failures++; $display("FAIL value %0d expected %0d", out_y, ey); end
      if (out_dest != CH_W'(ed)) begin failures++; $display("FAIL dest"); end
      if (cyc != ec + 3) begin failures++; $display("FAIL latency %0d", cyc - ec); end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 12; blk++) begin
      mode = mm_mode_e'(blk % 3);
      s1 = 32'($urandom_range(1 << 20, 1 << 25));
      s2 = 32'($urandom_range(1 << 18, 1 << 24));
      for (int g = 0; g < NGROUPS; g++) gs[g] = 32'($urandom_range(1 << 16, 1 << 25));
      @(negedge clk);
      for (int ch = 0; ch < 20; ch++) begin
        automatic int ng = (mode == MM_UNIFORM) ? $urandom_range(1, 4) : 1;
        automatic logic signed [127:0] sum = 0, y;
        automatic logic [31:0] sw = 32'($urandom_range(1 << 20, 1 << 25));
        for (int g = 0; g < ng; g++) begin
          logic signed [127:0] dq;
          in_valid = 1; in_first = (g == 0); in_last = (g == ng - 1); in_g = 2'(g);
          in_mul = MACC_W'($urandom_range(0, 1 << 14)) - MACC_W'(1 << 13);
          if (ch % 5 == 0) in_mul = MACC_W'(1500);   // beyond the 10-bit LUT range
          in_sh = SACC_W'($urandom_range(0, 1 << 26)) - SACC_W'(1 << 25);
          in_dest = CH_W'($urandom); in_sw = sw;
          case (mode)
            MM_HLUQ: dq = fl(128'(in_mul) * 128'(s2), 8) + fl(128'(in_sh) * 128'(s1), 24);
            MM_LNQ:  dq = 128'(signed'(lutv(in_mul < 0 ? 0 : (in_mul > 1023 ? 1023 : int'(in_mul)))));
            default: dq = fl(128'(in_mul) * 128'(gs[g]), 8);
          endcase
          sum += dq;
          if (g == ng - 1) begin
            y = fl(sum * 128'(sw), 24);
            if (y > 128'sd2147483647) y = 128'sd2147483647;
            if (y < -128'sd2147483648) y = -128'sd2147483648;
            exp_y.push_back(longint'(y)); exp_d.push_back(int'(in_dest)); exp_c.push_back(cyc);
          end
          @(negedge clk);
        end
        if ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      end
      in_valid = 0;
      repeat (6) @(negedge clk);
    end
    checks++;
    if (exp_y.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_y.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
