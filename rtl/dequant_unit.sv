// dequant_unit: DeQuant arithmetic of the quantization processor.
//
// It turns the integer PE results of one output channel back into a
// fixed-point value. A channel arrives as one element per CAG group
// (first .. last), each element holding the multiplier-lane and bit-shift-lane
// accumulators of that group's partial reduction:
//   uniform/CAG : y = sum_g  s_g * mul_g            (zero points were removed
//                                                    before the multipliers)
//   HLUQ        : y = s2 * mul + s1 * shift          (x ~ s2*x_q + s1 for uniform
//                                                    codes, s1*2^-x_q for log codes)
//   LNQ         : y = LUT[page][sat(mul)]            (integer score x Value result
//                                                    used as the table address)
// and finally y is multiplied by the channel's weight scale s_w (per-channel
// weight quantization; for LNQ the Value scale). The equations follow the
// paper's quantizer definitions; the paper dequantizes in floating point, this
// design uses fixed point (scales Q8.24, results Q16.16, saturating).
//
// Timing: 3-stage pipeline, one element per cycle. Stage 1 registers the
// element and issues the LUT read; stage 2 forms the group term and
// accumulates it; stage 3 applies s_w. out_valid is high for one cycle per
// channel, three cycles after that channel's 'last' element.
module dequant_unit
  import ahcq_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  mm_mode_e                   mode,
  input  logic [SCALE_W-1:0]         s1,
  input  logic [SCALE_W-1:0]         s2,
  // element in
  input  logic                       in_valid,
  input  logic signed [MACC_W-1:0]   in_mul,
  input  logic signed [SACC_W-1:0]   in_sh,
  input  logic [1:0]                 in_g,
  input  logic                       in_first,
  input  logic                       in_last,
  input  logic [CH_W-1:0]            in_dest,
  input  logic [SCALE_W-1:0]         in_sw,
  // group-scale lookup (counter-selected CAG parameter)
  output logic [1:0]                 g_sel,
  input  logic [SCALE_W-1:0]         g_scale,
  // LNQ table
  output logic                       lut_re,
  output logic [LUT_AW-1:0]          lut_addr,
  input  logic [LUT_W-1:0]           lut_data,
  // channel out
  output logic                       out_valid,
  output logic signed [FX_W-1:0]     out_y,
  output logic [CH_W-1:0]            out_dest
);

  localparam int ACC_W = 48;

  function automatic logic signed [FX_W-1:0] sat_fx(input logic signed [95:0] v);
    if (v > 96'sd2147483647)        return 32'sh7fffffff;
    else if (v < -96'sd2147483648)  return 32'sh80000000;
    else                            return v[FX_W-1:0];
  endfunction

  // ---- stage 1 ----
  logic                     s1_valid, s1_first, s1_last;
  logic signed [MACC_W-1:0] s1_mul;
  logic signed [SACC_W-1:0] s1_sh;
  logic [1:0]               s1_g;
  logic [CH_W-1:0]          s1_dest;
  logic [SCALE_W-1:0]       s1_sw;

  assign lut_re   = in_valid && (mode == MM_LNQ);
  assign lut_addr = sat_addr(in_mul);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_mul   <= in_mul;
      s1_sh    <= in_sh;
      s1_g     <= in_g;
      s1_first <= in_first;
      s1_last  <= in_last;
      s1_dest  <= in_dest;
      s1_sw    <= in_sw;
    end
  end

  // ---- stage 2 ----
  assign g_sel = s1_g;

  logic signed [ACC_W-1:0] dq, acc, acc_next;
  logic signed [79:0]      t_mul, t_sh;

  always_comb begin
    t_mul = '0;
    t_sh  = '0;
    dq    = '0;
    unique case (mode)
      MM_HLUQ: begin
        t_mul = (80'(s1_mul) * signed'({48'd0, s2})) >>> (SC_FRAC - FX_FRAC);
        t_sh  = (80'(s1_sh)  * signed'({48'd0, s1})) >>> (SC_FRAC + SFRAC - FX_FRAC);
        dq    = ACC_W'(t_mul + t_sh);
      end
      MM_LNQ: begin
        dq = ACC_W'(signed'(lut_data));
      end
      default: begin
        t_mul = (80'(s1_mul) * signed'({48'd0, g_scale})) >>> (SC_FRAC - FX_FRAC);
        dq    = ACC_W'(t_mul);
      end
    endcase
    acc_next = (s1_first ? '0 : acc) + dq;
  end

  logic                    s2_valid;
  logic signed [ACC_W-1:0] s2_sum;
  logic [CH_W-1:0]         s2_dest;
  logic [SCALE_W-1:0]      s2_sw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      s2_valid <= 1'b0;
    end else begin
      s2_valid <= s1_valid && s1_last;
      if (s1_valid) acc <= acc_next;
    end
  end

  always_ff @(posedge clk) begin
    if (s1_valid && s1_last) begin
      s2_sum  <= acc_next;
      s2_dest <= s1_dest;
      s2_sw   <= s1_sw;
    end
  end

  // ---- stage 3 ----
  logic signed [95:0] t_w;
  assign t_w = (96'(s2_sum) * signed'({64'd0, s2_sw})) >>> SC_FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s2_valid;
  end

  always_ff @(posedge clk) begin
    if (s2_valid) begin
      out_y    <= sat_fx(t_w);
      out_dest <= s2_dest;
    end
  end

endmodule
