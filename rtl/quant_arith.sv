// quant_arith: quantization arithmetic of the quantization processor.
//
// Converts a Q16.16 value into the 4-bit code the next layer reads, with one
// of the paper's three quantizers, or passes the value through:
//   Q_FX      : the fixed-point value itself (for work left to the processor
//               system, e.g. LayerNorm)
//   Q_UNIFORM : q = clamp(round(y / s_g) + z_g, 0, 15); the CAG group g of the
//               channel is found from its (reordered) output address by
//               comparing it with the group boundaries, so grouped channels
//               that sit next to each other switch parameters by position.
//   Q_HLUQ    : hybrid log-uniform. For y <= s1 a power-of-two code
//               round(-log2(y / s1)) clamped to the log codes; otherwise
//               round((y - s1) / s2) clamped to the uniform codes. The code
//               space is split by the 2^-n rule: the log codes are
//               0 .. 2^(4-n) - 1, so their top n bits are zero.
//   Q_LNQ     : the log transform and uniform quantizer are fused offline
//               into a table of 15 ascending thresholds; the code is the
//               number of thresholds the value reaches.
// Divisions are multiplications by reciprocal scales (Q16.16) held in the
// output parameter bank. round(-log2 r) is found from the position of the
// leading one of r and a comparison of the following bits with sqrt(2).
// Non-positive inputs to the log branch take the smallest log level. The
// reciprocal form, the sqrt(2) rounding point and the use of 2^(4-n) rather
// than beta*(2^k - 1) as the split are this design's choices.
//
// Timing: one register stage.
module quant_arith
  import ahcq_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  q_mode_e                       mode,
  input  logic [1:0]                    label_bits,
  input  logic [SCALE_W-1:0]            s1,        // Q8.24
  input  logic [SCALE_W-1:0]            inv_s1,    // Q16.16
  input  logic [SCALE_W-1:0]            inv_s2,    // Q16.16
  input  logic [2:0]                    n_groups,
  input  logic [2:0][CH_W-1:0]          bound,     // first address of groups 1..3
  output logic [1:0]                    g_sel,
  input  qparam_t                       qp,        // reciprocal scale Q16.16 and zero point of g_sel
  input  logic [NCODES-2:0][FX_W-1:0]   thr,       // LNQ thresholds for codes 1..15
  input  logic                          in_valid,
  input  logic signed [FX_W-1:0]        in_y,
  input  logic [CH_W-1:0]               in_dest,
  output logic                          out_valid,
  output logic [31:0]                   out_data,
  output logic [CH_W-1:0]               out_dest,
  output logic                          out_is_log   // HLUQ code from the log branch
);

  localparam int QMAX = NCODES - 1;

  function automatic logic [ABITS-1:0] clampq(input logic signed [95:0] v,
                                              input int lo, input int hi);
    if (v < 96'(lo))      return ABITS'(lo);
    else if (v > 96'(hi)) return ABITS'(hi);
    else                  return v[ABITS-1:0];
  endfunction

  // group of the output channel from its address
  always_comb begin
    g_sel = '0;
    for (int i = 0; i < 3; i++) begin
      if ((i + 1 < int'(n_groups)) && (in_dest >= bound[i])) g_sel = 2'(i + 1);
    end
  end

  logic [ABITS-1:0]   q;
  logic               is_log;
  logic signed [95:0] p, yq24, r;
  logic signed [95:0] n_raw;
  int                 msb;
  logic [15:0]        mant;
  int                 nlog;

  always_comb begin
    q      = '0;
    is_log = 1'b0;
    p      = '0;
    r      = '0;
    msb    = 0;
    mant   = '0;
    n_raw  = '0;
    nlog   = 1 << (ABITS - int'(label_bits));
    yq24   = 96'(in_y) <<< (SC_FRAC - FX_FRAC);
    unique case (mode)
      Q_UNIFORM: begin
        p = (96'(in_y) * signed'({64'd0, qp.scale}) + (96'sd1 <<< 31)) >>> 32;
        q = clampq(p + 96'(qp.zp), 0, QMAX);
      end
      Q_HLUQ: begin
        if (yq24 <= signed'({64'd0, s1})) begin
          is_log = 1'b1;
          if (in_y <= 0) begin
            q = ABITS'(nlog - 1);
          end else begin
            r = 96'(in_y) * signed'({64'd0, inv_s1});     // y/s1 in Q.32
            for (int b = 0; b < 95; b++) if (r[b]) msb = b;
            mant  = 16'((r << (95 - msb)) >> 79);           // 16 bits after the leading one
            n_raw = 96'(32 - msb) - ((mant >= 16'd27146) ? 96'sd1 : 96'sd0);
            q = clampq(n_raw, 0, nlog - 1);
          end
        end else begin
          p = ((yq24 - signed'({64'd0, s1})) * signed'({64'd0, inv_s2}) + (96'sd1 <<< 39)) >>> 40;
          q = clampq(p, nlog, QMAX);
        end
      end
      Q_LNQ: begin
        for (int i = 0; i < QMAX; i++) if (in_y >= signed'(thr[i])) q = ABITS'(i + 1);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_data   <= (mode == Q_FX) ? 32'(in_y) : 32'(q);
      out_dest   <= in_dest;
      out_is_log <= is_log;
    end
  end

endmodule
