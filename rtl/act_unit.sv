// act_unit: activation function stage of the quantization processor.
//
// The paper lists ReLU and GELU (with Softmax) in the processor's activation
// block, generated there by high-level synthesis; it does not say how they
// are computed. This design evaluates them on the Q16.16 dequantized value:
//   ACT_NONE : y = x
//   ACT_RELU : y = max(x, 0)
//   ACT_GELU : y = x * sigmoid(1.702 x), with the sigmoid taken from the
//              piecewise-linear PLAN approximation (segments at |t| = 1,
//              2.375 and 5, slopes 1/4, 1/8, 1/32, so only shifts and adds),
//              and sigmoid(-t) = 1 - sigmoid(t).
// The sigmoid form of GELU and the PLAN segments are this design's choice;
// the approximation error of the sigmoid is below 0.02.
//
// Timing: one register stage; in_valid/in_dest are delayed with the data.
module act_unit
  import ahcq_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  act_mode_e               mode,
  input  logic                    in_valid,
  input  logic signed [FX_W-1:0]  in_x,
  input  logic [CH_W-1:0]         in_dest,
  output logic                    out_valid,
  output logic signed [FX_W-1:0]  out_y,
  output logic [CH_W-1:0]         out_dest
);

  localparam logic signed [FX_W-1:0] ONE      = 32'sd65536;   // 1.0
  localparam logic signed [FX_W-1:0] K1702    = 32'sd111542;  // 1.702
  localparam logic signed [FX_W-1:0] T5       = 32'sd327680;  // 5.0
  localparam logic signed [FX_W-1:0] T2375    = 32'sd155648;  // 2.375
  localparam logic signed [FX_W-1:0] C084375  = 32'sd55296;   // 0.84375
  localparam logic signed [FX_W-1:0] C0625    = 32'sd40960;   // 0.625
  localparam logic signed [FX_W-1:0] C05      = 32'sd32768;   // 0.5

  // Sigmoid by PLAN: input and output Q16.16.
  function automatic logic signed [FX_W-1:0] plan_sigmoid(input logic signed [FX_W-1:0] t);
    logic signed [FX_W-1:0] a, s;
    a = (t < 0) ? -t : t;
    if (a >= T5)         s = ONE;
    else if (a >= T2375) s = (a >>> 5) + C084375;
    else if (a >= ONE)   s = (a >>> 3) + C0625;
    else                 s = (a >>> 2) + C05;
    return (t < 0) ? ONE - s : s;
  endfunction

  logic signed [63:0]     t64, g64;
  logic signed [FX_W-1:0] t, sig, y;

  always_comb begin
    t64 = (64'(in_x) * 64'(K1702)) >>> FX_FRAC;
    // |x| below 2^15 keeps 1.702x inside Q16.16; larger inputs saturate.
    if (t64 > 64'sd2147483647)       t = 32'sh7fffffff;
    else if (t64 < -64'sd2147483647) t = -32'sh7fffffff;
    else                             t = t64[FX_W-1:0];
    sig = plan_sigmoid(t);
    g64 = (64'(in_x) * 64'(sig)) >>> FX_FRAC;
    unique case (mode)
      ACT_RELU: y = (in_x < 0) ? '0 : in_x;
      ACT_GELU: y = g64[FX_W-1:0];
      default:  y = in_x;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_y    <= y;
      out_dest <= in_dest;
    end
  end

endmodule
