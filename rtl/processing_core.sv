// processing_core: the array of multiplier and bit-shift PE lanes.
//
// Each beat one IA-buffer word (PE_IN activation codes) is broadcast to all
// LANES lane pairs, and each lane pair gets its own PE_IN weights from the
// weight-buffer word, so the core produces LANES output channels of one token
// per reduction. A single MSB router decides, per activation element, whether
// it goes to the multiplier lanes, the bit-shift lanes or both (see
// msb_router); the same decision steers the weights (the weight-side "MSB
// index" multiplexer of the paper's figure), so each lane pair needs only
// enable gating. Lane count 128 is the paper's parallelism for the INT4
// design; pairing one multiplier lane with one bit-shift lane per output
// channel is this design's reading of the figure.
//
// Timing: inputs are taken in the cycle they are valid; mul_acc/sh_acc are
// valid from the cycle after the 'last' beat ('done' pulses then).
module processing_core
  import ahcq_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic                                    valid,
  input  logic                                    first,
  input  logic                                    last,
  input  mm_mode_e                                mode,
  input  logic [1:0]                              label_bits,
  input  logic [ZP_W-1:0]                         azp,
  input  logic [PE_IN-1:0][ABITS-1:0]             ia_word,
  input  logic [LANES-1:0][PE_IN-1:0][WBITS-1:0]  w_word,
  output logic [LANES-1:0][MACC_W-1:0]            mul_acc,
  output logic [LANES-1:0][SACC_W-1:0]            sh_acc,
  output logic                                    done,
  output logic [PE_IN-1:0]                        beat_log_elems  // HLUQ log-labelled elements this beat
);

  logic signed [ABITS:0]  mul_a  [PE_IN];
  logic [ABITS-1:0]       sh_amt [PE_IN];
  logic [PE_IN-1:0]       to_mul, to_shift;

  msb_router u_router (
    .mode      (mode),
    .label_bits(label_bits),
    .azp       (azp),
    .code      (ia_word),
    .mul_a     (mul_a),
    .sh_amt    (sh_amt),
    .to_mul    (to_mul),
    .to_shift  (to_shift)
  );

  assign beat_log_elems = valid ? (to_shift & ~to_mul) : '0;

  logic [LANES-1:0] mul_done, sh_done;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [WBITS-1:0]  w [PE_IN];
    logic signed [MACC_W-1:0] macc;
    logic signed [SACC_W-1:0] sacc;
    for (genvar i = 0; i < PE_IN; i++) begin : g_w
      assign w[i] = signed'(w_word[l][i]);
    end

    mult_pe_lane u_mul (
      .clk(clk), .rst_n(rst_n), .valid(valid), .first(first), .last(last),
      .a(mul_a), .w(w), .w_en(to_mul), .acc(macc), .done(mul_done[l])
    );

    shift_pe_lane u_sh (
      .clk(clk), .rst_n(rst_n), .valid(valid), .first(first), .last(last),
      .sh(sh_amt), .w(w), .w_en(to_shift), .acc(sacc), .done(sh_done[l])
    );

    assign mul_acc[l] = macc;
    assign sh_acc[l]  = sacc;
  end

  assign done = &{mul_done, sh_done};

endmodule
