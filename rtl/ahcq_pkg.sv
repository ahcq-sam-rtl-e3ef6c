// ahcq_pkg: types and constants shared by the AHCQ-SAM accelerator.
//
// The accelerator runs 4-bit (W4A4) linear layers of a Segment Anything image
// encoder / mask decoder. Three activation quantizers are supported by the same
// datapath: uniform quantization with channel-aware grouping (CAG, up to four
// groups of scale/zero point along the reduction dimension), hybrid
// log-uniform quantization (HLUQ, power-of-two codes go to bit-shift PE lanes,
// uniform codes to multiplier PE lanes) and logarithmic nonlinear quantization
// (LNQ, the integer matmul result indexes a dequantization look-up table).
//
// Numbers from the paper: 4-bit codes, 8-input PE lanes, 128 lanes in the
// INT4 configuration, 4 CAG groups, 36 bits (32-bit scale + 4-bit zero point)
// per group = 144 register bits, LUT pages addressed by fewer than 10 bits,
// 3.2 Mb of LUT BRAM. Everything else (fixed-point formats, widths of
// accumulators, the register map) is this design's own choice: the paper's
// floating-point dequantization is replaced here by fixed point.
package ahcq_pkg;

  // ---- sizes -------------------------------------------------------------
  localparam int ABITS     = 4;    // activation code width (paper: 4-bit)
  localparam int WBITS     = 5;    // weight operand: (w_q - z_w) of a 4-bit weight, signed
  localparam int PE_IN     = 8;    // inputs per PE lane (paper: 8-input PE)
  localparam int NGROUPS   = 4;    // CAG groups (paper: group number 4)
  localparam int SCALE_W   = 32;   // scale register width (144 / 4 - 4)
  localparam int ZP_W      = 4;    // zero-point register width (4-bit codes)
  localparam int MACC_W    = 24;   // multiplier-lane accumulator
  localparam int SFRAC     = 16;   // fractional bits of the bit-shift ("decimal") lane
  localparam int SACC_W    = 40;   // bit-shift-lane accumulator, SFRAC fractional bits
  localparam int FX_W      = 32;   // dequantized values: signed Q16.16
  localparam int FX_FRAC   = 16;
  localparam int SC_FRAC   = 24;   // scales: unsigned Q8.24
  localparam int INV_FRAC  = 16;   // inverse scales (used to quantize): unsigned Q16.16
  localparam int LUT_AW    = 10;   // LNQ page address (paper: below a 10-bit space)
  localparam int LUT_W     = 32;   // LNQ LUT entry, signed Q16.16
  localparam int CH_W      = 12;   // channel / output-buffer address width
  localparam int NCODES    = 1 << ABITS;

  // ---- modes -------------------------------------------------------------
  // Matrix-multiply mode: selects the PE routing and the dequantization.
  typedef enum logic [1:0] {
    MM_UNIFORM = 2'd0,   // uniform / CAG activations, multiplier lanes only
    MM_HLUQ    = 2'd1,   // hybrid log-uniform: routed by the MSB label
    MM_LNQ     = 2'd2    // LNQ: integer result indexes the LUT
  } mm_mode_e;

  // Activation function applied after dequantization.
  typedef enum logic [1:0] {
    ACT_NONE = 2'd0,
    ACT_RELU = 2'd1,
    ACT_GELU = 2'd2,
    ACT_SOFTMAX = 2'd3    // row-wise over the tile's LANES results
  } act_mode_e;

  // Softmax pass of a tile (rows longer than one tile take two passes).
  typedef enum logic [1:0] {
    SM_ROW        = 2'd0,   // the tile is a whole row
    SM_STAT_FIRST = 2'd1,   // first tile of a long row: start max / sum
    SM_STAT_NEXT  = 2'd2,   // further tile: merge into max / sum
    SM_NORM       = 2'd3    // second pass: normalise with the row's max / sum
  } sm_pass_e;

  // Quantizer applied before the output buffer.
  typedef enum logic [1:0] {
    Q_FX      = 2'd0,   // no quantization: the Q16.16 value is written out
    Q_UNIFORM = 2'd1,   // uniform with per-group (CAG) parameters
    Q_HLUQ    = 2'd2,   // hybrid log-uniform
    Q_LNQ     = 2'd3    // LNQ threshold table
  } q_mode_e;

  // One CAG quantization parameter set: 32 + 4 = 36 bits.
  typedef struct packed {
    logic [SCALE_W-1:0] scale;
    logic [ZP_W-1:0]    zp;
  } qparam_t;

  // Run configuration held by the controller's register file.
  typedef struct packed {
    mm_mode_e                 mm_mode;
    logic [15:0]              n_beats;     // 8-channel beats in one reduction
    logic [2:0]               n_groups;    // input CAG groups in use (1..4)
    logic [1:0]               label_bits;  // HLUQ: n of the 2^-n grid split (1..3)
    logic [15:0]              ia_base;
    logic [15:0]              w_base;
    logic [CH_W-1:0]          tile_base;   // first output channel of this tile
    act_mode_e                act_mode;
    q_mode_e                  q_mode;
    logic [7:0]               lut_page;
    logic [SCALE_W-1:0]       s1;          // HLUQ power-of-two scale, Q8.24
    logic [SCALE_W-1:0]       s2;          // HLUQ uniform scale, Q8.24
    logic [SCALE_W-1:0]       inv_s1;      // 1/s1 of the next layer, Q16.16
    logic [SCALE_W-1:0]       inv_s2;      // 1/s2 of the next layer, Q16.16
    logic [2:0]               out_n_groups;
    logic [1:0]               out_label_bits; // HLUQ n of the next layer's activations
    logic [SCALE_W-1:0]       out_s1;      // HLUQ s1 of the next layer, Q8.24
    sm_pass_e                 sm_pass;     // Softmax pass of this tile
  } cfg_t;

  // Saturate a signed value to an unsigned LUT address.
  function automatic logic [LUT_AW-1:0] sat_addr(input logic signed [MACC_W-1:0] v);
    if (v < 0)                         return '0;
    else if (v > (1 << LUT_AW) - 1)    return '1;
    else                               return v[LUT_AW-1:0];
  endfunction

endpackage
