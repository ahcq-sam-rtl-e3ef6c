// reorder_buffer: the quantization & reorder buffer between the PE array and
// the quantization processor.
//
// Capture side: at the end of each CAG group's partial reduction the PE array
// hands over LANES pairs of accumulators (multiplier lane, bit-shift lane);
// they are stored as row 'cap_g'. Keeping one row per group lets the
// quantization processor apply each group's own scale afterwards.
// Read side: the controller walks lane by lane and, within a lane, group by
// group. Each read returns the two accumulators and the channel's destination
// address taken from a channel-index table: perm[tile_base + lane]. That
// table implements the paper's on-chip activation reordering, which places
// the channels of one CAG group next to each other for the next layer (the
// matching weight reordering is done offline). Table contents are loaded by
// the host; the paper does not give a table format, a plain index RAM is this
// design's choice.
//
// Timing: capture at the clock edge with cap_valid; a read issued with rd_en
// returns rd_valid/rd_mul/rd_sh/rd_dest one cycle later, with rd_first and
// rd_last delayed alongside.
module reorder_buffer
  import ahcq_pkg::*;
#(
  parameter int unsigned LANES = 128,
  parameter int unsigned MAXCH = 4096,
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // capture from the processing core
  input  logic                          cap_valid,
  input  logic [1:0]                    cap_g,
  input  logic [LANES-1:0][MACC_W-1:0]  cap_mul,
  input  logic [LANES-1:0][SACC_W-1:0]  cap_sh,
  // channel-index table load
  input  logic                          perm_we,
  input  logic [CH_W-1:0]               perm_addr,
  input  logic [CH_W-1:0]               perm_data,
  // read towards the quantization processor
  input  logic                          rd_en,
  input  logic [LW-1:0]                 rd_lane,
  input  logic [1:0]                    rd_g,
  input  logic                          rd_first_in,
  input  logic                          rd_last_in,
  input  logic [CH_W-1:0]               tile_base,
  output logic                          rd_valid,
  output logic signed [MACC_W-1:0]      rd_mul,
  output logic signed [SACC_W-1:0]      rd_sh,
  output logic [CH_W-1:0]               rd_dest,
  output logic [1:0]                    rd_gout,
  output logic                          rd_first,
  output logic                          rd_last
);

  logic [LANES-1:0][MACC_W-1:0] row_mul [NGROUPS];
  logic [LANES-1:0][SACC_W-1:0] row_sh  [NGROUPS];
  logic [CH_W-1:0]              perm    [MAXCH];

  always_ff @(posedge clk) begin
    if (cap_valid) begin
      row_mul[cap_g] <= cap_mul;
      row_sh[cap_g]  <= cap_sh;
    end
  end

  always_ff @(posedge clk) begin
    if (perm_we) perm[perm_addr] <= perm_data;
  end

  logic [CH_W-1:0] ch;
  assign ch = tile_base + CH_W'(rd_lane);

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_mul  <= signed'(row_mul[rd_g][rd_lane]);
      rd_sh   <= signed'(row_sh[rd_g][rd_lane]);
      rd_dest <= perm[ch];
      rd_gout <= rd_g;
      rd_first <= rd_first_in;
      rd_last  <= rd_last_in;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

endmodule
