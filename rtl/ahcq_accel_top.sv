// ahcq_accel_top: AHCQ-SAM W4A4 accelerator, programmable-logic part.
//
// Data path, as in the paper's architecture figure:
//   IA buffer, weight buffer -> MSB-index routers -> LANES multiplier lanes and
//   LANES bit-shift lanes (8 inputs each) -> quantization & reorder buffer ->
//   quantization processor (dequantization with CAG parameter registers and
//   the LNQ BRAM table, activation function or Softmax, quantization) ->
//   output buffer.
// The off-chip DDR4 memory, the processor system (LayerNorm, positional
// encoding, embeddings in floating point) and the host are outside this
// module: their side of the buffers is brought out as plain load/read ports.
//
// One run (start .. done) computes one tile: LANES output channels of one
// token. The host first loads the IA buffer (PE_IN 4-bit codes per word),
// the weight buffer (LANES x PE_IN signed 5-bit weights per word, lane l in
// bits [l*PE_IN*5 +: PE_IN*5]), the per-channel weight scales, the
// channel-index table and, for LNQ, the table pages, and writes the
// configuration registers (see ahcq_controller and quant_processor for the
// register map). Results land in the output buffer at the reordered channel
// address: a 4-bit code in bits [3:0], or a Q16.16 value in Q_FX mode.
//
// Timing: n_beats cycles of computation, a 4-cycle wait, LANES * groups
// drain cycles and 7 cycles of pipeline, after which done pulses; with
// Softmax, 2*LANES + 34 cycles more. The array takes one beat (LANES x 8
// four-bit products) per cycle.
// Sizes follow the paper where it gives them (128 lanes, 8-input PEs,
// 4 CAG groups, 10-bit LUT pages, 3.2 Mb of LUT); buffer depths are this
// design's choice.
module ahcq_accel_top
  import ahcq_pkg::*;
#(
  parameter int unsigned LANES     = 128,
  parameter int unsigned IA_DEPTH  = 1024,
  parameter int unsigned W_DEPTH   = 512,
  parameter int unsigned LUT_PAGES = 100,
  localparam int unsigned CH_DEPTH = 1 << CH_W,
  localparam int unsigned IA_AW = $clog2(IA_DEPTH),
  localparam int unsigned W_AW  = $clog2(W_DEPTH),
  localparam int unsigned PW    = (LUT_PAGES > 1) ? $clog2(LUT_PAGES) : 1,
  localparam int unsigned WW    = LANES * PE_IN * WBITS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // run control
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // configuration registers
  input  logic                   cfg_we,
  input  logic [7:0]             cfg_addr,
  input  logic [31:0]            cfg_wdata,
  // DRAM side of the IA buffer
  input  logic                   ia_we,
  input  logic [IA_AW-1:0]       ia_waddr,
  input  logic [PE_IN*ABITS-1:0] ia_wdata,
  // DRAM side of the weight buffer
  input  logic                   w_we,
  input  logic [W_AW-1:0]        w_waddr,
  input  logic [WW-1:0]          w_wdata,
  // per-output-channel weight scales (Q8.24)
  input  logic                   ws_we,
  input  logic [CH_W-1:0]        ws_waddr,
  input  logic [SCALE_W-1:0]     ws_wdata,
  // channel-index (reorder) table
  input  logic                   perm_we,
  input  logic [CH_W-1:0]        perm_addr,
  input  logic [CH_W-1:0]        perm_data,
  // LNQ look-up table
  input  logic                   lut_we,
  input  logic [PW-1:0]          lut_wpage,
  input  logic [LUT_AW-1:0]      lut_waddr,
  input  logic [LUT_W-1:0]       lut_wdata,
  // DRAM side of the output buffer
  input  logic                   out_re,
  input  logic [CH_W-1:0]        out_raddr,
  output logic [31:0]            out_rdata,
  // event strobes (for performance counting)
  output logic                   ev_grp_switch,
  output logic [PE_IN-1:0]       ev_log_elems,
  output logic                   ev_lut_read,
  output logic                   ev_q_log
);

  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;

  cfg_t                         cfg;
  logic [2:0][CH_W-1:0]         out_bound;
  logic [NCODES-2:0][FX_W-1:0]  thr;

  logic              ia_re, w_re;
  logic [15:0]       ia_raddr, w_raddr;
  logic [PE_IN*ABITS-1:0] ia_rdata;
  logic [WW-1:0]     w_rdata;

  logic              core_valid, core_first, core_last, core_done;
  logic [1:0]        core_g;
  logic [ZP_W-1:0]   azp;
  logic [LANES-1:0][MACC_W-1:0] mul_acc;
  logic [LANES-1:0][SACC_W-1:0] sh_acc;

  logic              cap_valid;
  logic [1:0]        cap_g;
  logic              rd_en, rd_first, rd_last;
  logic [LW-1:0]     rd_lane;
  logic [1:0]        rd_g;
  logic              ws_re;
  logic [CH_W-1:0]   ws_raddr;
  logic [SCALE_W-1:0] ws_rdata;

  logic                     e_valid, e_first, e_last;
  logic signed [MACC_W-1:0] e_mul;
  logic signed [SACC_W-1:0] e_sh;
  logic [CH_W-1:0]          e_dest;
  logic [1:0]               e_g;

  logic              res_valid;
  logic [31:0]       res_data;
  logic [CH_W-1:0]   res_dest;

  ahcq_controller #(.LANES(LANES)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .cfg(cfg), .out_bound(out_bound), .thr(thr),
    .start(start), .busy(busy), .done(done),
    .ia_re(ia_re), .ia_raddr(ia_raddr), .w_re(w_re), .w_raddr(w_raddr),
    .core_valid(core_valid), .core_first(core_first), .core_last(core_last),
    .core_g(core_g), .core_done(core_done),
    .cap_valid(cap_valid), .cap_g(cap_g),
    .rd_en(rd_en), .rd_lane(rd_lane), .rd_g(rd_g), .rd_first(rd_first), .rd_last(rd_last),
    .ws_re(ws_re), .ws_raddr(ws_raddr),
    .res_valid(res_valid),
    .grp_switch(ev_grp_switch)
  );

  sdp_buffer #(.WIDTH(PE_IN*ABITS), .DEPTH(IA_DEPTH)) u_ia_buf (
    .clk(clk), .we(ia_we), .waddr(ia_waddr), .wdata(ia_wdata),
    .re(ia_re), .raddr(ia_raddr[IA_AW-1:0]), .rdata(ia_rdata)
  );

  sdp_buffer #(.WIDTH(WW), .DEPTH(W_DEPTH)) u_w_buf (
    .clk(clk), .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
    .re(w_re), .raddr(w_raddr[W_AW-1:0]), .rdata(w_rdata)
  );

  sdp_buffer #(.WIDTH(SCALE_W), .DEPTH(CH_DEPTH)) u_ws_buf (
    .clk(clk), .we(ws_we), .waddr(ws_waddr), .wdata(ws_wdata),
    .re(ws_re), .raddr(ws_raddr), .rdata(ws_rdata)
  );

  processing_core #(.LANES(LANES)) u_core (
    .clk(clk), .rst_n(rst_n),
    .valid(core_valid), .first(core_first), .last(core_last),
    .mode(cfg.mm_mode), .label_bits(cfg.label_bits), .azp(azp),
    .ia_word(ia_rdata), .w_word(w_rdata),
    .mul_acc(mul_acc), .sh_acc(sh_acc), .done(core_done),
    .beat_log_elems(ev_log_elems)
  );

  reorder_buffer #(.LANES(LANES), .MAXCH(CH_DEPTH)) u_rob (
    .clk(clk), .rst_n(rst_n),
    .cap_valid(cap_valid), .cap_g(cap_g), .cap_mul(mul_acc), .cap_sh(sh_acc),
    .perm_we(perm_we), .perm_addr(perm_addr), .perm_data(perm_data),
    .rd_en(rd_en), .rd_lane(rd_lane), .rd_g(rd_g),
    .rd_first_in(rd_first), .rd_last_in(rd_last), .tile_base(cfg.tile_base),
    .rd_valid(e_valid), .rd_mul(e_mul), .rd_sh(e_sh), .rd_dest(e_dest),
    .rd_gout(e_g), .rd_first(e_first), .rd_last(e_last)
  );

  quant_processor #(.LANES(LANES), .LUT_PAGES(LUT_PAGES)) u_qp (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .out_bound(out_bound), .thr(thr),
    .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .pe_g(core_g), .pe_azp(azp),
    .lut_we(lut_we), .lut_wpage(lut_wpage), .lut_waddr(lut_waddr), .lut_wdata(lut_wdata),
    .in_valid(e_valid), .in_mul(e_mul), .in_sh(e_sh), .in_g(e_g),
    .in_first(e_first), .in_last(e_last), .in_dest(e_dest), .in_sw(ws_rdata),
    .out_valid(res_valid), .out_data(res_data), .out_dest(res_dest),
    .lut_read(ev_lut_read), .q_log(ev_q_log)
  );

  sdp_buffer #(.WIDTH(32), .DEPTH(CH_DEPTH)) u_out_buf (
    .clk(clk), .we(res_valid), .waddr(res_dest), .wdata(res_data),
    .re(out_re), .raddr(out_raddr), .rdata(out_rdata)
  );

endmodule
