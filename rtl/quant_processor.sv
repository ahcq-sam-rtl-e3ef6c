// quant_processor: the quantization processor between the reorder buffer
// and the output buffer.
//
// Chain, one channel element per cycle:
//   dequant_unit  (group-wise scaling for CAG, s2/s1 fusion of the two HLUQ
//                  branches, or LNQ table look-up; then the weight scale)
//   act_unit      (none / ReLU / GELU), or softmax_unit (Softmax over the
//                 LANES results of a tile)
//   quant_arith   (fixed-point pass-through, uniform with CAG groups, HLUQ or
//                  LNQ threshold table)
// It owns two CAG parameter banks of 4 x (32 + 4) bits: the input bank holds
// the scale and zero point of each group of the layer's input activation
// (its zero points also go to the PE array, selected by the controller's
// group counter), the output bank holds reciprocal scale and zero point of
// each group of the activation being produced. The paper counts one such
// 144-bit bank; keeping a second one for the produced activation is this
// design's choice. It also holds the LNQ BRAM table (lnq_lut).
// Parameter writes arrive on the configuration bus at 0x40..0x4F:
//   0x40+g input scale (Q8.24)  0x44+g input zero point
//   0x48+g output 1/scale (Q16.16)  0x4C+g output zero point
//
// Timing: out_valid follows an element marked in_last by 5 cycles
// (3 dequantization stages, 1 activation stage, 1 quantization stage).
// With Softmax the results of a tile leave as one burst after the whole
// row has arrived (see softmax_unit).
module quant_processor
  import ahcq_pkg::*;
#(
  parameter int unsigned LANES     = 128,
  parameter int unsigned LUT_PAGES = 100,
  localparam int unsigned PW = (LUT_PAGES > 1) ? $clog2(LUT_PAGES) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  cfg_t                          cfg,
  input  logic [2:0][CH_W-1:0]          out_bound,
  input  logic [NCODES-2:0][FX_W-1:0]   thr,
  // parameter bank writes
  input  logic                          cfg_we,
  input  logic [7:0]                    cfg_addr,
  input  logic [31:0]                   cfg_wdata,
  // zero point for the PE array
  input  logic [1:0]                    pe_g,
  output logic [ZP_W-1:0]               pe_azp,
  // LNQ table load
  input  logic                          lut_we,
  input  logic [PW-1:0]                 lut_wpage,
  input  logic [LUT_AW-1:0]             lut_waddr,
  input  logic [LUT_W-1:0]              lut_wdata,
  // elements from the reorder buffer
  input  logic                          in_valid,
  input  logic signed [MACC_W-1:0]      in_mul,
  input  logic signed [SACC_W-1:0]      in_sh,
  input  logic [1:0]                    in_g,
  input  logic                          in_first,
  input  logic                          in_last,
  input  logic [CH_W-1:0]               in_dest,
  input  logic [SCALE_W-1:0]            in_sw,
  // results towards the output buffer
  output logic                          out_valid,
  output logic [31:0]                   out_data,
  output logic [CH_W-1:0]               out_dest,
  // statistics
  output logic                          lut_read,
  output logic                          q_log
);

  // ---- parameter banks ----
  logic     in_we, out_we;
  qparam_t  in_qp_dq, in_qp_pe, out_qp, out_qp_unused;
  logic [1:0] dq_g, q_g;

  assign in_we  = cfg_we && (cfg_addr[7:3] == 5'b0100_0);
  assign out_we = cfg_we && (cfg_addr[7:3] == 5'b0100_1);

  quant_param_regs u_in_bank (
    .clk(clk), .rst_n(rst_n),
    .we(in_we), .idx(cfg_addr[1:0]), .fld(cfg_addr[2]), .wdata(cfg_wdata),
    .rd_a(dq_g), .qp_a(in_qp_dq),
    .rd_b(pe_g), .qp_b(in_qp_pe)
  );

  quant_param_regs u_out_bank (
    .clk(clk), .rst_n(rst_n),
    .we(out_we), .idx(cfg_addr[1:0]), .fld(cfg_addr[2]), .wdata(cfg_wdata),
    .rd_a(q_g), .qp_a(out_qp),
    .rd_b(2'd0), .qp_b(out_qp_unused)
  );

  assign pe_azp = in_qp_pe.zp;

  // ---- dequantization with the LNQ table ----
  logic              lut_re;
  logic [LUT_AW-1:0] lut_addr;
  logic [LUT_W-1:0]  lut_data;
  logic                    dq_valid;
  logic signed [FX_W-1:0]  dq_y;
  logic [CH_W-1:0]         dq_dest;

  lnq_lut #(.PAGES(LUT_PAGES)) u_lut (
    .clk(clk), .we(lut_we), .wpage(lut_wpage), .waddr(lut_waddr), .wdata(lut_wdata),
    .re(lut_re), .page(cfg.lut_page[PW-1:0]), .addr(lut_addr), .rdata(lut_data)
  );

  dequant_unit u_dq (
    .clk(clk), .rst_n(rst_n), .mode(cfg.mm_mode), .s1(cfg.s1), .s2(cfg.s2),
    .in_valid(in_valid), .in_mul(in_mul), .in_sh(in_sh), .in_g(in_g),
    .in_first(in_first), .in_last(in_last), .in_dest(in_dest), .in_sw(in_sw),
    .g_sel(dq_g), .g_scale(in_qp_dq.scale),
    .lut_re(lut_re), .lut_addr(lut_addr), .lut_data(lut_data),
    .out_valid(dq_valid), .out_y(dq_y), .out_dest(dq_dest)
  );

  assign lut_read = lut_re;

  // ---- activation function ----
  logic                   act_valid;
  logic signed [FX_W-1:0] act_y;
  logic [CH_W-1:0]        act_dest;

  logic                   fn_valid, sm_valid, sm_busy, is_sm;
  logic signed [FX_W-1:0] fn_y, sm_y;
  logic [CH_W-1:0]        fn_dest, sm_dest;

  assign is_sm = (cfg.act_mode == ACT_SOFTMAX);

  act_unit u_act (
    .clk(clk), .rst_n(rst_n), .mode(cfg.act_mode),
    .in_valid(dq_valid && !is_sm), .in_x(dq_y), .in_dest(dq_dest),
    .out_valid(fn_valid), .out_y(fn_y), .out_dest(fn_dest)
  );

  softmax_unit #(.N(LANES)) u_sm (
    .clk(clk), .rst_n(rst_n), .pass(cfg.sm_pass),
    .in_valid(dq_valid && is_sm), .in_x(dq_y), .in_dest(dq_dest),
    .out_valid(sm_valid), .out_y(sm_y), .out_dest(sm_dest), .busy(sm_busy)
  );

  assign act_valid = fn_valid || sm_valid;
  assign act_y     = sm_valid ? sm_y : fn_y;
  assign act_dest  = sm_valid ? sm_dest : fn_dest;

  // ---- quantization ----
  logic q_is_log;

  quant_arith u_q (
    .clk(clk), .rst_n(rst_n), .mode(cfg.q_mode), .label_bits(cfg.out_label_bits),
    .s1(cfg.out_s1), .inv_s1(cfg.inv_s1), .inv_s2(cfg.inv_s2),
    .n_groups(cfg.out_n_groups), .bound(out_bound), .g_sel(q_g), .qp(out_qp),
    .thr(thr),
    .in_valid(act_valid), .in_y(act_y), .in_dest(act_dest),
    .out_valid(out_valid), .out_data(out_data), .out_dest(out_dest),
    .out_is_log(q_is_log)
  );

  assign q_log = out_valid && q_is_log;

endmodule
