// quant_param_regs: the CAG quantization-parameter register file.
//
// Channel-aware grouping clusters the channels of an activation into NGROUPS
// groups that share one scale and one zero point. The paper keeps these on
// chip in 144 register bits for four groups under 4-bit quantization; here
// that is NGROUPS x (32-bit scale + 4-bit zero point) = 144 flip-flops. The
// scale format is given by the user of the bank (Q8.24 for dequantization,
// Q16.16 reciprocal for quantization); this module only stores it.
//
// Interface: a write with we=1 sets field 'fld' (0 = scale, 1 = zero point)
// of group 'idx' at the clock edge. Two combinational read ports return the
// whole parameter set of groups rd_a and rd_b; the caller's group counter
// selects the group ("counter-based parameter switching"). Reset: scale 1.0
// in Q8.24 and zero point 0 for every group (this design's choice).
module quant_param_regs
  import ahcq_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic [1:0]          idx,
  input  logic                fld,
  input  logic [31:0]         wdata,
  input  logic [1:0]          rd_a,
  output qparam_t             qp_a,
  input  logic [1:0]          rd_b,
  output qparam_t             qp_b
);

  qparam_t regs [NGROUPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < NGROUPS; g++) begin
        regs[g].scale <= SCALE_W'(1) << SC_FRAC;
        regs[g].zp    <= '0;
      end
    end else if (we) begin
      if (fld == 1'b0) regs[idx].scale <= wdata[SCALE_W-1:0];
      else             regs[idx].zp    <= wdata[ZP_W-1:0];
    end
  end

  assign qp_a = regs[rd_a];
  assign qp_b = regs[rd_b];

endmodule
