// shift_pe_lane: 8-input bit-shift accumulator PE lane ("decimal" output).
//
// For power-of-two (log) activation codes the product x*w with
// x = s1 * 2^-code reduces to w >> code. The lane shifts each of its PE_IN
// signed weights right by the activation's code, keeping SFRAC fractional
// bits so that no bit is lost for codes up to 15, adds the terms in an adder
// tree and accumulates them in a fixed-point accumulator (the paper's
// "decimal accumulator"). Elements not routed to this lane (w_en = 0)
// contribute nothing.
//
// Interface/timing as in mult_pe_lane: 'first' restarts the accumulator,
// 'done' pulses the cycle after the 'last' beat and 'acc' (SFRAC fractional
// bits) holds the result. The fixed-point format is this design's choice.
module shift_pe_lane
  import ahcq_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       valid,
  input  logic                       first,
  input  logic                       last,
  input  logic [ABITS-1:0]           sh    [PE_IN],
  input  logic signed [WBITS-1:0]    w     [PE_IN],
  input  logic [PE_IN-1:0]           w_en,
  output logic signed [SACC_W-1:0]   acc,
  output logic                       done
);

  logic signed [SACC_W-1:0] tree_sum;

  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < PE_IN; i++) begin
      logic signed [SACC_W-1:0] wx;
      wx = SACC_W'(w[i]) <<< SFRAC;
      if (w_en[i]) tree_sum += (wx >>> sh[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      done <= 1'b0;
    end else begin
      done <= valid && last;
      if (valid) acc <= (first ? '0 : acc) + tree_sum;
    end
  end

endmodule
