// mult_pe_lane: 8-input integer multiplier-accumulator PE lane.
//
// One lane computes one output channel. Every valid beat it multiplies PE_IN
// signed activation operands by PE_IN signed weights, adds the products in an
// adder tree and adds the tree's sum to an integer accumulator (Fig. 11 of the
// paper: x8 multipliers, adder tree, accumulator register with feedback).
// A weight whose element the MSB router did not send to this lane type is
// gated to zero (w_en).
//
// Interface/timing: 'first' marks the first beat of a reduction (the
// accumulator restarts from that beat's sum), 'last' its final beat. The
// accumulated result is on 'acc' from the cycle after the last beat, with
// 'done' high for that one cycle, and stays until the next valid beat.
// Accumulator width MACC_W is this design's choice (enough for 4-bit x 5-bit
// products over 512 beats).
module mult_pe_lane
  import ahcq_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       valid,
  input  logic                       first,
  input  logic                       last,
  input  logic signed [ABITS:0]      a     [PE_IN],
  input  logic signed [WBITS-1:0]    w     [PE_IN],
  input  logic [PE_IN-1:0]           w_en,
  output logic signed [MACC_W-1:0]   acc,
  output logic                       done
);

  logic signed [MACC_W-1:0] tree_sum;

  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < PE_IN; i++) begin
      if (w_en[i]) tree_sum += MACC_W'(a[i] * w[i]);
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
