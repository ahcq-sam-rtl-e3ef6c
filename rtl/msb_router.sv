// msb_router: the "MSB index" demultiplexer in front of the PE lanes.
//
// Each beat brings PE_IN activation codes. In HLUQ mode the code space is split
// by the 2^-n rule: a code whose top n bits are all zero is a power-of-two
// (log) code, any other code is a uniform code, so the top n bits act as a
// label. Log codes are sent to the bit-shift lanes as a shift amount; uniform
// codes are sent to the multiplier lanes as an integer operand. In HLUQ the
// bit-shift lane also receives every uniform element with shift 0, which
// accumulates the sum of weights needed by the "+ s1" term of the uniform
// branch (x ~ s2*x_q + s1); that detail is this design's choice, the paper
// only says the two branches are fused at dequantization.
// In uniform (CAG) and LNQ mode every element goes to the multiplier lanes as
// (code - zero point) and the bit-shift lanes are idle.
//
// Purely combinational; one beat per cycle. label_bits must be 1..3.
module msb_router
  import ahcq_pkg::*;
(
  input  mm_mode_e                   mode,
  input  logic [1:0]                 label_bits,
  input  logic [ZP_W-1:0]            azp,                 // zero point of the current group
  input  logic [PE_IN-1:0][ABITS-1:0] code,
  output logic signed [ABITS:0]      mul_a   [PE_IN],     // operand for the multiplier lanes
  output logic [ABITS-1:0]           sh_amt  [PE_IN],     // right shift for the bit-shift lanes
  output logic [PE_IN-1:0]           to_mul,              // element routed to a multiplier
  output logic [PE_IN-1:0]           to_shift             // element routed to a bit-shifter
);

  always_comb begin
    for (int i = 0; i < PE_IN; i++) begin
      logic [ABITS-1:0] lbl;
      lbl = code[i] >> (ABITS - int'(label_bits));
      mul_a[i]  = '0;
      sh_amt[i] = '0;
      to_mul[i]   = 1'b0;
      to_shift[i] = 1'b0;
      if (mode == MM_HLUQ) begin
        to_shift[i] = 1'b1;
        if (lbl == '0) begin
          sh_amt[i] = code[i];                    // power-of-two code: s1 * 2^-code
        end else begin
          to_mul[i] = 1'b1;
          mul_a[i]  = signed'({1'b0, code[i]});   // uniform code: s2 * code + s1
        end
      end else begin
        to_mul[i] = 1'b1;
        mul_a[i]  = signed'({1'b0, code[i]}) - signed'({1'b0, azp});
      end
    end
  end

endmodule
