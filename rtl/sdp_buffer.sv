// sdp_buffer: on-chip BRAM buffer with one write port and one read port.
//
// The accelerator keeps its operands in BRAM buffers between the off-chip
// DRAM and the processing core: the input-activation (IA) buffer, the weight
// buffer, the per-channel weight-scale store and the output buffer are all
// instances of this module with different widths and depths. The paper names
// these buffers; their organisation (simple dual port, one-cycle registered
// read, write-first is not guaranteed) is this design's choice, written so
// that synthesis maps it onto block RAM.
//
// Timing: a write with we=1 lands at the rising edge. A read with re=1 at
// edge t presents mem[raddr] on rdata after that edge; rdata holds its value
// while re=0. Reading and writing the same address in one cycle returns the
// old word.
module sdp_buffer #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
