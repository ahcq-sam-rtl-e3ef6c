// lnq_lut: BRAM look-up table for LNQ dequantization.
//
// Logarithmic nonlinear quantization maps attention scores through
// ln(1 + a*x)/ln(1 + a) before uniform quantization, so dequantization needs
// the inverse ((1 + a)^(s*(q - z)) - 1)/a. Instead of computing it, the
// accelerator reuses spare block RAM as a table filled offline: the integer
// result of the score x Value product is the address, and the entry is the
// dequantized value. Each attention layer has its own shape factor a and
// therefore its own page. Page address width 10 follows the paper's "page
// size smaller than a 10-bit address space"; 100 pages of 1024 x 32 bits make
// 3.2 Mb, the BRAM overhead the paper reports. Entry format (signed Q16.16)
// and page count are this design's choices.
//
// Timing: one registered read per cycle (re, page, addr -> rdata next cycle);
// a separate write port loads the table from the host.
module lnq_lut
  import ahcq_pkg::*;
#(
  parameter int unsigned PAGES = 100,
  localparam int unsigned PW = (PAGES > 1) ? $clog2(PAGES) : 1
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [PW-1:0]           wpage,
  input  logic [LUT_AW-1:0]       waddr,
  input  logic [LUT_W-1:0]        wdata,
  input  logic                    re,
  input  logic [PW-1:0]           page,
  input  logic [LUT_AW-1:0]       addr,
  output logic [LUT_W-1:0]        rdata
);

  localparam int unsigned DEPTH = PAGES << LUT_AW;

  logic [LUT_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[{wpage, waddr}] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[{page, addr}];
  end

endmodule
