// tb_lnq_lut: LNQ table pages.
// Fills a few pages of a 4-page table with a value that encodes page and
// address, reads random entries back and checks value and one-cycle latency.
module tb_lnq_lut;
  import ahcq_pkg::*;
  localparam int PAGES = 4;
  logic clk = 0, we = 0, re = 0;
  logic [1:0] wpage = '0, page = '0;
  logic [LUT_AW-1:0] waddr = '0, addr = '0;
  logic [LUT_W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  lnq_lut #(.PAGES(PAGES)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] val(int p, int a);
    return 32'(p * 1000003 + a * 7919 + 17) ^ 32'h5a5a_0000;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < PAGES; p++) for (int a = 0; a < 1024; a++) begin
      @(negedge clk); we = 1; wpage = 2'(p); waddr = 10'(a); wdata = val(p, a);
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 300; t++) begin
      automatic int p = $urandom_range(0, PAGES - 1), a = $urandom_range(0, 1023);
      @(negedge clk); re = 1; page = 2'(p); addr = 10'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata != val(p, a)) begin failures++; $display("FAIL page %0d addr %0d", p, a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
