// tb_sdp_buffer: self-checking test of the BRAM buffer.
// Fills the buffer with random words, reads every address back and compares
// with a model array, checks that rdata appears one cycle after re and holds
// while re is low, and that a same-cycle read of a written address returns
// the old word.
module tb_sdp_buffer;
  localparam int W = 16, D = 64;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sdp_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [W-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); re = 1; raddr = 6'(a);
      @(negedge clk); re = 0;
      check(rdata, model[a], $sformatf("read %0d", a));
      @(negedge clk);
      check(rdata, model[a], $sformatf("hold %0d", a));
    end
    // read and write of one address in the same cycle: old word comes out
    @(negedge clk); re = 1; raddr = 6'd7; we = 1; waddr = 6'd7; wdata = ~model[7];
    @(negedge clk); re = 0; we = 0;
    check(rdata, model[7], "read-during-write returns old word");
    model[7] = ~model[7];
    @(negedge clk); re = 1; raddr = 6'd7;
    @(negedge clk); re = 0;
    check(rdata, model[7], "new word after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
