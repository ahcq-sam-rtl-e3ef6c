// tb_workload_k4096: workload testbench for the longest reduction that fits.
//
// 4096 input channels = 512 beats fill the default weight buffer exactly.
// That is the length of the score x Value product of SAM-B's global-attention
// blocks (64 x 64 = 4096 keys) and of the second MLP layer of SAM-L
// (4 x 1024). All tiles of the end-to-end testbench run on the accelerator at
// its default size (128 lanes) with this reduction length.
module tb_workload_k4096;
  tb_ahcq_accel_top #(.L(128), .NB(512)) u_tb ();

  // Outer watchdog, a backstop behind the inner one (400000 cycles): counts
  // a failure, reports and stops the run.
  initial begin
    repeat (500000) @(posedge u_tb.clk);
    $display("TB_RESULT checks=%0d failures=%0d", u_tb.checks, u_tb.failures + 1);
    $finish;
  end
endmodule
