// tb_workload_sam_b_mlp2: workload testbench for the widest SAM-B linear layer.
//
// The second MLP layer of the SAM ViT-B image encoder reduces over 3072
// channels (the MLP width, 4 x 768), which is 384 beats of 8 codes. This
// testbench runs every tile of the end-to-end testbench (CAG, HLUQ after
// GELU, LNQ, Softmax, all quantizers) on the accelerator at its default size
// (128 lanes) with that reduction length, so each tile computes 128 output
// channels of one token with K = 3072. The layer sizes are those of the
// public ViT-B configuration; the same checks and mechanism counts apply.
module tb_workload_sam_b_mlp2;
  tb_ahcq_accel_top #(.L(128), .NB(384)) u_tb ();

  // Outer watchdog, a backstop behind the inner one (400000 cycles): counts
  // a failure, reports and stops the run.
  initial begin
    repeat (500000) @(posedge u_tb.clk);
    $display("TB_RESULT checks=%0d failures=%0d", u_tb.checks, u_tb.failures + 1);
    $finish;
  end
endmodule
