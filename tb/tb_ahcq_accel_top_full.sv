// tb_ahcq_accel_top_full: the end-to-end testbench at the accelerator's
// default size.
//
// Runs tb_ahcq_accel_top with 128 lanes, which makes it instantiate
// ahcq_accel_top with no parameter overrides (128 lanes, 1024-word IA buffer,
// 512-word weight buffer, 100 LNQ table pages), and with a reduction length of
// 96 beats = 768 input channels, the embedding width of the SAM ViT-B image
// encoder. All tiles, checks and mechanism counts of the small
// testbench apply unchanged; each tile takes 96 + 4 + 128 x groups + 7 cycles
// from start to done, plus 2 x 128 + 34 (or + 1 in a statistics pass) with
// Softmax.
module tb_ahcq_accel_top_full;
  tb_ahcq_accel_top #(.L(128), .NB(96)) u_tb ();
endmodule
