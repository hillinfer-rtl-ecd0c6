// tb_hill_eval_kernel: end-to-end test of the evaluation kernel at reduced size
// (8 lanes, d up to 64, 16-token Score Blocks) so that many requests, and every
// mechanism, fit in a short simulation. The body is tb_kernel_harness.
module tb_hill_eval_kernel;
  tb_kernel_harness #(.FULL(1'b0), .LANES(8), .D_MAX(64), .BLOCK_TOKENS(16), .SCALE(2)) h ();
endmodule
