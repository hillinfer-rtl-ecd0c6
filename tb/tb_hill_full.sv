// tb_hill_full: end-to-end test of the evaluation kernel at its default size
// (32 lanes of FP16 per beat, d up to 5120, 64-token Score Blocks). It scores a
// 2000-token cold pool at d = 4096 in INT8 and checks the one-beat-per-cycle
// rate, then runs a d = 5120 INT4 request under DRAM gaps and output
// backpressure, a request with saturating scores and an empty request. The
// FP16 K and V rows of the 8 best-scoring tokens of the first request are
// fetched back and checked.
module tb_hill_full;
  tb_kernel_harness #(.FULL(1'b1), .LANES(hill_pkg::LANES_DEF), .D_MAX(hill_pkg::D_MAX_DEF),
                      .BLOCK_TOKENS(hill_pkg::BLOCK_TOK_DEF)) h ();
endmodule
