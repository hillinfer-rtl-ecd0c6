// tb_hill_longctx: the largest configuration of the evaluation, run at the
// kernel's default size: a 36K-token cold pool (36 x 1024 tokens) scored at
// d = 5120, the hidden size of a 13B model, in INT8 from a clean DRAM stream.
// Every tuple is checked and the request must take one cycle per beat
// (36864 x 161 cycles plus a small constant); the FP16 K and V rows of the 32
// best-scoring tokens are then fetched back and checked. The 7B-model cases
// (d = 4096) and the shorter OPT and accuracy workloads differ only in size
// and are covered by the same path. The body is tb_kernel_harness; an outer
// watchdog here ends the run if the harness's own one were ever outlasted.
module tb_hill_longctx;
  tb_kernel_harness #(.FULL(1'b1), .LANES(hill_pkg::LANES_DEF), .D_MAX(hill_pkg::D_MAX_DEF),
                      .BLOCK_TOKENS(hill_pkg::BLOCK_TOK_DEF), .LONG_TOKENS(36 * 1024)) h ();
  initial begin
    repeat (9_000_000) @(posedge h.clk);
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures + 1);
    $finish;
  end
endmodule
