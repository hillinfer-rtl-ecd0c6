// tb_eval_ctrl: drives the controller through requests of random size with
// random tuple arrival and packer drain times. Checks the latched
// configuration, one fetch_start per request, flush exactly once after the
// last tuple, done only after the packer is idle, and the token count.
module tb_eval_ctrl;
  import hill_pkg::*;
  logic clk = 0;
  always #5 clk = !clk;
  logic rst_n = 0, start = 0, tuple_taken = 0, packer_idle = 1;
  req_cfg_t cfg_in = '0, cfg;
  logic fetch_start, flush, busy, done;
  logic [CNT_W-1:0] tokens_scored;
  int checks = 0, failures = 0, n_fetch = 0, n_flush = 0, n_done = 0;

  eval_ctrl dut (.*);

  always @(posedge clk) if (rst_n) begin
    n_fetch += int'(fetch_start);
    n_flush += int'(flush);
    n_done  += int'(done);
    if (done && !packer_idle) begin
      failures++;
      $display("FAIL done while packer busy");
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 50; r++) begin
      automatic int n = (r == 3) ? 0 : $urandom_range(1, 100);
      automatic int drain;
      n_fetch = 0; n_flush = 0; n_done = 0;
      @(negedge clk);
      cfg_in = '0;
      cfg_in.num_slots = CNT_W'(n);
      cfg_in.key_base = {32'($urandom), 32'($urandom)};
      cfg_in.dim_beats = 16'($urandom_range(1, 160));
      start = 1;
      @(negedge clk) start = 0;
      checks++;
      if (cfg != cfg_in || !busy) begin failures++; $display("FAIL cfg latch"); end
      cfg_in = '1;   // must not disturb the running request
      packer_idle = 0;
      for (int k = 0; k < n; k++) begin
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        tuple_taken = 1;
        @(negedge clk) tuple_taken = 0;
        checks++;
        if (k < n - 1 && n_flush != 0) begin failures++; $display("FAIL early flush"); end
      end
      drain = $urandom_range(0, 20);
      repeat (drain) @(negedge clk);
      checks++;
      if (n_done != 0) begin failures++; $display("FAIL done before drain"); end
      packer_idle = 1;
      repeat (4) @(negedge clk);
      checks++;
      if (n_fetch != 1 || n_flush != 1 || n_done != 1 || busy || int'(tokens_scored) != n) begin
        failures++;
        $display("FAIL r=%0d fetch=%0d flush=%0d done=%0d busy=%0d tok=%0d n=%0d",
                 r, n_fetch, n_flush, n_done, busy, tokens_scored, n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
