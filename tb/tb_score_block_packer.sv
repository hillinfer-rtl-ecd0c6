// tb_score_block_packer: pushes requests of random length through the packer
// with random input gaps and random output backpressure. Every output beat is
// compared with the tuples expected in order, blocks must end with out_last
// after BLOCK_TOKENS/TPB beats, the flushed final block must be padded with
// pos=0xFFFF/score=-Inf, and the case of both buffers full must occur.
module tb_score_block_packer;
  import hill_pkg::*;
  localparam int BT = 64, TPB = 16, BEATS = BT / TPB;
  logic clk = 0;
  always #5 clk = !clk;
  logic rst_n = 0, in_valid = 0, flush = 0, out_ready = 0;
  logic in_ready, out_valid, out_last, idle;
  tuple_t in_tuple = '0;
  logic [TPB*32-1:0] out_data;
  int checks = 0, failures = 0, both_full = 0, beat_in_block = 0;
  logic [31:0] expq[$];

  score_block_packer #(.BLOCK_TOKENS(BT), .TPB(TPB)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) both_full++;
    if (out_valid && out_ready) begin
      for (int j = 0; j < TPB; j++) begin
        automatic logic [31:0] e = (expq.size() != 0) ? expq.pop_front() : 32'hDEAD_BEEF;
        checks++;
        if (out_data[32*j +: 32] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL beat slot %0d got %h exp %h", j, out_data[32*j +: 32], e);
        end
      end
      checks++;
      if (out_last != (beat_in_block == BEATS - 1)) failures++;
      beat_in_block = (beat_in_block + 1) % BEATS;
    end
  end

  bit hold_out = 0;
  always @(negedge clk) out_ready <= !hold_out && ($urandom_range(0, 2) == 0);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      automatic int n = (r % 4 == 0) ? BT * 3 : $urandom_range(1, 300);
      hold_out = (r % 4 == 0);
      fork begin repeat (400) @(negedge clk); hold_out = 0; end join_none
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        while ($urandom_range(0, 5) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_tuple = '{score: 16'($urandom), pos: 16'($urandom_range(0, 65534))};
        expq.push_back(in_tuple);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk) in_valid = 0;
      // padding the controller would see
      for (int k = n % BT; k != 0 && k < BT; k++) expq.push_back({FP16_NEG_INF, PAD_POS});
      flush = 1;
      @(negedge clk) flush = 0;
      while (!idle) @(negedge clk);
      checks++;
      if (expq.size() != 0) begin
        failures++;
        $display("FAIL %0d tuples left after request %0d", expq.size(), r);
        expq.delete();
      end
    end
    checks++;
    if (both_full == 0) begin
      failures++;
      $display("FAIL both buffers never full");
    end
    $display("both-full stall cycles: %0d", both_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
