// tb_key_fetch: runs requests with random base, slot count and row length under
// random request backpressure; checks every address and length, the request
// count, and that requests go out one per cycle when the memory always accepts.
module tb_key_fetch;
  import hill_pkg::*;
  logic clk = 0;
  always #5 clk = !clk;
  logic rst_n = 0, start = 0, req_ready = 0;
  logic [ADDR_W-1:0] key_base = '0;
  logic [CNT_W-1:0]  num_slots = '0;
  logic [15:0]       dim_beats = '0;
  logic              req_valid;
  logic [ADDR_W-1:0] req_addr;
  logic [16:0]       req_beats;
  int checks = 0, failures = 0, seen = 0;
  logic [ADDR_W-1:0] exp_addr;
  bit always_ready = 0;

  key_fetch #(.BEAT_BYTES(64)) dut (.*);

  always @(negedge clk) req_ready <= always_ready || ($urandom_range(0, 2) != 0);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      automatic int cyc0;
      always_ready = (r % 3 == 0);
      @(negedge clk);
      key_base = {32'($urandom), 32'($urandom & 32'hFFFF_FFC0)};
      num_slots = CNT_W'($urandom_range(0, 200));
      dim_beats = 16'($urandom_range(1, 160));
      start = 1;
      @(negedge clk) start = 0;
      seen = 0;
      exp_addr = key_base;
      cyc0 = 0;
      while (seen < int'(num_slots) && cyc0 < 5000) begin
        @(posedge clk);
        cyc0++;
        if (req_valid && req_ready) begin
          checks++;
          if (req_addr != exp_addr || req_beats != 17'(dim_beats) + 1) begin
            failures++;
            if (failures < 10) $display("FAIL addr %h exp %h beats %0d", req_addr, exp_addr, req_beats);
          end
          exp_addr += (ADDR_W'(dim_beats) + 1) * 64;
          seen++;
        end
      end
      @(posedge clk);
      checks++;
      if (req_valid || seen != int'(num_slots)) begin
        failures++;
        $display("FAIL count %0d of %0d", seen, num_slots);
      end
      if (always_ready) begin
        checks++;
        if (cyc0 != int'(num_slots)) begin
          failures++;
          $display("FAIL rate: %0d cycles for %0d requests", cyc0, num_slots);
        end
      end
    end
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
