// tb_token_accumulator: feeds rows of random length (1..8 beats) of random
// partial sums, with gaps and stalls, and checks each row's total and position.
module tb_token_accumulator;
  logic clk = 0;
  always #5 clk = !clk;
  logic rst_n = 0, en = 1, in_valid = 0, in_last = 0;
  logic signed [20:0] in_sum = '0;
  logic [15:0] in_pos = '0;
  logic out_valid;
  logic signed [31:0] out_score;
  logic [15:0] out_pos;
  int checks = 0, failures = 0;
  longint expq[$];
  int posq[$];

  token_accumulator #(.IW(21), .W(32), .PW(16)) dut (.*);

  always @(posedge clk) if (rst_n && en && out_valid) begin
    automatic longint e = expq.pop_front();
    automatic int p = posq.pop_front();
    checks++;
    if (longint'(out_score) != e || int'(out_pos) != p) begin
      failures++;
      if (failures < 10) $display("FAIL score=%0d exp=%0d pos=%0d exp=%0d", out_score, e, out_pos, p);
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 1000; r++) begin
      automatic int len = $urandom_range(1, 8);
      automatic longint s = 0;
      automatic int p = $urandom_range(0, 65534);
      for (int b = 0; b < len; b++) begin
        // idle or stalled cycles between beats
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          in_valid = 0;
          en = $urandom_range(0, 1);
        end
        @(negedge clk);
        en = 1;
        in_valid = 1;
        in_sum = 21'($urandom);
        in_last = (b == len - 1);
        in_pos = 16'(p);
        s += longint'(in_sum);
      end
      expq.push_back(s);
      posq.push_back(p);
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (expq.size() != 0) failures++;
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
