// tb_adder_tree: random signed inputs with random stalls (en low); every sum is
// compared with one computed in the testbench, in order, and with en held high
// the latency must be exactly ceil(log2 N) cycles.
module tb_adder_tree;
  localparam int N = 32, IW = 16, LEVELS = 5, OW = IW + LEVELS;
  logic clk = 0;
  always #5 clk = !clk;
  logic rst_n = 0, en = 1, in_valid = 0;
  logic [N*IW-1:0] in_data = '0;
  logic [7:0] in_sb = '0;
  logic out_valid;
  logic signed [OW-1:0] out_sum;
  logic [7:0] out_sb;
  int checks = 0, failures = 0;
  longint expq[$];
  int     tagq[$];
  int     tin[$];
  int     cyc = 0;
  bit     stalls = 1;

  adder_tree #(.N(N), .IW(IW), .SBW(8)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  // scoreboard: an output is consumed on a cycle with en high
  always @(posedge clk) if (rst_n && en && out_valid) begin
    automatic longint e = expq.pop_front();
    automatic int t = tagq.pop_front();
    automatic int t0 = tin.pop_front();
    checks++;
    if (longint'(out_sum) != e || int'(out_sb) != t) begin
      failures++;
      if (failures < 10) $display("FAIL sum=%0d exp=%0d", out_sum, e);
    end
    if (!stalls) begin
      checks++;
      if (cyc - t0 != LEVELS) begin
        failures++;
        $display("FAIL latency %0d", cyc - t0);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (n == 2000) begin
        stalls = 0;
        en = 1;
        in_valid = 0;
        repeat (12) @(negedge clk);
      end
      en = stalls ? ($urandom_range(0, 3) != 0) : 1'b1;
      in_valid = ($urandom_range(0, 4) != 0);
      for (int k = 0; k < N; k++) in_data[k*IW +: IW] = IW'($urandom);
      in_sb = 8'($urandom);
      if (in_valid && en) begin
        automatic longint s = 0;
        for (int k = 0; k < N; k++) s += longint'($signed(in_data[k*IW +: IW]));
        expq.push_back(s);
        tagq.push_back(int'(in_sb));
        tin.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0; en = 1;
    repeat (10) @(negedge clk);
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
