// tb_dot_product_unit: streams random FP16 key beats against random query
// integers in both precisions; each partial inner product is compared with
// sum(ref_quant(key) * q) and the latency (1 + log2 LANES) is checked.
module tb_dot_product_unit;
  import hill_pkg::*;
  import tb_ref_pkg::*;
  localparam int LANES = 32, LEVELS = 5, OW = 16 + LEVELS;
  logic clk = 0;
  always #5 clk = !clk;
  logic rst_n = 0, en = 1, in_valid = 0;
  logic [LANES*16-1:0] in_key = '0;
  logic [LANES*8-1:0]  in_q = '0;
  logic [16:0] in_sb = '0;
  prec_e prec = PREC_INT8;
  logic signed [5:0] k_shift = 6'sd4;
  logic out_valid;
  logic signed [OW-1:0] out_sum;
  logic [16:0] out_sb;
  int checks = 0, failures = 0, cyc = 0;
  longint expq[$];
  int tin[$];

  dot_product_unit #(.LANES(LANES), .SBW(17)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && en && out_valid) begin
    automatic longint e = expq.pop_front();
    automatic int t0 = tin.pop_front();
    checks += 2;
    if (longint'(out_sum) != e) begin
      failures++;
      if (failures < 10) $display("FAIL sum=%0d exp=%0d", out_sum, e);
    end
    if (cyc - t0 != LEVELS + 1) begin
      failures++;
      $display("FAIL latency %0d", cyc - t0);
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (n % 1000 == 0) begin
        // change mode only while the pipeline is empty
        in_valid = 0;
        repeat (LEVELS + 3) @(negedge clk);
        prec = prec_e'((n / 1000) % 2);
        k_shift = (prec == PREC_INT4) ? 6'sd0 : 6'sd4;
      end
      in_valid = ($urandom_range(0, 3) != 0);
      for (int l = 0; l < LANES; l++) begin
        in_key[16*l +: 16] = gen_fp16($urandom, 10, 19);
        in_q[8*l +: 8] = (prec == PREC_INT4) ? 8'($signed(4'($urandom)) ) : 8'($urandom_range(0, 254) - 127);
      end
      if (in_valid) begin
        automatic longint s = 0;
        for (int l = 0; l < LANES; l++)
          s += longint'(ref_quant(in_key[16*l +: 16], int'(k_shift), prec == PREC_INT4)) *
               longint'($signed(in_q[8*l +: 8]));
        expq.push_back(s);
        tin.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (12) @(negedge clk);
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
