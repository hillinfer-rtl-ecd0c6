// tb_fp16_quant: checks the FP16 -> INT8/INT4 cast against a real-number model.
// Random FP16 bit patterns (all exponents, subnormals, Inf, NaN), random shifts
// and both precisions; each result is compared with tb_ref_pkg::ref_quant.
module tb_fp16_quant;
  import hill_pkg::*;
  import tb_ref_pkg::*;
  logic [15:0]       x;
  logic signed [5:0] shift;
  prec_e             prec;
  logic signed [7:0] q;
  int checks = 0, failures = 0;

  fp16_quant dut (.x(x), .shift(shift), .prec(prec), .q(q));

  task automatic check1(logic [15:0] xv, int sv, prec_e pv);
    int exp_q;
    x = xv; shift = 6'(sv); prec = pv;
    #1;
    exp_q = ref_quant(xv, sv, pv == PREC_INT4);
    checks++;
    if (int'(q) != exp_q) begin
      failures++;
      if (failures < 10) $display("FAIL x=%h shift=%0d prec=%0d q=%0d exp=%0d", xv, sv, pv, q, exp_q);
    end
  endtask

  initial begin
    // directed: 1.0, 0.5 rounding, saturation, Inf, NaN, zero, subnormal
    check1(16'h3C00, 0, PREC_INT8);   // 1.0 -> 1
    check1(16'h3800, 0, PREC_INT8);   // 0.5 -> 1 (half away)
    check1(16'hB800, 0, PREC_INT8);   // -0.5 -> -1
    check1(16'h3C00, 7, PREC_INT8);   // 128 -> 127
    check1(16'h3C00, 3, PREC_INT4);   // 8 -> 7
    check1(16'h7C00, 0, PREC_INT8);   // +Inf
    check1(16'hFC00, 0, PREC_INT4);   // -Inf
    check1(16'h7E00, 0, PREC_INT8);   // NaN
    check1(16'h0000, 5, PREC_INT8);
    check1(16'h0001, 31, PREC_INT8);  // subnormal * 2^31
    for (int i = 0; i < 20000; i++)
      check1(16'($urandom), int'($signed(6'($urandom))), prec_e'($urandom_range(0, 1)));
    // values near the useful range
    for (int i = 0; i < 20000; i++)
      check1(gen_fp16($urandom, 10, 20), $urandom_range(0, 8) - 4, prec_e'($urandom_range(0, 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
