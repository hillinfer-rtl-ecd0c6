// tb_int_to_fp16: checks the score conversion against a real-number model and
// checks that it is monotone (never reverses the order of two scores).
module tb_int_to_fp16;
  import tb_ref_pkg::*;
  logic signed [31:0] a;
  logic [4:0]         sh;
  logic [15:0]        h;
  int checks = 0, failures = 0;

  int_to_fp16 dut (.a(a), .sh(sh), .h(h));

  function automatic real h2r(logic [15:0] v);
    return fp16_to_real(v);
  endfunction

  task automatic check1(longint av, int sv);
    logic [15:0] e;
    a = 32'(av); sh = 5'(sv);
    #1;
    e = ref_i2h(av, sv);
    checks++;
    if (h !== e) begin
      failures++;
      if (failures < 10) $display("FAIL a=%0d sh=%0d h=%h exp=%h", av, sv, h, e);
    end
  endtask

  initial begin
    logic [15:0] h1, h2;
    longint a1, a2;
    check1(0, 0);
    check1(1, 0);
    check1(-1, 0);
    check1(65504, 0);
    check1(65535, 0);           // truncates to 65504
    check1(65536, 0);           // saturates
    check1(-(64'sd1 <<< 31), 0);     // saturates negative
    check1(-(64'sd1 <<< 31), 31);    // -1.0
    check1(3, 31);              // subnormal
    check1(2047, 24);
    for (int i = 0; i < 20000; i++) begin
      automatic longint v = longint'($signed($urandom)) >>> $urandom_range(0, 31);
      check1(v, $urandom_range(0, 31));
    end
    // monotonicity at a fixed shift
    for (int i = 0; i < 5000; i++) begin
      automatic int s = $urandom_range(0, 20);
      a1 = longint'($signed($urandom)) >>> $urandom_range(0, 31);
      a2 = a1 + $urandom_range(0, 1000);
      if (a2 > 2147483647) a2 = 2147483647;
      a = 32'(a1); sh = 5'(s); #1; h1 = h;
      a = 32'(a2); #1; h2 = h;
      checks++;
      if (h2r(h1) > h2r(h2)) begin
        failures++;
        $display("FAIL order a1=%0d a2=%0d", a1, a2);
      end
    end
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
