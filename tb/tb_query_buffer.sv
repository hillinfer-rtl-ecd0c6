// tb_query_buffer: writes FP16 query beats at random addresses (both
// precisions), reads them back through the synchronous port and compares each
// lane with the reference cast; also checks that rd_en low holds the output.
module tb_query_buffer;
  import hill_pkg::*;
  import tb_ref_pkg::*;
  localparam int LANES = 32, DEPTH = 160, AW = 8;
  logic clk = 0;
  always #5 clk = !clk;
  logic               wr_en = 0, rd_en = 0;
  logic [AW-1:0]      wr_addr = '0, rd_addr = '0;
  logic [LANES*16-1:0] wr_data = '0;
  logic signed [5:0]  q_shift = '0;
  prec_e              prec = PREC_INT8;
  logic [LANES*8-1:0] rd_data;
  int checks = 0, failures = 0;
  int exp_q [DEPTH][LANES];

  query_buffer #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      prec    = prec_e'(pass);
      q_shift = 6'(pass ? 0 : 4);
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = AW'(a);
        for (int l = 0; l < LANES; l++) begin
          wr_data[16*l +: 16] = gen_fp16($urandom, 10, 19);
          exp_q[a][l] = ref_quant(wr_data[16*l +: 16], int'(q_shift), pass == 1);
        end
      end
      @(negedge clk) wr_en = 0;
      for (int n = 0; n < 400; n++) begin
        automatic int a = $urandom_range(0, DEPTH - 1);
        @(negedge clk); rd_en = 1; rd_addr = AW'(a);
        @(negedge clk); rd_en = 0;
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (int'($signed(rd_data[8*l +: 8])) != exp_q[a][l]) begin
            failures++;
            if (failures < 10) $display("FAIL addr=%0d lane=%0d got=%0d exp=%0d", a, l, $signed(rd_data[8*l +: 8]), exp_q[a][l]);
          end
        end
        // hold while rd_en is low
        rd_addr = AW'((a + 1) % DEPTH);
        @(negedge clk);
        checks++;
        if (int'($signed(rd_data[7:0])) != exp_q[a][0]) failures++;
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
