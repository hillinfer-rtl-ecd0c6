// tb_kv_gather: sends random lists of selected slots (with gaps) and checks that
// the K row and then the V row of every slot come back in order, beat for
// beat, from the right addresses, with out_last only on the very last beat and
// done after it; memory gaps and output backpressure are random.
module tb_kv_gather;
  import hill_pkg::*;
  import tb_ref_pkg::*;
  localparam int DW = 64;   // 4 lanes
  logic clk = 0;
  always #5 clk = !clk;
  logic rst_n = 0, start = 0, id_valid = 0, id_last = 0, req_ready;
  logic [ADDR_W-1:0] key_base = '0, val_base = '0;
  logic [15:0] dim_beats = '0;
  logic [CNT_W-1:0] id_slot = '0;
  logic id_ready, req_valid, rd_valid, rd_ready, out_valid, out_last, busy, done;
  logic out_ready;
  logic [ADDR_W-1:0] req_addr;
  logic [16:0] req_beats;
  logic [DW-1:0] rd_data, out_data;
  int checks = 0, failures = 0;

  kv_gather #(.BEAT_BYTES(8), .DW(DW)) dut (.*);

  function automatic logic [DW-1:0] word(logic [ADDR_W-1:0] a, int b);
    return {mix(32'(a), 32'(a >> 32), 32'(b)), mix(32'(b), 32'(a), 32'hABCD)};
  endfunction

  // memory: in-order rows
  logic [ADDR_W-1:0] rq_addr[$];
  int rq_beats[$];
  int cur_b = 0;
  logic gap;
  always @(negedge clk) req_ready <= ($urandom_range(0, 3) != 0);
  always @(negedge clk) gap <= ($urandom_range(0, 4) == 0);
  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  assign rd_valid = (rq_addr.size() != 0) && !gap;
  assign rd_data  = (rq_addr.size() != 0) ? word(rq_addr[0], cur_b) : '0;
  always @(posedge clk) begin
    if (req_valid && req_ready) begin
      rq_addr.push_back(req_addr);
      rq_beats.push_back(int'(req_beats));
    end
    if (rd_valid && rd_ready) begin
      if (cur_b == rq_beats[0] - 1) begin
        cur_b = 0;
        void'(rq_addr.pop_front());
        void'(rq_beats.pop_front());
      end else cur_b++;
    end
  end

  // expected output
  logic [DW-1:0] expq[$];
  int n_done = 0, n_last = 0, total = 0;
  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    if (out_valid && out_ready) begin
      automatic logic [DW-1:0] e = (expq.size() != 0) ? expq.pop_front() : '1;
      checks++;
      if (out_data !== e || out_last != (expq.size() == 0)) begin
        failures++;
        if (failures < 10) $display("FAIL data %h exp %h last %0d", out_data, e, out_last);
      end
      if (out_last) n_last++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      automatic int n = $urandom_range(1, 12);
      automatic logic [ADDR_W-1:0] stride;
      n_done = 0; n_last = 0;
      @(negedge clk);
      key_base = {32'($urandom), 32'($urandom & ~32'h7)};
      val_base = {32'($urandom), 32'($urandom & ~32'h7)};
      dim_beats = 16'($urandom_range(1, 6));
      stride = (ADDR_W'(dim_beats) + 1) * 8;
      start = 1;
      @(negedge clk) start = 0;
      for (int k = 0; k < n; k++) begin
        automatic int s = $urandom_range(0, 1000);
        for (int b = 0; b <= int'(dim_beats); b++) expq.push_back(word(key_base + ADDR_W'(s) * stride, b));
        for (int b = 0; b <= int'(dim_beats); b++) expq.push_back(word(val_base + ADDR_W'(s) * stride, b));
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        id_valid = 1; id_slot = CNT_W'(s); id_last = (k == n - 1);
        @(posedge clk);
        while (!id_ready) @(posedge clk);
        @(negedge clk) id_valid = 0; id_last = 0;
      end
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      checks++;
      if (expq.size() != 0 || n_done != 1 || n_last != 1) begin
        failures++;
        $display("FAIL r=%0d left=%0d done=%0d last=%0d", r, expq.size(), n_done, n_last);
        expq.delete();
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
