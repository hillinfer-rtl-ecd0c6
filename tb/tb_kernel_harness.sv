// tb_kernel_harness: end-to-end test bench body for hill_eval_kernel.
//
// Plays the host and the on-board DRAM around the kernel. The host side writes
// a generated FP16 query, starts a scoring request and collects Score Block
// beats; the DRAM side answers read requests in order, generating each row on
// the fly from a hash of (slot, beat, lane): a header beat with the slot's
// token position, then FP16 key elements. Every tuple is checked against a
// reference score computed from the same generated data with real-number
// arithmetic (tb_ref_pkg), and every padded slot of a final block is checked.
//
// The request list is a mix that makes each mechanism of the kernel happen:
// INT8 and INT4 scoring (mode switch), DRAM read gaps (datapath bubbles),
// Score Block backpressure (ping-pong buffers full, datapath held), padded
// final blocks, saturating key casts, saturating FP16 scores, an empty request,
// and one gap-free request whose cycle count is checked against the rate of
// one key beat per cycle. After every other request the harness also plays
// the host's selection: it takes the best-scoring slots, sends them down the
// id stream and checks the returned FP16 K and V rows beat for beat (value
// rows are generated the same way from a second hash, at a far base address).
// FULL selects the kernel at its default parameters (no parameter override);
// otherwise LANES, D_MAX and BLOCK_TOKENS are used. LONG_TOKENS > 0 (with FULL)
// replaces the mix by one long-context request: that many cold tokens at the
// largest dimension D_MAX, rate-checked, followed by a KV return of the 32 best.
module tb_kernel_harness #(
  parameter bit FULL         = 1'b0,
  parameter int LANES        = 8,
  parameter int D_MAX        = 64,
  parameter int BLOCK_TOKENS = 16,
  parameter int SCALE        = 1,
  parameter int LONG_TOKENS  = 0
);
  import hill_pkg::*;
  import tb_ref_pkg::*;
  localparam int QDEPTH = D_MAX / LANES;
  localparam int QAW    = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;
  localparam int TPB    = LANES / 2;
  localparam int BEAT_BYTES = LANES * 2;

  logic clk = 0;
  always #5 clk = !clk;
  logic rst_n = 0;

  logic                start = 0;
  req_cfg_t            cfg = '0;
  logic                busy, done;
  logic                q_wr_en = 0;
  logic [QAW-1:0]      q_wr_addr = '0;
  logic [LANES*16-1:0] q_wr_data = '0;
  logic signed [5:0]   q_shift = '0;
  prec_e               q_prec = PREC_INT8;
  logic                mem_req_valid, mem_req_ready;
  logic [ADDR_W-1:0]   mem_req_addr;
  logic [16:0]         mem_req_beats;
  logic                mem_rd_valid, mem_rd_ready;
  logic [LANES*16-1:0] mem_rd_data;
  logic                sb_valid, sb_ready, sb_last;
  logic [LANES*16-1:0] sb_data;
  logic                g_start = 0;
  logic [ADDR_W-1:0]   g_key_base = '0, g_val_base = '0;
  logic [15:0]         g_dim_beats = '0;
  logic                id_valid = 0, id_last = 0, id_ready;
  logic [CNT_W-1:0]    id_slot = '0;
  logic                kv_valid, kv_ready, kv_last, g_busy, g_done;
  logic [LANES*16-1:0] kv_data;
  logic [CNT_W-1:0]    stat_tokens;
  logic [31:0]         stat_hold_cycles;

  if (FULL) begin : g_full
    hill_eval_kernel dut (.*);
  end else begin : g_small
    hill_eval_kernel #(.LANES(LANES), .D_MAX(D_MAX), .BLOCK_TOKENS(BLOCK_TOKENS)) dut (.*);
  end

  int checks = 0, failures = 0;
  // mechanism counters
  int n_int8 = 0, n_int4 = 0, n_mem_gap = 0, n_hold = 0, n_pad_blocks = 0;
  int n_key_sat = 0, n_score_sat = 0, n_empty = 0, n_rate = 0, n_full_blocks = 0, n_gather = 0;

  // ---------------- DRAM model ----------------
  logic [ADDR_W-1:0] base;
  int                row_beats;
  int                mem_gap_pct = 0;
  int                req_slot[$];
  int                cur_slot = -1, cur_beat = 0;
  int                seed = 1;

  function automatic int pos_of(int s);
    return (s * 37 + 11 + seed) % 65521;
  endfunction
  bit aligned = 0;   // key signs follow the query signs: all products positive
  function automatic logic [15:0] key_of(int s, int b, int l, int emin, int emax);
    logic [15:0] k = gen_fp16(mix(32'(s), 32'(b), 32'(l ^ (seed << 8))), emin, emax);
    if (aligned) k[15] = mix(32'(b), 32'(l), 32'(seed * 7 + 3))[31];
    return k;
  endfunction
  int kemin = 10, kemax = 18;

  assign mem_req_ready = 1'b1;
  localparam logic [ADDR_W-1:0] VAL_OFS = 64'h0000_0100_0000_0000;
  function automatic logic [15:0] val_of(int s, int b, int l);
    return gen_fp16(mix(32'(s) ^ 32'h5555_0000, 32'(b), 32'(l ^ (seed << 8))), 8, 20);
  endfunction
  // slot number of a request; bit 24 set for a value row
  always @(posedge clk) if (rst_n && mem_req_valid && mem_req_ready) begin
    if (mem_req_addr >= base + VAL_OFS)
      req_slot.push_back(int'((mem_req_addr - base - VAL_OFS) / ADDR_W'(row_beats * BEAT_BYTES)) | (1 << 24));
    else
      req_slot.push_back(int'((mem_req_addr - base) / ADDR_W'(row_beats * BEAT_BYTES)));
    if (int'(mem_req_beats) != row_beats) begin
      failures++;
      $display("FAIL request length %0d", mem_req_beats);
    end
  end

  // present a beat whenever one is available, with random gaps
  logic gap;
  always @(negedge clk) gap <= ($urandom_range(0, 99) < mem_gap_pct);
  always_comb begin
    mem_rd_valid = 1'b0;
    mem_rd_data  = '0;
    if (cur_slot >= 0 && !gap) begin
      mem_rd_valid = 1'b1;
      if (cur_beat == 0) mem_rd_data[15:0] = 16'(pos_of(cur_slot & 24'hFFFFFF));
      else for (int l = 0; l < LANES; l++)
        mem_rd_data[16*l +: 16] = cur_slot[24] ? val_of(cur_slot & 24'hFFFFFF, cur_beat - 1, l)
                                               : key_of(cur_slot, cur_beat - 1, l, kemin, kemax);
    end
  end
  always @(posedge clk) begin
    if (rst_n && busy && cur_slot >= 0 && gap && cur_beat != 0) n_mem_gap++;
    if (cur_slot >= 0 && mem_rd_valid && mem_rd_ready) begin
      if (cur_beat == row_beats - 1) begin
        cur_beat = 0;
        cur_slot = -1;
      end else cur_beat++;
    end
    if (cur_slot < 0 && req_slot.size() != 0) begin
      cur_slot = req_slot.pop_front();
      cur_beat = 0;
    end
  end

  // ---------------- host side ----------------
  int qint [];          // quantised query, index b*LANES+l
  real got_score [];    // scores received in the last request, by slot
  assign kv_ready = 1'b1;
  int out_pct = 100;    // chance that sb_ready is high
  int out_block_cycles = 0;  // sb_ready held low this long at request start
  always @(negedge clk) sb_ready <= ($urandom_range(0, 99) < out_pct);

  task automatic load_query(int dim_beats, int qs, prec_e pr);
    qint = new[dim_beats * LANES];
    q_shift = 6'(qs);
    q_prec  = pr;
    for (int b = 0; b < dim_beats; b++) begin
      @(negedge clk);
      q_wr_en = 1;
      q_wr_addr = QAW'(b);
      for (int l = 0; l < LANES; l++) begin
        q_wr_data[16*l +: 16] = gen_fp16(mix(32'(b), 32'(l), 32'(seed * 7 + 3)), 10, 18);
        qint[b * LANES + l] = ref_quant(q_wr_data[16*l +: 16], qs, pr == PREC_INT4);
      end
    end
    @(negedge clk) q_wr_en = 0;
  endtask

  function automatic logic [31:0] expected_tuple(int s, int dim_beats, int ks, int ss, bit int4);
    longint raw = 0;
    for (int b = 0; b < dim_beats; b++)
      for (int l = 0; l < LANES; l++) begin
        automatic int kq = ref_quant(key_of(s, b, l, kemin, kemax), ks, int4);
        if (kq == 127 || kq == -127 || (int4 && (kq == 7 || kq == -7))) n_key_sat++;
        raw += longint'(kq) * longint'(qint[b * LANES + l]);
      end
    return {ref_i2h(raw, ss), 16'(pos_of(s))};
  endfunction

  // one request: returns the cycles from start to done
  task automatic run_request(int n, int dim_beats, prec_e pr, int qs, int ks, int ss,
                             int gap_pct, int outp, output int cycles);
    int got = 0, beats_in_block = 0, cyc = 0;
    int blocks_expected = (n + BLOCK_TOKENS - 1) / BLOCK_TOKENS;
    int beats_seen = 0;
    seed++;
    got_score = new[n];
    load_query(dim_beats, qs, pr);
    mem_gap_pct = gap_pct;
    out_pct = outp;
    if (out_block_cycles > 0)
      fork begin
        out_pct = 0;
        repeat (out_block_cycles) @(negedge clk);
        out_pct = outp;
      end join_none
    row_beats = dim_beats + 1;
    base = {32'($urandom & 32'h0000_FFFF), 32'($urandom & 32'hFFFF_FFC0)};
    @(negedge clk);
    cfg = '0;
    cfg.key_base    = base;
    cfg.num_slots   = CNT_W'(n);
    cfg.dim_beats   = 16'(dim_beats);
    cfg.prec        = pr;
    cfg.k_shift     = 6'(ks);
    cfg.score_shift = 5'(ss);
    start = 1;
    @(negedge clk) start = 0;
    cfg = '1;  // a running request must not look at cfg again
    if (pr == PREC_INT8) n_int8++; else n_int4++;
    if (n == 0) n_empty++;
    forever begin
      @(posedge clk);
      cyc++;
      if (sb_valid && sb_ready) begin
        for (int j = 0; j < TPB; j++) begin
          automatic int idx = beats_seen * TPB + j;
          automatic logic [31:0] e;
          automatic logic [31:0] g = sb_data[32*j +: 32];
          if (idx < n) got_score[idx] = fp16_to_real(g[31:16]);
          if (idx < n) e = expected_tuple(idx, dim_beats, ks, ss, pr == PREC_INT4);
          else         e = {FP16_NEG_INF, PAD_POS};
          if (idx < n && (e[30:16] == 15'h7BFF)) n_score_sat++;
          checks++;
          if (g !== e) begin
            failures++;
            if (failures < 10) $display("FAIL slot %0d got %h exp %h", idx, g, e);
          end
        end
        beats_in_block++;
        checks++;
        if (sb_last != (beats_in_block == BLOCK_TOKENS / TPB)) begin
          failures++;
          $display("FAIL sb_last at beat %0d", beats_in_block);
        end
        if (sb_last) begin
          beats_in_block = 0;
          if (beats_seen * TPB + TPB > n) n_pad_blocks++;
          else n_full_blocks++;
        end
        beats_seen++;
      end
      if (done) break;
    end
    cycles = cyc;
    n_hold += int'(stat_hold_cycles);
    checks++;
    if (beats_seen * TPB != blocks_expected * BLOCK_TOKENS || int'(stat_tokens) != n) begin
      failures++;
      $display("FAIL beats %0d tokens %0d for n=%0d", beats_seen, stat_tokens, n);
    end
  endtask


  // select the k best-scoring slots of the last request and fetch their KV
  task automatic gather_top(int n, int dim_beats, int k);
    int sel[$];
    logic [LANES*16-1:0] expq[$];
    bit used [] = new[n];
    int beats = 0, lasts = 0;
    if (k > n) k = n;
    for (int j = 0; j < k; j++) begin
      int best = -1;
      for (int s = 0; s < n; s++)
        if (!used[s] && (best < 0 || got_score[s] > got_score[best])) best = s;
      used[best] = 1;
      sel.push_back(best);
    end
    foreach (sel[j]) begin
      automatic logic [LANES*16-1:0] w = '0;
      w[15:0] = 16'(pos_of(sel[j]));
      expq.push_back(w);
      for (int b = 0; b < dim_beats; b++) begin
        for (int l = 0; l < LANES; l++) w[16*l +: 16] = key_of(sel[j], b, l, kemin, kemax);
        expq.push_back(w);
      end
      w = '0;
      w[15:0] = 16'(pos_of(sel[j]));
      expq.push_back(w);
      for (int b = 0; b < dim_beats; b++) begin
        for (int l = 0; l < LANES; l++) w[16*l +: 16] = val_of(sel[j], b, l);
        expq.push_back(w);
      end
    end
    @(negedge clk);
    g_key_base = base;
    g_val_base = base + VAL_OFS;
    g_dim_beats = 16'(dim_beats);
    g_start = 1;
    @(negedge clk) g_start = 0;
    n_gather++;
    fork
      foreach (sel[j]) begin
        id_valid = 1; id_slot = CNT_W'(sel[j]); id_last = (j == sel.size() - 1);
        @(posedge clk);
        while (!id_ready) @(posedge clk);
        @(negedge clk) id_valid = 0; id_last = 0;
      end
      forever begin
        @(posedge clk);
        if (kv_valid && kv_ready) begin
          automatic logic [LANES*16-1:0] e = (expq.size() != 0) ? expq.pop_front() : '1;
          checks++;
          if (kv_data !== e || kv_last != (expq.size() == 0)) begin
            failures++;
            if (failures < 10) $display("FAIL kv beat %0d", beats);
          end
          beats++;
          if (kv_last) lasts++;
        end
        if (g_done) break;
      end
    join
    checks++;
    if (expq.size() != 0 || lasts != 1) begin
      failures++;
      $display("FAIL gather: %0d beats left", expq.size());
    end
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    if (LONG_TOKENS > 0) begin
      run_request(LONG_TOKENS, QDEPTH, PREC_INT8, 4, 4, 8, 0, 100, cyc);
      checks++; n_rate++;
      if (cyc < LONG_TOKENS * (QDEPTH + 1) || cyc > LONG_TOKENS * (QDEPTH + 1) + 64) begin
        failures++;
        $display("FAIL rate: %0d cycles", cyc);
      end
      $display("long context: %0d tokens, d=%0d: %0d cycles", LONG_TOKENS, D_MAX, cyc);
      gather_top(LONG_TOKENS, QDEPTH, 32);
      checks++; if (stat_tokens != CNT_W'(LONG_TOKENS)) begin failures++; $display("FAIL token count"); end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    if (FULL) begin
      // d = 4096 (7B models), INT8, 2000 cold tokens, clean stream: rate check
      run_request(2000, 4096 / LANES, PREC_INT8, 4, 4, 8, 0, 100, cyc);
      checks++; n_rate++;
      if (cyc < 2000 * (4096 / LANES + 1) || cyc > 2000 * (4096 / LANES + 1) + 64) begin
        failures++;
        $display("FAIL rate: %0d cycles", cyc);
      end
      $display("full size: 2000 tokens, d=4096: %0d cycles", cyc);
      gather_top(2000, 4096 / LANES, 8);
      // d = 5120 (13B model), INT4, gaps and backpressure, saturating keys
      kemax = 19;
      out_block_cycles = 30000;
      run_request(300, D_MAX / LANES, PREC_INT4, 0, 0, 4, 20, 30, cyc);
      out_block_cycles = 0;
      // saturating scores
      kemax = 18;
      aligned = 1;
      run_request(70, 4096 / LANES, PREC_INT8, 5, 5, 0, 5, 100, cyc);
      aligned = 0;
      run_request(0, 4, PREC_INT8, 4, 4, 8, 0, 100, cyc);
    end else begin
      // clean stream at full dimension: rate check
      run_request(5 * BLOCK_TOKENS, QDEPTH, PREC_INT8, 4, 4, 6, 0, 100, cyc);
      checks++; n_rate++;
      if (cyc < 5 * BLOCK_TOKENS * (QDEPTH + 1) || cyc > 5 * BLOCK_TOKENS * (QDEPTH + 1) + 40) begin
        failures++;
        $display("FAIL rate: %0d cycles for %0d tokens", cyc, 5 * BLOCK_TOKENS);
      end
      // short rows with the output blocked: both block buffers fill, datapath holds
      out_block_cycles = 20 * BLOCK_TOKENS;
      run_request(4 * BLOCK_TOKENS, 1, PREC_INT8, 4, 4, 6, 0, 100, cyc);
      out_block_cycles = 0;
      for (int r = 0; r < 12 * SCALE; r++) begin
        automatic prec_e pr = prec_e'(r % 2);
        automatic int n  = (r == 5) ? 0 : $urandom_range(1, 6 * BLOCK_TOKENS);
        automatic int db = $urandom_range(1, QDEPTH);
        kemax = (r % 3 == 0) ? 20 : 18;
        aligned = (r % 4 == 2);
        run_request(n, db, pr, pr == PREC_INT4 ? 0 : 4, pr == PREC_INT4 ? 0 : 4,
                    (r % 4 == 2) ? 0 : 6, (r % 3) * 15, (r % 4 == 2) ? 10 : 100, cyc);
        if (n > 0 && r % 2 == 0) gather_top(n, db, 1 + r % 5);
      end
    end
    $display("mechanisms: int8=%0d int4=%0d mem_gap=%0d hold=%0d pad_blocks=%0d full_blocks=%0d key_sat=%0d score_sat=%0d empty=%0d rate=%0d gather=%0d",
             n_int8, n_int4, n_mem_gap, n_hold, n_pad_blocks, n_full_blocks, n_key_sat, n_score_sat, n_empty, n_rate, n_gather);
    checks++; if (n_int8 == 0)        begin failures++; $display("FAIL no INT8 request"); end
    checks++; if (n_int4 == 0)        begin failures++; $display("FAIL no INT4 request"); end
    checks++; if (n_mem_gap == 0)     begin failures++; $display("FAIL no DRAM gap"); end
    checks++; if (n_hold == 0)        begin failures++; $display("FAIL no output hold"); end
    checks++; if (n_pad_blocks == 0)  begin failures++; $display("FAIL no padded block"); end
    checks++; if (n_full_blocks == 0) begin failures++; $display("FAIL no full block"); end
    checks++; if (n_key_sat == 0)     begin failures++; $display("FAIL no key saturation"); end
    checks++; if (n_score_sat == 0)   begin failures++; $display("FAIL no score saturation"); end
    checks++; if (n_empty == 0)       begin failures++; $display("FAIL no empty request"); end
    checks++; if (n_gather == 0)      begin failures++; $display("FAIL no KV return"); end
    checks++; if (n_rate == 0)        begin failures++; $display("FAIL no rate check"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (LONG_TOKENS * (QDEPTH + 1) + (FULL ? 2_000_000 : 400_000)) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
