// hill_eval_kernel: in-storage token-importance evaluation kernel (top).
//
// This is the logic that sits in the FPGA of a computational SSD and scores the
// "cold" part of an LLM's KV cache. For each decoding step the host writes the
// current query vector (FP16) into the on-chip query buffer, then starts a
// request. The kernel streams the cold-pool key rows out of on-board DRAM,
// casts each FP16 key element to INT8 or INT4 on the fly, forms the raw inner
// product with the pinned query (no softmax, no scaling: only the ranking
// matters) through a fully unrolled adder tree, and packs <token position, FP16
// score> tuples into Score Blocks of BLOCK_TOKENS tokens that stream back to
// the host while scoring continues. The host merges these with the scores of
// its own hot pool and picks the top tokens; that part is software.
//
// Datapath (one key beat of LANES elements per cycle):
//   DRAM read data -> row parser (header beat = token position)
//   -> S1: key beat register, query buffer read
//   -> dot_product_unit (cast, multiply, adder tree: 1 + log2 LANES stages)
//   -> token_accumulator (d/LANES beats per token)
//   -> int_to_fp16 + tuple register -> score_block_packer (ping-pong) -> host
// A row of d elements costs d/LANES + 1 cycles (the extra one is the header).
// The whole datapath advances on one enable that drops only while the tuple
// register holds a tuple the packer cannot take; the DRAM read stream is then
// held by mem_rd_ready. Query pinning, casting to low precision, the raw inner
// product, the adder tree and the streamed Score Blocks follow the design
// description; the beat width, row layout, block size, conversion rules and
// handshakes are this implementation's choices.
//
// After the host has ranked all tokens it sends the selected cold-pool slots
// (id stream) and kv_gather returns their original FP16 K and V rows on the kv
// stream; scoring and this return share the DRAM read port and never overlap
// (a start of one is ignored while the other is busy).
//
// Interfaces: start/cfg/busy/done request handshake; query write port (one beat
// per q_wr_en, quantised with q_shift and q_prec); DRAM read-request and
// read-data channels (valid/ready, in-order data); Score Block output stream
// (valid/ready, sb_last on the last beat of each block); KV return (g_start
// with bases and row length, id stream in, kv stream out, g_busy/g_done). Status counters report
// scored tokens and cycles the datapath was held by the output.
module hill_eval_kernel
  import hill_pkg::*;
#(
  parameter int unsigned LANES        = LANES_DEF,
  parameter int unsigned D_MAX        = D_MAX_DEF,
  parameter int unsigned BLOCK_TOKENS = BLOCK_TOK_DEF,
  localparam int unsigned QDEPTH = D_MAX / LANES,
  localparam int unsigned QAW    = (QDEPTH > 1) ? $clog2(QDEPTH) : 1,
  localparam int unsigned TPB    = (LANES * 16) / 32,
  localparam int unsigned LEVELS = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // request
  input  logic                 start,
  input  req_cfg_t             cfg,
  output logic                 busy,
  output logic                 done,
  // query write (host)
  input  logic                 q_wr_en,
  input  logic [QAW-1:0]       q_wr_addr,
  input  logic [LANES*16-1:0]  q_wr_data,
  input  logic signed [5:0]    q_shift,
  input  prec_e                q_prec,
  // on-board DRAM read request
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic [ADDR_W-1:0]    mem_req_addr,
  output logic [16:0]          mem_req_beats,
  // on-board DRAM read data
  input  logic                 mem_rd_valid,
  output logic                 mem_rd_ready,
  input  logic [LANES*16-1:0]  mem_rd_data,
  // Score Block stream to the host
  output logic                 sb_valid,
  input  logic                 sb_ready,
  output logic [LANES*16-1:0]  sb_data,
  output logic                 sb_last,
  // selected-token KV return
  input  logic                 g_start,
  input  logic [ADDR_W-1:0]    g_key_base,
  input  logic [ADDR_W-1:0]    g_val_base,
  input  logic [15:0]          g_dim_beats,
  input  logic                 id_valid,
  output logic                 id_ready,
  input  logic [CNT_W-1:0]     id_slot,
  input  logic                 id_last,
  output logic                 kv_valid,
  input  logic                 kv_ready,
  output logic [LANES*16-1:0]  kv_data,
  output logic                 kv_last,
  output logic                 g_busy,
  output logic                 g_done,
  // status
  output logic [CNT_W-1:0]     stat_tokens,
  output logic [31:0]          stat_hold_cycles
);
  req_cfg_t rcfg;
  // DRAM port sharing: scoring and KV return never run at the same time
  logic              f_req_valid, g_req_valid, g_rd_ready;
  logic [ADDR_W-1:0] f_req_addr, g_req_addr;
  logic [16:0]       f_req_beats, g_req_beats;
  logic     en;
  logic     fetch_start, flush, pk_idle;

  // ---------------- row parser ----------------
  logic [15:0] beat_idx;       // 0 = header, 1..dim_beats = key beats
  logic [15:0] row_pos;
  logic        take;           // a read-data beat is consumed this cycle
  logic        is_hdr;

  assign mem_rd_ready = g_busy ? g_rd_ready : (en && busy);
  assign take         = mem_rd_valid && mem_rd_ready && !g_busy;
  assign is_hdr       = (beat_idx == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_idx <= '0;
      row_pos  <= '0;
    end else if (fetch_start) begin
      beat_idx <= '0;
    end else if (take) begin
      if (is_hdr) row_pos <= mem_rd_data[15:0];
      beat_idx <= (beat_idx == rcfg.dim_beats) ? '0 : beat_idx + 1'b1;
    end
  end

  // ---------------- S1: key beat + query read ----------------
  logic                s1_valid;
  logic [LANES*16-1:0] s1_key;
  logic [16:0]         s1_sb;        // {last beat of row, token position}
  logic [LANES*8-1:0]  q_rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  s1_valid <= 1'b0;
    else if (en) s1_valid <= take && !is_hdr;
  end
  always_ff @(posedge clk)
    if (en) begin
      s1_key <= mem_rd_data;
      s1_sb  <= {beat_idx == rcfg.dim_beats, row_pos};
    end

  query_buffer #(.LANES(LANES), .DEPTH(QDEPTH)) u_qbuf (
    .clk    (clk),
    .wr_en  (q_wr_en),
    .wr_addr(q_wr_addr),
    .wr_data(q_wr_data),
    .q_shift(q_shift),
    .prec   (q_prec),
    .rd_en  (en),
    .rd_addr(QAW'(beat_idx - 1'b1)),
    .rd_data(q_rd)
  );

  // ---------------- dot product ----------------
  logic                       dp_valid;
  logic signed [16+LEVELS-1:0] dp_sum;
  logic [16:0]                dp_sb;

  dot_product_unit #(.LANES(LANES), .SBW(17)) u_dot (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (en),
    .in_valid (s1_valid),
    .in_key   (s1_key),
    .in_q     (q_rd),
    .in_sb    (s1_sb),
    .prec     (rcfg.prec),
    .k_shift  (rcfg.k_shift),
    .out_valid(dp_valid),
    .out_sum  (dp_sum),
    .out_sb   (dp_sb)
  );

  // ---------------- per-token accumulation ----------------
  logic               acc_valid;
  logic signed [31:0] acc_score;
  logic [15:0]        acc_pos;

  token_accumulator #(.IW(16 + LEVELS), .W(SCORE_W), .PW(POS_W)) u_acc (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (en),
    .in_valid (dp_valid),
    .in_sum   (dp_sum),
    .in_last  (dp_sb[16]),
    .in_pos   (dp_sb[15:0]),
    .out_valid(acc_valid),
    .out_score(acc_score),
    .out_pos  (acc_pos)
  );

  // ---------------- FP16 conversion, tuple register ----------------
  logic [15:0] acc_h;
  logic        tup_valid;
  tuple_t      tup;
  logic        pk_ready;

  int_to_fp16 u_cvt (.a(acc_score), .sh(rcfg.score_shift), .h(acc_h));

  assign en = !(tup_valid && !pk_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tup_valid <= 1'b0;
      tup       <= '0;
    end else if (en) begin
      tup_valid <= acc_valid;
      tup       <= '{score: acc_h, pos: acc_pos};
    end
  end

  // ---------------- Score Block packer ----------------
  score_block_packer #(.BLOCK_TOKENS(BLOCK_TOKENS), .TPB(TPB)) u_pack (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (tup_valid),
    .in_ready (pk_ready),
    .in_tuple (tup),
    .flush    (flush),
    .out_valid(sb_valid),
    .out_ready(sb_ready),
    .out_data (sb_data),
    .out_last (sb_last),
    .idle     (pk_idle)
  );

  // ---------------- control and key fetch ----------------
  eval_ctrl u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (start && !g_busy),
    .cfg_in       (cfg),
    .cfg          (rcfg),
    .fetch_start  (fetch_start),
    .tuple_taken  (tup_valid && pk_ready),
    .flush        (flush),
    .packer_idle  (pk_idle),
    .busy         (busy),
    .done         (done),
    .tokens_scored(stat_tokens)
  );

  key_fetch #(.BEAT_BYTES(LANES * 2)) u_fetch (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (fetch_start),
    .key_base (rcfg.key_base),
    .num_slots(rcfg.num_slots),
    .dim_beats(rcfg.dim_beats),
    .req_valid(f_req_valid),
    .req_ready(mem_req_ready && !g_busy),
    .req_addr (f_req_addr),
    .req_beats(f_req_beats)
  );

  // ---------------- selected KV return ----------------
  kv_gather #(.BEAT_BYTES(LANES * 2), .DW(LANES * 16)) u_gather (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (g_start && !busy),
    .key_base (g_key_base),
    .val_base (g_val_base),
    .dim_beats(g_dim_beats),
    .id_valid (id_valid),
    .id_ready (id_ready),
    .id_slot  (id_slot),
    .id_last  (id_last),
    .req_valid(g_req_valid),
    .req_ready(mem_req_ready && g_busy),
    .req_addr (g_req_addr),
    .req_beats(g_req_beats),
    .rd_valid (mem_rd_valid && g_busy),
    .rd_ready (g_rd_ready),
    .rd_data  (mem_rd_data),
    .out_valid(kv_valid),
    .out_ready(kv_ready),
    .out_data (kv_data),
    .out_last (kv_last),
    .busy     (g_busy),
    .done     (g_done)
  );

  assign mem_req_valid = g_busy ? g_req_valid : f_req_valid;
  assign mem_req_addr  = g_busy ? g_req_addr  : f_req_addr;
  assign mem_req_beats = g_busy ? g_req_beats : f_req_beats;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           stat_hold_cycles <= '0;
    else if (fetch_start) stat_hold_cycles <= '0;
    else if (!en)         stat_hold_cycles <= stat_hold_cycles + 1'b1;
  end

  a_one_user: assert property (@(posedge clk) disable iff (!rst_n) !(busy && g_busy));
  a_dim_fits: assert property (@(posedge clk) disable iff (!rst_n)
                               busy |-> (rcfg.dim_beats != '0 && rcfg.dim_beats <= 16'(QDEPTH)));
endmodule
