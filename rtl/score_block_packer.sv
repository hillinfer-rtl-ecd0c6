// score_block_packer: gathers <pos, score> tuples into Score Blocks for the host.
//
// Every n = BLOCK_TOKENS scored tokens form one Score Block, which is streamed
// out as BLOCK_TOKENS/TPB beats of TPB 32-bit tuples (512 bits by default),
// out_last marking a block's final beat. The host merges blocks while the
// kernel keeps scoring, as the design intends. To let scoring go on while a
// block drains, the packer has two block buffers (ping-pong): one fills while
// the other drains. in_ready falls only when both are full, which is the one
// backpressure point of the kernel. flush closes a partly filled buffer at the
// end of a request; its unused slots go out as pos=0xFFFF, score=-Inf. The
// block size, the ping-pong scheme and the padding are this implementation's
// choices.
//
// Interface: valid/ready on both sides; an input is taken when in_valid &&
// in_ready, an output beat when out_valid && out_ready. flush must not be raised
// in a cycle with in_valid. idle is high when no tuple is held.
module score_block_packer
  import hill_pkg::*;
#(
  parameter int unsigned BLOCK_TOKENS = BLOCK_TOK_DEF,
  parameter int unsigned TPB          = 16,
  localparam int unsigned BEATS = BLOCK_TOKENS / TPB,
  localparam int unsigned CW    = $clog2(BLOCK_TOKENS + 1),
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned IXW   = (BLOCK_TOKENS > 1) ? $clog2(BLOCK_TOKENS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  tuple_t            in_tuple,
  input  logic              flush,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [TPB*32-1:0] out_data,
  output logic              out_last,
  output logic              idle
);
  tuple_t          buffer [2][BLOCK_TOKENS];
  logic [CW-1:0]   cnt    [2];   // tuples held by each closed buffer
  logic [1:0]      full;
  logic            wsel, rsel;
  logic [CW-1:0]   wcnt;
  logic [BW-1:0]   rbeat;

  assign in_ready  = !full[wsel];
  assign out_valid = full[rsel];
  assign out_last  = (rbeat == BW'(BEATS - 1));
  assign idle      = (full == 2'b00) && (wcnt == '0);

  always_comb begin
    for (int j = 0; j < TPB; j++) begin
      if (CW'(int'(rbeat) * TPB + j) < cnt[rsel])
        out_data[32*j +: 32] = buffer[rsel][int'(rbeat) * TPB + j];
      else
        out_data[32*j +: 32] = {FP16_NEG_INF, PAD_POS};
    end
  end

  always_ff @(posedge clk)
    if (in_valid && in_ready) buffer[wsel][IXW'(wcnt)] <= in_tuple;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full   <= '0;
      wsel   <= 1'b0;
      rsel   <= 1'b0;
      wcnt   <= '0;
      rbeat  <= '0;
      cnt[0] <= '0;
      cnt[1] <= '0;
    end else begin
      // fill side
      if (in_valid && in_ready) begin
        if (wcnt == CW'(BLOCK_TOKENS - 1)) begin
          full[wsel] <= 1'b1;
          cnt[wsel]  <= CW'(BLOCK_TOKENS);
          wsel       <= !wsel;
          wcnt       <= '0;
        end else begin
          wcnt <= wcnt + 1'b1;
        end
      end else if (flush && wcnt != '0) begin
        full[wsel] <= 1'b1;
        cnt[wsel]  <= wcnt;
        wsel       <= !wsel;
        wcnt       <= '0;
      end
      // drain side (a buffer is never closed and drained in the same cycle:
      // the fill side only closes buffer wsel, which is not full)
      if (out_valid && out_ready) begin
        if (out_last) begin
          full[rsel] <= 1'b0;
          rsel       <= !rsel;
          rbeat      <= '0;
        end else begin
          rbeat <= rbeat + 1'b1;
        end
      end
    end
  end

  // Rules of the interface.
  a_flush_alone: assert property (@(posedge clk) disable iff (!rst_n) !(flush && in_valid));
  a_out_stable:  assert property (@(posedge clk) disable iff (!rst_n)
                                  out_valid && !out_ready |=> out_valid);
endmodule
