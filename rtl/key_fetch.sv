// key_fetch: walks the cold-pool key rows of one request in on-board DRAM.
//
// The cold pool holds one row per slot: a 64-byte header beat whose low 16 bits
// carry the token position, followed by dim_beats beats of FP16 key elements
// (LANES per beat). After start, the block issues one read request per slot on
// a valid/ready request channel (in the manner of an AXI read-address channel):
// address key_base + slot * (dim_beats + 1) * BEAT_BYTES, length dim_beats + 1
// beats. Requests go out back to back, one per cycle the memory accepts, so the
// key stream can run without gaps. The row layout and the request channel are
// this implementation's choices; the memory controller is outside the design.
module key_fetch
  import hill_pkg::*;
#(
  parameter int unsigned BEAT_BYTES = LANES_DEF * 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] key_base,
  input  logic [CNT_W-1:0]  num_slots,
  input  logic [15:0]       dim_beats,
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  output logic [16:0]       req_beats
);
  logic [CNT_W-1:0]  left;
  logic [ADDR_W-1:0] stride;
  logic              busy;

  assign req_valid = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      left      <= '0;
      stride    <= '0;
      req_addr  <= '0;
      req_beats <= '0;
    end else if (start) begin
      busy      <= (num_slots != '0);
      left      <= num_slots;
      stride    <= (ADDR_W'(dim_beats) + ADDR_W'(1)) * ADDR_W'(BEAT_BYTES);
      req_addr  <= key_base;
      req_beats <= 17'(dim_beats) + 17'd1;
    end else if (req_valid && req_ready) begin
      req_addr <= req_addr + stride;
      left     <= left - 1'b1;
      if (left == CNT_W'(1)) busy <= 1'b0;
    end
  end
endmodule
