// query_buffer: on-chip store for the quantised query vector of one decoding step.
//
// The host writes the 1 x d FP16 query once per request, one beat of LANES
// elements at a time (wr_en, wr_addr, wr_data). Each element is cast to INT8/INT4
// by fp16_quant on the way in (scale q_shift, mode prec), so the array holds
// LANES signed 8-bit values per word and maps to block RAM. Pinning the query
// on chip while the keys stream past is what the design prescribes; the write
// port with an explicit beat address and the quantise-on-write are this
// implementation's choices.
//
// Read port: synchronous, BRAM style. When rd_en is high, rd_data shows word
// rd_addr on the next cycle; when rd_en is low, rd_data holds its value (this
// is how the kernel's pipeline stall reaches the buffer).
module query_buffer
  import hill_pkg::*;
#(
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned DEPTH = D_MAX_DEF / LANES_DEF,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  // write side (host)
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  logic [LANES*16-1:0]   wr_data,   // LANES FP16 values, element 0 in bits 15:0
  input  logic signed [5:0]     q_shift,
  input  prec_e                 prec,
  // read side (datapath)
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_addr,
  output logic [LANES*8-1:0]    rd_data    // LANES signed 8-bit values
);
  logic [LANES*8-1:0] mem [DEPTH];
  logic [LANES*8-1:0] wr_q;

  for (genvar i = 0; i < LANES; i++) begin : g_cast
    fp16_quant u_q (
      .x    (wr_data[16*i +: 16]),
      .shift(q_shift),
      .prec (prec),
      .q    (wr_q[8*i +: 8])
    );
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_q;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
