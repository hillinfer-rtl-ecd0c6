// dot_product_unit: low-precision partial inner product of one key beat with the query.
//
// Each cycle it takes LANES streamed FP16 key elements and the LANES matching
// query integers (already quantised in the query buffer). The keys are cast to
// INT8/INT4 on the fly (fp16_quant, scale k_shift), multiplied lane by lane,
// and the LANES products are reduced by a fully unrolled pipelined adder tree.
// Only the raw product Q.K^T is formed: no softmax, no 1/sqrt(d) scaling and no
// division, because ranking the tokens needs nothing more; that simplification
// and the low-precision cast are the design's. The single register after the
// multipliers is this implementation's choice.
//
// Timing: out_* follows in_* by LAT = 1 + ceil(log2 LANES) advancing cycles;
// one beat per cycle. en stalls every stage. A sideband word travels along.
module dot_product_unit
  import hill_pkg::*;
#(
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned SBW   = 17,
  localparam int unsigned LEVELS = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned OW     = 16 + LEVELS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 in_valid,
  input  logic [LANES*16-1:0]  in_key,    // FP16 key elements, element 0 in bits 15:0
  input  logic [LANES*8-1:0]   in_q,      // signed query integers
  input  logic [SBW-1:0]       in_sb,
  input  prec_e                prec,
  input  logic signed [5:0]    k_shift,
  output logic                 out_valid,
  output logic signed [OW-1:0] out_sum,
  output logic [SBW-1:0]       out_sb
);
  logic [LANES*8-1:0]  kq;     // quantised keys
  logic [LANES*16-1:0] prod;   // registered products
  logic                prod_v;
  logic [SBW-1:0]      prod_sb;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    fp16_quant u_cast (
      .x    (in_key[16*i +: 16]),
      .shift(k_shift),
      .prec (prec),
      .q    (kq[8*i +: 8])
    );
    always_ff @(posedge clk)
      if (en) prod[16*i +: 16] <= 16'($signed(kq[8*i +: 8]) * $signed(in_q[8*i +: 8]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  prod_v <= 1'b0;
    else if (en) prod_v <= in_valid;
  end
  always_ff @(posedge clk)
    if (en) prod_sb <= in_sb;

  adder_tree #(.N(LANES), .IW(16), .SBW(SBW)) u_tree (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (en),
    .in_valid (prod_v),
    .in_data  (prod),
    .in_sb    (prod_sb),
    .out_valid(out_valid),
    .out_sum  (out_sum),
    .out_sb   (out_sb)
  );
endmodule
