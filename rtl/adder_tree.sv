// adder_tree: fully unrolled, pipelined binary adder tree.
//
// Sums N signed IW-bit inputs. Each tree level is one register stage, so a
// result appears LEVELS = ceil(log2 N) cycles after its inputs, and a new set
// of inputs is accepted every cycle: this is the "fully unrolled adder tree
// pipeline" the scoring engine is built around. The input count is padded to a
// power of two with zeros. Each level widens the sum by one bit, so the output
// is IW + LEVELS bits and cannot overflow. A sideband word (SBW bits) and a
// valid bit travel with the data. en is a pipeline-wide advance: when it is
// low, every stage holds.
module adder_tree #(
  parameter int unsigned N   = 32,
  parameter int unsigned IW  = 16,
  parameter int unsigned SBW = 1,
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned OW     = IW + LEVELS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 in_valid,
  input  logic [N*IW-1:0]      in_data,   // N signed values, element 0 in the low bits
  input  logic [SBW-1:0]       in_sb,
  output logic                 out_valid,
  output logic signed [OW-1:0] out_sum,
  output logic [SBW-1:0]       out_sb
);
  localparam int unsigned NP = 1 << LEVELS;

  // Level l holds NP >> l partial sums; level 0 is the zero-padded input.
  logic signed [OW-1:0] in_ext [NP];
  always_comb begin
    for (int k = 0; k < NP; k++)
      in_ext[k] = (k < N) ? OW'($signed(in_data[k*IW +: IW])) : '0;
  end

  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    logic signed [OW-1:0] prev [NP >> (l-1)];
    logic signed [OW-1:0] s    [NP >> l];
    logic                 v;
    logic [SBW-1:0]       b;
    logic                 pv;
    logic [SBW-1:0]       pb;
    if (l == 1) begin : g_first
      assign prev = in_ext;
      assign pv   = in_valid;
      assign pb   = in_sb;
    end else begin : g_next
      assign prev = g_lvl[l-1].s;
      assign pv   = g_lvl[l-1].v;
      assign pb   = g_lvl[l-1].b;
    end
    always_ff @(posedge clk)
      if (en)
        for (int k = 0; k < (NP >> l); k++) s[k] <= prev[2*k] + prev[2*k+1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  v <= 1'b0;
      else if (en) v <= pv;
    end
    always_ff @(posedge clk)
      if (en) b <= pb;
  end

  assign out_valid = g_lvl[LEVELS].v;
  assign out_sum   = g_lvl[LEVELS].s[0];
  assign out_sb    = g_lvl[LEVELS].b;
endmodule
