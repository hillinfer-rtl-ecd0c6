// token_accumulator: sums the per-beat partial products of one key row.
//
// A key row of d elements arrives as d/LANES beats, so a token's inner product
// is the sum of that many adder-tree outputs. Partial sums (in_sum) accumulate
// into a W-bit register; on the beat flagged in_last the completed raw score is
// registered on out_score together with the row's token position and out_valid
// is raised for one advancing cycle, and the accumulator restarts at zero.
// Splitting d over several beats is this implementation's choice.
//
// Timing: one beat per cycle; out_* appear one advancing cycle after the last
// beat of the row. en stalls the block.
module token_accumulator #(
  parameter int unsigned IW = 21,
  parameter int unsigned W  = 32,
  parameter int unsigned PW = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                in_valid,
  input  logic signed [IW-1:0] in_sum,
  input  logic                in_last,
  input  logic [PW-1:0]       in_pos,
  output logic                out_valid,
  output logic signed [W-1:0] out_score,
  output logic [PW-1:0]       out_pos
);
  logic signed [W-1:0] acc;
  logic signed [W-1:0] nxt;

  assign nxt = acc + W'(in_sum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_score <= '0;
      out_pos   <= '0;
    end else if (en) begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        if (in_last) begin
          acc       <= '0;
          out_score <= nxt;
          out_pos   <= in_pos;
        end else begin
          acc <= nxt;
        end
      end
    end
  end
endmodule
