// fp16_quant: casts one FP16 value to a signed low-precision integer.
//
// Used for the on-the-fly cast of streamed FP16 keys (and of the query when it
// is written) so that scoring runs in INT8 or INT4 while the stored KV data
// stays FP16, as the design prescribes. The cast rule is this design's choice:
//   q = saturate( round_half_away_from_zero( x * 2^shift ) )
// with a symmetric range of +-127 (INT8) or +-7 (INT4). +-Inf saturates, NaN
// gives 0, subnormals are handled exactly. Purely combinational; the result is
// sign-extended to 8 bits in both modes.
module fp16_quant
  import hill_pkg::*;
(
  input  logic [15:0]       x,
  input  logic signed [5:0] shift,
  input  prec_e             prec,
  output logic signed [7:0] q
);
  logic        sgn;
  logic [4:0]  ex;
  logic [9:0]  man;
  logic [10:0] sig;       // significand with hidden bit
  logic signed [7:0] sh;  // total left shift applied to sig
  logic [7:0]  maxmag;
  logic [7:0]  mag;
  logic [11:0] rnd;       // sig plus rounding half, one guard bit

  assign sgn = x[15];
  assign ex  = x[14:10];
  assign man = x[9:0];

  always_comb begin
    sig    = (ex == 5'd0) ? {1'b0, man} : {1'b1, man};
    // value = sig * 2^(e - 25) for normals, sig * 2^(-24) for subnormals
    sh     = ((ex == 5'd0) ? 8'sd1 : $signed({3'b000, ex})) - 8'sd25 + 8'(shift);
    maxmag = (prec == PREC_INT4) ? 8'd7 : 8'd127;
    mag    = '0;
    rnd    = '0;
    if (ex == 5'h1F) begin
      mag = (man == '0) ? maxmag : 8'd0;           // Inf saturates, NaN -> 0
    end else if (sig == '0) begin
      mag = '0;
    end else if (sh >= 0) begin
      // sig >= 1 and shifted left: any shift of 3 or more exceeds 127
      if (sh > 8'sd3 || ({4'b0, sig} << sh) > {7'b0, maxmag}) mag = maxmag;
      else mag = 8'(sig << sh);
    end else if (sh < -8'sd12) begin
      mag = '0;                                    // below half an LSB
    end else begin
      rnd = ({1'b0, sig} + (12'd1 << (-sh - 8'sd1))) >> (-sh);
      mag = (rnd > {4'b0, maxmag}) ? maxmag : rnd[7:0];
    end
    q = sgn ? -$signed(mag) : $signed(mag);
  end
endmodule
