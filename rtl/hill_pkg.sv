// hill_pkg: types and constants shared by the token-importance evaluation kernel.
//
// The kernel scores cold-pool tokens of an LLM KV cache: for every key row it
// computes the raw inner product with the current query in low precision and
// returns <token position, FP16 score> tuples in Score Blocks. This package
// holds the beat geometry, the precision mode, the per-request configuration
// and the tuple format. The tuple format (16-bit position, 16-bit FP16 score,
// i.e. 4 bytes per token) follows the design description; the 512-bit beat
// (32 FP16 lanes) and the row layout are this implementation's choices.
package hill_pkg;

  // Elements per data beat: 32 x FP16 = 512 bits.
  localparam int unsigned LANES_DEF      = 32;
  // Largest supported vector length d (elements) and its beat count.
  localparam int unsigned D_MAX_DEF      = 5120;
  // Tokens per Score Block (n).
  localparam int unsigned BLOCK_TOK_DEF  = 64;
  // Width of a token position and of a slot count.
  localparam int unsigned POS_W          = 16;
  localparam int unsigned CNT_W          = 17;
  localparam int unsigned ADDR_W         = 64;
  // Raw (integer) score width.
  localparam int unsigned SCORE_W        = 32;

  // Marker written into unused tuple slots of a padded final block.
  localparam logic [15:0] PAD_POS        = 16'hFFFF;
  localparam logic [15:0] FP16_NEG_INF   = 16'hFC00;
  localparam logic [15:0] FP16_MAX       = 16'h7BFF;

  // Precision of the scoring arithmetic.
  typedef enum logic {
    PREC_INT8 = 1'b0,
    PREC_INT4 = 1'b1
  } prec_e;

  // One <token pos, score> entry of a Score Block.
  typedef struct packed {
    logic [15:0] score;  // FP16, upper half of the 32-bit tuple
    logic [15:0] pos;    // token position, lower half
  } tuple_t;

  // Configuration of one scoring request (one sequence, one layer).
  typedef struct packed {
    logic [ADDR_W-1:0] key_base;    // byte address of slot 0 in on-board DRAM
    logic [CNT_W-1:0]  num_slots;   // number of cold-pool slots to score
    logic [15:0]       dim_beats;   // d / LANES key beats per row
    prec_e             prec;        // INT8 or INT4 scoring
    logic signed [5:0] k_shift;     // key cast scale: round(k * 2^k_shift)
    logic [4:0]        score_shift; // FP16 score = raw * 2^-score_shift
  } req_cfg_t;

endpackage
