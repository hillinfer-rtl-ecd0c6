// eval_ctrl: sequences one scoring request of the evaluation kernel.
//
// On start (accepted only when idle) it latches the request configuration,
// pulses fetch_start so the key rows begin to stream, and counts the tuples the
// Score Block packer accepts (tuple_taken). When all num_slots tokens are
// scored it pulses flush so the last, partly filled Score Block is sent, waits
// until the packer is empty, and pulses done. busy covers the whole request.
// A request with zero slots finishes at once. The handshake is this
// implementation's choice.
//
// States: IDLE -> RUN -> FLUSH -> DRAIN -> IDLE.
module eval_ctrl
  import hill_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  req_cfg_t         cfg_in,
  output req_cfg_t         cfg,
  output logic             fetch_start,
  input  logic             tuple_taken,
  output logic             flush,
  input  logic             packer_idle,
  output logic             busy,
  output logic             done,
  output logic [CNT_W-1:0] tokens_scored
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH, S_DRAIN} state_e;
  state_e state;

  assign busy  = (state != S_IDLE);
  assign flush = (state == S_FLUSH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      cfg           <= '0;
      fetch_start   <= 1'b0;
      done          <= 1'b0;
      tokens_scored <= '0;
    end else begin
      fetch_start <= 1'b0;
      done        <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cfg           <= cfg_in;
          tokens_scored <= '0;
          fetch_start   <= 1'b1;
          state         <= (cfg_in.num_slots == '0) ? S_FLUSH : S_RUN;
        end
        S_RUN: begin
          if (tuple_taken) begin
            tokens_scored <= tokens_scored + 1'b1;
            if (tokens_scored + 1'b1 == cfg.num_slots) state <= S_FLUSH;
          end
        end
        S_FLUSH: state <= S_DRAIN;
        S_DRAIN: if (packer_idle) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_extra_tuple: assert property (@(posedge clk) disable iff (!rst_n)
                                     tuple_taken |-> state == S_RUN);
endmodule
