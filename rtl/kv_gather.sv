// kv_gather: returns the full-precision K and V rows of the selected tokens.
//
// After the host has merged all scores and picked the important tokens, it
// sends their cold-pool slot numbers down (id stream); the kernel reads each
// selected token's original FP16 key row and value row from on-board DRAM and
// streams them, untouched, to the host. Returning the original FP16 data of
// only the selected tokens, so that low-precision scoring never affects the
// attention inputs, follows the design description; the row layout and the
// handshakes are this implementation's choices.
//
// Layout: key and value pools share the slot layout of the scoring path: a
// header beat (token position in bits 15:0) plus dim_beats data beats per row,
// row stride (dim_beats + 1) * BEAT_BYTES, bases key_base and val_base. For
// every accepted id the block issues two read requests, K row then V row, and
// forwards the returned beats in order (header included, so every row names
// its token). out_last marks the final beat of the V row of the id flagged
// id_last. done pulses when that beat has been taken.
//
// Timing: one request per cycle while the memory accepts; returned beats go
// through one output register (one cycle of latency, one beat per cycle while
// out_ready stays high).
module kv_gather
  import hill_pkg::*;
#(
  parameter int unsigned BEAT_BYTES = LANES_DEF * 2,
  parameter int unsigned DW         = LANES_DEF * 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] key_base,
  input  logic [ADDR_W-1:0] val_base,
  input  logic [15:0]       dim_beats,
  // selected slots
  input  logic              id_valid,
  output logic              id_ready,
  input  logic [CNT_W-1:0]  id_slot,
  input  logic              id_last,
  // DRAM read request
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  output logic [16:0]       req_beats,
  // DRAM read data in, KV stream out
  input  logic              rd_valid,
  output logic              rd_ready,
  input  logic [DW-1:0]     rd_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DW-1:0]     out_data,
  output logic              out_last,
  output logic              busy,
  output logic              done
);
  logic [ADDR_W-1:0] kb, vb, stride;
  logic [15:0]       dimb;
  // request side
  logic              have_id, phase_v, ids_closed;
  logic [ADDR_W-1:0] row_off;
  logic [CNT_W:0]    rows_issued;
  // data side
  logic [16:0]       beat;
  logic [CNT_W:0]    rows_done;
  logic              row_end, last_in, fin, rd_take;

  assign id_ready  = busy && !have_id && !ids_closed;
  assign req_valid = have_id;
  assign req_addr  = (phase_v ? vb : kb) + row_off;
  assign req_beats = 17'(dimb) + 17'd1;

  // one register stage between DRAM data and the KV stream
  assign rd_ready  = busy && !fin && (!out_valid || out_ready);
  assign rd_take   = rd_valid && rd_ready;
  assign row_end   = (beat == 17'(dimb));
  assign last_in   = row_end && ids_closed && (rows_done + 1'b1 == rows_issued) && !have_id;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; fin <= 1'b0;
      kb <= '0; vb <= '0; stride <= '0; dimb <= '0;
      have_id <= 1'b0; phase_v <= 1'b0; ids_closed <= 1'b0;
      row_off <= '0; rows_issued <= '0; beat <= '0; rows_done <= '0;
      out_valid <= 1'b0; out_data <= '0; out_last <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy        <= 1'b1;
        fin         <= 1'b0;
        kb          <= key_base;
        vb          <= val_base;
        dimb        <= dim_beats;
        stride      <= (ADDR_W'(dim_beats) + ADDR_W'(1)) * ADDR_W'(BEAT_BYTES);
        have_id     <= 1'b0;
        ids_closed  <= 1'b0;
        rows_issued <= '0;
        rows_done   <= '0;
        beat        <= '0;
      end else if (busy) begin
        // accept an id, then issue its K and V row requests
        if (id_valid && id_ready) begin
          have_id    <= 1'b1;
          phase_v    <= 1'b0;
          row_off    <= ADDR_W'(id_slot) * stride;
          ids_closed <= id_last;
        end else if (req_valid && req_ready) begin
          rows_issued <= rows_issued + 1'b1;
          if (phase_v) have_id <= 1'b0;
          phase_v <= !phase_v;
        end
        // take a data beat into the output register, count rows
        if (rd_take) begin
          out_valid <= 1'b1;
          out_data  <= rd_data;
          out_last  <= last_in;
          if (last_in) fin <= 1'b1;
          if (row_end) begin
            beat      <= '0;
            rows_done <= rows_done + 1'b1;
          end else begin
            beat <= beat + 1'b1;
          end
        end else if (out_valid && out_ready) begin
          out_valid <= 1'b0;
        end
        if (out_valid && out_ready && out_last) begin
          busy <= 1'b0;
          done <= 1'b1;
          fin  <= 1'b0;
          out_last <= 1'b0;
        end
      end
    end
  end

  a_no_data_before_request: assert property (@(posedge clk) disable iff (!rst_n)
                                             rd_take |-> rows_done < rows_issued);
endmodule
