// membrane_bitmap_buffer: the 64-bit bitmap buffer (scratchpad) of a BFU with
// its multi-predicate AND gate and result multiplexer.
//
// Each cycle with `append` set, the `n_bits` result bits of one column
// comparison are placed at the buffer's fill position, bit 0 first. When the
// 64-bit word is full it is written back: `wb_valid` pulses with `wb_data`.
// Result bits that do not fit are kept and start the next word, so every field
// width packs its results densely. `flush` writes back a partly filled word
// (unfilled bits read as 0) and empties the buffer; `clear` empties it without
// writing.
//
// Multi-predicate queries: when `sel_and` is set, the written word is the AND
// of the new results and `prev_word`, the bitmap word already stored at the
// same output position by an earlier predicate; otherwise the new results pass
// unchanged. The AND is applied to the whole word at write-back, bit position by
// bit position, which gives the same bitmap as ANDing each result as it is
// produced.
//
// Timing: wb_valid/wb_data are combinational from the inputs of the cycle that
// completes the word; the buffer state updates at the clock edge.
//
// From the paper: the 64-bit buffer size, the write-back when full, and the
// AND of the new comparison with the stored bitmap selected by a multiplexer for
// multiple predicates. The dense packing across word boundaries and the flush
// are this design's choices.
module membrane_bitmap_buffer
  import membrane_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 append,
  input  logic [LANES_MAX-1:0] bits,
  input  logic [5:0]           n_bits,    // 1..32
  input  logic                 flush,
  input  logic                 sel_and,
  input  logic [WORD_W-1:0]    prev_word,
  output logic                 wb_valid,
  output logic [WORD_W-1:0]    wb_data,
  output logic [6:0]           fill       // bits currently held, 0..63
);

  logic [WORD_W-1:0]   buf_q;
  logic [6:0]          fill_q;
  logic [95:0]         merged;
  logic [7:0]          total;
  logic [WORD_W-1:0]   new_word;
  logic [WORD_W-1:0]   bit_mask;
  logic [LANES_MAX-1:0] nb_mask;

  assign fill = fill_q;

  always_comb begin
    nb_mask = '0;
    for (int unsigned i = 0; i < LANES_MAX; i++)
      if (6'(i) < n_bits) nb_mask[i] = 1'b1;
    merged = {32'b0, buf_q} | ({64'b0, (bits & nb_mask)} << fill_q);
    total  = {1'b0, fill_q} + (append ? {2'b0, n_bits} : 8'd0);
    wb_valid = append ? (total >= 8'd64) : (flush && fill_q != 7'd0);
    new_word = append ? merged[63:0] : buf_q;
    bit_mask = '1;
    if (!append) bit_mask = ~({WORD_W{1'b1}} << fill_q);
    wb_data = sel_and ? (new_word & prev_word & bit_mask) : (new_word & bit_mask);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q  <= '0;
      fill_q <= '0;
    end else if (clear) begin
      buf_q  <= '0;
      fill_q <= '0;
    end else if (append) begin
      if (total >= 8'd64) begin
        buf_q  <= {32'b0, merged[95:64]};
        fill_q <= 7'(total - 8'd64);
      end else begin
        buf_q  <= merged[63:0];
        fill_q <= 7'(total);
      end
    end else if (flush) begin
      buf_q  <= '0;
      fill_q <= '0;
    end
  end

endmodule
