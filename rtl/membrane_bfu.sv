// membrane_bfu: Bank-level Filtering Unit, one per DRAM bank.
//
// The BFU sits at the bank interface. In all-bank mode every READ brings the
// bank's 64-bit column word (`col_data`, valid with `col_rd`) into the
// Reconfigurable Comparator Block, which compares every packed field of the word
// with the programmed predicate(s). The per-field result bits are registered and
// appended, one cycle later, to the 64-bit bitmap buffer; each filled bitmap
// word is written back into the bank at the output page position kept by the
// control unit (`wb_en`, `wb_row`, `wb_col`, `wb_data`). For a query with
// several predicates on the same rows, the previous bitmap word at that position
// is read (`bm_row`/`bm_col` -> `bm_prev`) and ANDed with the new results, so
// the bitmap accumulates the conjunction.
//
// Configuration arrives over the PIMCONF broadcast (`conf_we`, `conf_idx`,
// `conf_wdata`); see membrane_pimconf.
//
// Timing: one column word per clock; a result bit reaches the buffer two edges
// after its column (comparator register, then buffer); write-back is
// combinational from the cycle that fills a word. The DRAM only delivers a
// column every tCCD_L, so the BFU never stalls the bank.
//
// The structure (comparator block, control unit, 64-bit bitmap buffer, AND
// gate and multiplexer selected by "multiple predicates", PIMCONF programming)
// is the paper's; the pipelining and the output addressing are this design's.
module membrane_bfu
  import membrane_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // PIMCONF broadcast
  input  logic              conf_we,
  input  pimconf_reg_e      conf_idx,
  input  logic [WORD_W-1:0] conf_wdata,
  // column stream from the bank
  input  logic              col_rd,
  input  logic [WORD_W-1:0] col_data,
  input  logic              flush_req,
  // bitmap write-back into the bank, and previous-bitmap read
  output logic              wb_en,
  output logic [ROW_W-1:0]  wb_row,
  output logic [COL_W-1:0]  wb_col,
  output logic [WORD_W-1:0] wb_data,
  output logic [ROW_W-1:0]  bm_row,
  output logic [COL_W-1:0]  bm_col,
  input  logic [WORD_W-1:0] bm_prev
);

  filt_cfg_t            cfg;
  logic [WORD_W-1:0]    pred_a, pred_b;
  logic [ROW_W-1:0]     out_row;
  logic [COL_W-1:0]     out_col;
  logic                 outpos_set;
  logic [LANES_MAX-1:0] rcb_res, res_q;
  logic [5:0]           n_lanes;
  logic                 append, flush, clear, sel_and;
  logic [5:0]           n_bits;
  logic [6:0]           fill;

  membrane_pimconf u_conf (
    .clk, .rst_n,
    .we(conf_we), .idx(conf_idx), .wdata(conf_wdata),
    .cfg, .pred_a, .pred_b, .out_row, .out_col, .outpos_set
  );

  membrane_rcb u_rcb (
    .width(cfg.width), .dtype(cfg.dtype), .op(cfg.op),
    .pred_a, .pred_b, .data(col_data),
    .result(rcb_res), .n_lanes
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      res_q <= '0;
    else if (col_rd) res_q <= rcb_res;
  end

  membrane_bfu_ctrl u_ctrl (
    .clk, .rst_n,
    .col_rd, .flush_req, .outpos_set, .out_row, .out_col,
    .cfg, .n_lanes, .wb_valid(wb_en),
    .append, .n_bits, .flush, .clear, .sel_and,
    .wb_row, .wb_col
  );

  membrane_bitmap_buffer u_buf (
    .clk, .rst_n, .clear, .append,
    .bits(res_q), .n_bits, .flush, .sel_and,
    .prev_word(bm_prev),
    .wb_valid(wb_en), .wb_data, .fill
  );

  assign bm_row = wb_row;
  assign bm_col = wb_col;

endmodule
