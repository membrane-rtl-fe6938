// membrane_bfu_ctrl: Control Unit of a bank-level filtering unit.
//
// The control unit paces the BFU's two-stage datapath and keeps the bitmap
// position. Stage 1 is the comparator: on a cycle with `col_rd` (an all-bank
// READ delivering the bank's 64-bit column word) the comparator results are
// registered by the BFU. Stage 2, one cycle later, appends those results to the
// bitmap buffer (`append`, with `n_bits` = fields per column at the configured
// width). Every time the buffer writes back a word (`wb_valid`) the output word
// index advances, so write-back goes to column out_col + index of row out_row
// of the output page; the same address is presented for reading the previous
// bitmap word when several predicates are combined (`sel_and` = multi).
// `flush_req` (the all-bank PRECHARGE that ends a filter pass) makes the buffer
// write back a partly filled word as soon as no append is pending. A write of
// the OUTPOS register (`outpos_set`) empties the buffer and restarts the index.
//
// Timing: one column per clock can be accepted; results reach the buffer one
// cycle after the read. The paper gives only the unit's role (fetching data and
// comparing at the chosen bit length); the pipeline, the address counter and
// the flush rule are this design's own.
module membrane_bfu_ctrl
  import membrane_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             col_rd,
  input  logic             flush_req,
  input  logic             outpos_set,
  input  logic [ROW_W-1:0] out_row,
  input  logic [COL_W-1:0] out_col,
  input  filt_cfg_t        cfg,
  input  logic [5:0]       n_lanes,
  input  logic             wb_valid,
  output logic             append,
  output logic [5:0]       n_bits,
  output logic             flush,
  output logic             clear,
  output logic             sel_and,
  output logic [ROW_W-1:0] wb_row,
  output logic [COL_W-1:0] wb_col
);

  logic             v1_q;
  logic             flush_pend_q;
  logic [COL_W-1:0] idx_q;

  assign append  = v1_q;
  assign n_bits  = n_lanes;
  assign flush   = flush_pend_q && !v1_q;
  assign clear   = outpos_set;
  assign sel_and = cfg.multi;
  assign wb_row  = out_row;
  assign wb_col  = out_col + idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q         <= 1'b0;
      flush_pend_q <= 1'b0;
      idx_q        <= '0;
    end else begin
      v1_q <= col_rd;
      if (flush_req)  flush_pend_q <= 1'b1;
      else if (flush) flush_pend_q <= 1'b0;
      if (outpos_set)    idx_q <= '0;
      else if (wb_valid) idx_q <= idx_q + 1'b1;
    end
  end

endmodule
