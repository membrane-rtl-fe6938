// membrane_pimconf: the PIMCONF registers of one bank-level filtering unit.
//
// The host programs every BFU of the memory system at once: a PIMCONF write is
// broadcast to all banks, and the column address of the write selects one of
// four registers (see pimconf_reg_e in membrane_pkg):
//   CTRL   field width (2..64), data type, comparison, multi-predicate flag
//   PRED_A predicate a (equality value or range lower bound)
//   PRED_B predicate b (range upper bound)
//   OUTPOS output page row and first output column of the next filter pass
// A write to OUTPOS also pulses `outpos_set`, which restarts the control
// unit's bitmap position.
//
// Timing: a write on cycle t is visible on the outputs from cycle t+1.
//
// The paper says PIMCONF registers carry the predicate values, the operation
// and the processing bit width. The register map, the OUTPOS register, the
// clamping of an out-of-range width into 2..64 and the reset values (width 64,
// unsigned, equality, single predicate, predicates 0) are this design's own.
module membrane_pimconf
  import membrane_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  pimconf_reg_e      idx,
  input  logic [WORD_W-1:0] wdata,
  output filt_cfg_t         cfg,
  output logic [WORD_W-1:0] pred_a,
  output logic [WORD_W-1:0] pred_b,
  output logic [ROW_W-1:0]  out_row,
  output logic [COL_W-1:0]  out_col,
  output logic              outpos_set
);

  logic [6:0] w_in;
  always_comb begin
    w_in = wdata[6:0];
    if (w_in < 7'(MIN_ELEM)) w_in = 7'(MIN_ELEM);
    if (w_in > 7'(MAX_ELEM)) w_in = 7'(MAX_ELEM);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg        <= '{width: 7'(MAX_ELEM), dtype: DT_UINT, op: OP_EQ, multi: 1'b0};
      pred_a     <= '0;
      pred_b     <= '0;
      out_row    <= '0;
      out_col    <= '0;
      outpos_set <= 1'b0;
    end else begin
      outpos_set <= 1'b0;
      if (we) begin
        case (idx)
          PC_CTRL: begin
            cfg.width <= w_in;
            cfg.dtype <= (wdata[8:7] == 2'd3) ? DT_UINT : dtype_e'(wdata[8:7]);
            cfg.op    <= cmp_op_e'(wdata[9]);
            cfg.multi <= wdata[10];
          end
          PC_PRED_A: pred_a <= wdata;
          PC_PRED_B: pred_b <= wdata;
          PC_OUTPOS: begin
            out_row    <= wdata[ROW_W-1:0];
            out_col    <= wdata[ROW_W +: COL_W];
            outpos_set <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

endmodule
