// tb_membrane_bfu_ctrl: self-checking test of the BFU control unit.
//
// Drives random column reads, write-back pulses, flush requests and OUTPOS
// writes and compares every output with a cycle-level reference: append one
// cycle after each read, flush only when no append is pending, the output
// column index counting write-backs from out_col and restarting on OUTPOS.
module tb_membrane_bfu_ctrl;
  import membrane_pkg::*;

  logic clk = 0, rst_n = 0;
  logic col_rd = 0, flush_req = 0, outpos_set = 0, wb_valid = 0;
  logic [ROW_W-1:0] out_row = '0, wb_row;
  logic [COL_W-1:0] out_col = '0, wb_col;
  filt_cfg_t cfg = '{width: 7'd8, dtype: DT_UINT, op: OP_EQ, multi: 1'b0};
  logic [5:0] n_lanes = 6'd8, n_bits;
  logic append, flush, clear, sel_and;
  int checks = 0, failures = 0, flushes = 0, held = 0;

  membrane_bfu_ctrl dut (.*);
  always #5 clk = ~clk;

  // reference state
  logic r_v = 0, r_fp = 0;
  logic [COL_W-1:0] r_idx = '0;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    logic e_flush;
    e_flush = r_fp && !r_v;
    check("append", 32'(append), 32'(r_v));
    check("flush", 32'(flush), 32'(e_flush));
    check("clear", 32'(clear), 32'(outpos_set));
    check("n_bits", 32'(n_bits), 32'(n_lanes));
    check("sel_and", 32'(sel_and), 32'(cfg.multi));
    check("wb_row", 32'(wb_row), 32'(out_row));
    check("wb_col", 32'(wb_col), 32'(COL_W'(out_col + r_idx)));
    if (e_flush) flushes++;
    if (r_fp && r_v) held++;
  end

  always @(posedge clk) if (rst_n) begin
    logic e_flush;
    e_flush = r_fp && !r_v;
    r_v <= col_rd;
    if (flush_req) r_fp <= 1'b1;
    else if (e_flush) r_fp <= 1'b0;
    if (outpos_set) r_idx <= '0;
    else if (wb_valid) r_idx <= r_idx + 1'b1;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(posedge clk);
      #1;
      col_rd     = ($urandom_range(3) != 0);
      flush_req  = ($urandom_range(15) == 0);
      wb_valid   = ($urandom_range(3) == 0);
      outpos_set = ($urandom_range(63) == 0);
      if (outpos_set) begin
        out_row = ROW_W'($urandom);
        out_col = COL_W'($urandom);
      end
      cfg.multi = n[8];
      n_lanes   = 6'($urandom_range(1, 32));
    end
    if (flushes == 0 || held == 0) begin
      failures++;
      $display("FAIL coverage flushes=%0d held=%0d", flushes, held);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
