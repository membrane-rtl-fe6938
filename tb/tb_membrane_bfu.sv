// tb_membrane_bfu: self-checking test of one bank-level filtering unit.
//
// A bank row of 128 random 64-bit columns is streamed through the BFU, one
// column per clock, for several field widths. Pass 1 programs a range
// predicate (a < v < b) and writes the bitmap to the output row; pass 2, with
// the multi-predicate flag, applies an equality-or-range second predicate and
// must leave the AND of both in place. The reference bitmap is computed in the
// testbench field by field. The last write-back must come no later than three
// cycles after the last column (one column per clock throughput).
module tb_membrane_bfu;
  import membrane_pkg::*;

  localparam int COLS = 128;

  logic clk = 0, rst_n = 0;
  logic conf_we = 0, col_rd = 0, flush_req = 0;
  pimconf_reg_e conf_idx = PC_CTRL;
  logic [WORD_W-1:0] conf_wdata = '0, col_data = '0, wb_data, bm_prev;
  logic wb_en;
  logic [ROW_W-1:0] wb_row, bm_row;
  logic [COL_W-1:0] wb_col, bm_col;
  int checks = 0, failures = 0, wbs = 0, last_wb = 0, cyc = 0;

  membrane_bfu dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  logic [63:0] row_in [COLS];
  logic [63:0] out_mem [COLS];   // output row (row 5)
  bit          ref_bm [$];

  assign bm_prev = out_mem[bm_col];
  always @(posedge clk) if (wb_en) begin
    checks++;
    if (wb_row != ROW_W'(5)) begin failures++; $display("FAIL wb_row %0d", wb_row); end
    out_mem[wb_col] <= wb_data;
    wbs++;
    last_wb = cyc;
  end

  function automatic logic [63:0] fld(logic [63:0] x, int w, int k);
    return (x >> (k * w)) & ((w == 64) ? '1 : ((64'd1 << w) - 1));
  endfunction
  function automatic longint sval(logic [63:0] x, int w, bit sgn);
    if (sgn && w < 64 && x[w-1]) return longint'(x | ~((64'd1 << w) - 1));
    return longint'(x);
  endfunction

  task automatic conf(pimconf_reg_e i, logic [63:0] d);
    @(posedge clk); #1 conf_we = 1; conf_idx = i; conf_wdata = d;
    @(posedge clk); #1 conf_we = 0;
  endtask

  task automatic stream(output int last_rd);
    for (int c = 0; c < COLS; c++) begin
      @(posedge clk); #1 col_rd = 1; col_data = row_in[c];
    end
    last_rd = cyc;
    @(posedge clk); #1 col_rd = 0; flush_req = 1;
    @(posedge clk); #1 flush_req = 0;
    repeat (4) @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int widths[6] = '{2, 3, 8, 16, 21, 64};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    foreach (widths[wi]) begin
      int w, lanes, last_rd, nbits;
      bit sgn;
      logic [63:0] a, b, a2, b2;
      bit r1 [$];
      w = widths[wi];
      lanes = 64 / w;
      sgn = wi[0];
      for (int c = 0; c < COLS; c++) row_in[c] = {$urandom, $urandom};
      for (int c = 0; c < COLS; c++) out_mem[c] = '1;
      a = fld(row_in[3], w, 0); b = fld(row_in[9], w, 0);
      if (sval(a, w, sgn) > sval(b, w, sgn)) begin logic [63:0] t; t = a; a = b; b = t; end
      // pass 1: a < v < b
      conf(PC_CTRL, 64'(w) | (64'(sgn) << 7) | (64'(1) << 9));
      conf(PC_PRED_A, a);
      conf(PC_PRED_B, b);
      conf(PC_OUTPOS, 64'(5) | (64'(0) << ROW_W));
      wbs = 0;
      stream(last_rd);
      r1.delete();
      for (int c = 0; c < COLS; c++)
        for (int k = 0; k < lanes; k++)
          r1.push_back(sval(a, w, sgn) < sval(fld(row_in[c], w, k), w, sgn) &&
                       sval(fld(row_in[c], w, k), w, sgn) < sval(b, w, sgn));
      nbits = r1.size();
      checks++;
      if (wbs != (nbits + 63) / 64) begin failures++; $display("FAIL w=%0d wbs=%0d", w, wbs); end
      checks++;
      if (last_wb - last_rd > 3) begin failures++; $display("FAIL latency %0d", last_wb - last_rd); end
      for (int i = 0; i < nbits; i++) begin
        checks++;
        if (out_mem[i / 64][i % 64] !== r1[i]) begin
          failures++;
          if (failures < 10) $display("FAIL pass1 w=%0d bit %0d", w, i);
        end
      end
      // pass 2: AND with v > a2 (range with b2 = max) or v == a2 for w = 2
      a2 = fld(row_in[20], w, 1 % lanes);
      b2 = sgn ? ((64'd1 << (w - 1)) - 1) : ((w == 64) ? '1 : ((64'd1 << w) - 1));
      conf(PC_CTRL, 64'(w) | (64'(sgn) << 7) | (64'(w != 2) << 9) | (64'(1) << 10));
      conf(PC_PRED_A, a2);
      conf(PC_PRED_B, b2);
      conf(PC_OUTPOS, 64'(5));
      stream(last_rd);
      for (int c = 0, i = 0; c < COLS; c++)
        for (int k = 0; k < lanes; k++, i++) begin
          bit e;
          longint v;
          v = sval(fld(row_in[c], w, k), w, sgn);
          e = (w == 2) ? (fld(row_in[c], w, k) == a2) : (sval(a2, w, sgn) < v && v < sval(b2, w, sgn));
          e = e & r1[i];
          checks++;
          if (out_mem[i / 64][i % 64] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL pass2 w=%0d bit %0d", w, i);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
