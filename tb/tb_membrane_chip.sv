// tb_membrane_chip: self-checking test of one Membrane DRAM chip (16 banks).
//
// A behavioural cell array (4 rows x 128 columns per bank, read in the same
// cycle) is attached to the bank ports. Single-Bank mode: columns written over
// the 8 data pins (8 beats) must land in the addressed bank only and read back
// over the pins. All-Bank mode: after MRS, PIMCONF writes over the pins program
// every BFU (8-bit fields, a < v < b), ACT opens row 1 in all banks, one RD
// per column streams all 128 columns into all 16 BFUs, PRE flushes, and the
// bitmap in row 2 of every bank must match a reference computed from the
// array contents.
module tb_membrane_chip;
  import membrane_pkg::*;

  localparam int BANKS = 16, COLS = 128, ROWS = 4;

  logic clk = 0, rst_n = 0, cs = 0;
  dram_cmd_t cmd = '0;
  logic [DEV_W-1:0] dq_in = '0, dq_out;
  logic dq_oe, mode_ab;
  bank_req_t bank_req [BANKS];
  bank_rsp_t bank_rsp [BANKS];
  int checks = 0, failures = 0;

  membrane_chip #(.BANKS(BANKS)) dut (.*);
  always #5 clk = ~clk;

  logic [63:0] mem [BANKS][ROWS][COLS];
  for (genvar b = 0; b < BANKS; b++) begin : g_arr
    assign bank_rsp[b].rd_data = mem[b][bank_req[b].rd_row % ROWS][bank_req[b].rd_col];
    assign bank_rsp[b].bm_data = mem[b][bank_req[b].bm_row % ROWS][bank_req[b].bm_col];
    always @(posedge clk) if (bank_req[b].wr_en)
      mem[b][bank_req[b].wr_row % ROWS][bank_req[b].wr_col] <= bank_req[b].wr_data;
  end

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  task automatic issue(dram_cmd_e c, int bank, int row, int col);
    @(posedge clk); #1 cs = 1; cmd = '{cmd: c, rank: '0, bank: 4'(bank), row: ROW_W'(row), col: COL_W'(col)};
    @(posedge clk); #1 cs = 0; cmd = '0;
  endtask

  // WR followed by 8 beats of one 64-bit word
  task automatic write_word(int bank, int col, logic [63:0] w);
    @(posedge clk); #1 cs = 1; cmd = '{cmd: DC_WR, rank: '0, bank: 4'(bank), row: '0, col: COL_W'(col)};
    for (int t = 0; t < 8; t++) begin
      @(posedge clk); #1 cs = 0; cmd = '0; dq_in = w[t*8 +: 8];
    end
    @(posedge clk); #1;
  endtask

  task automatic read_word(int bank, int col, output logic [63:0] w);
    @(posedge clk); #1 cs = 1; cmd = '{cmd: DC_RD, rank: '0, bank: 4'(bank), row: '0, col: COL_W'(col)};
    for (int t = 0; t < 8; t++) begin
      @(posedge clk); #1 cs = 0; cmd = '0;
      checks++;
      if (!dq_oe) begin failures++; $display("FAIL dq_oe low on beat %0d", t); end
      w[t*8 +: 8] = dq_out;
    end
    @(posedge clk); #1;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] w, a, b;
    for (int bk = 0; bk < BANKS; bk++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) mem[bk][r][c] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check("reset mode", 64'(mode_ab), 0);
    // ---- Single-Bank mode
    for (int n = 0; n < 8; n++) begin
      int bk, c;
      logic [63:0] d, other;
      bk = $urandom_range(BANKS - 1); c = $urandom_range(COLS - 1);
      d = {$urandom, $urandom};
      other = mem[(bk + 1) % BANKS][3][c];
      issue(DC_ACT, bk, 3, 0);
      issue(DC_ACT, (bk + 1) % BANKS, 0, 0);
      write_word(bk, c, d);
      check("SB write lands", mem[bk][3][c], d);
      check("SB write other bank untouched", mem[(bk + 1) % BANKS][3][c], other);
      read_word(bk, c, w);
      check("SB read back", w, d);
    end
    // ---- All-Bank mode
    issue(DC_MRS, 0, 1, 0);
    check("AB mode", 64'(mode_ab), 1);
    a = 64'h40; b = 64'hc0;
    write_word(0, int'(PC_CTRL), 64'd8 | (64'd1 << 9));
    write_word(0, int'(PC_PRED_A), a);
    write_word(0, int'(PC_PRED_B), b);
    write_word(0, int'(PC_OUTPOS), 64'd2);
    issue(DC_ACT, 0, 1, 0);
    for (int c = 0; c < COLS; c++) begin
      @(posedge clk); #1 cs = 1; cmd = '{cmd: DC_RD, rank: '0, bank: '0, row: '0, col: COL_W'(c)};
      checks++;
      if (dq_oe) begin failures++; $display("FAIL pins driven in AB read"); end
      @(posedge clk); #1 cs = 0; cmd = '0;
    end
    issue(DC_PRE, 0, 0, 0);
    repeat (4) @(posedge clk);
    for (int bk = 0; bk < BANKS; bk++)
      for (int c = 0; c < COLS; c++)
        for (int k = 0; k < 8; k++) begin
          int i;
          logic [7:0] v;
          i = c * 8 + k;
          v = mem[bk][1][c][k*8 +: 8];
          checks++;
          if (mem[bk][2][i / 64][i % 64] !== (v > 8'h40 && v < 8'hc0)) begin
            failures++;
            if (failures < 20) $display("FAIL AB bitmap bank %0d bit %0d", bk, i);
          end
        end
    issue(DC_MRS, 0, 0, 0);
    check("back to SB", 64'(mode_ab), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
