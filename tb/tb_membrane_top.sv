// tb_membrane_top: end-to-end test of the Membrane memory system at reduced
// size (1 channel, 2 ranks, 8 x8 chips, 2 banks, 12 columns per row).
//
// Behavioural cell arrays sit on every bank port. The test follows the query
// flow: (1) the host writes cache lines in Single-Bank mode and each 64-bit word
// of a line must land whole in one chip (de-interleaving); the rest of the input
// row is preloaded. (2) PIM begin switches every chip to All-Bank mode.
// (3) PIMCONF writes program a 16-bit range predicate; PIM_FILTER filters row 0
// into output row 1. (4) A second, multi-predicate pass ANDs another range
// into the same bitmap. (5) PIM end, then the host reads the bitmap lines back
// in Single-Bank mode and compares them with a reference computed from the
// array contents. Each mechanism is counted and must occur at least once:
// SB writes, SB reads, mode switches, PIMCONF writes, filter passes, bits
// cleared by the AND, and partial-word flushes (12 columns x 4 fields = 48 bits).
module tb_membrane_top;
  import membrane_pkg::*;

  localparam int CH = 1, RK = 2, CP = 8, BK = 2, COLS = 12, ROWS = 2;

  logic clk = 0, rst_n = 0;
  logic req_valid [CH], req_ready [CH], rsp_valid [CH], pim_mode [CH];
  host_req_t req [CH];
  logic [LINE_W-1:0] rsp_line [CH];
  bank_req_t bank_req [CH][RK][CP][BK];
  bank_rsp_t bank_rsp [CH][RK][CP][BK];
  int checks = 0, failures = 0, cyc = 0;
  int n_sbwr = 0, n_sbrd = 0, n_mode = 0, n_conf = 0, n_filt = 0, n_andclr = 0, n_flush = 0;

  membrane_top #(.CHANNELS(CH), .RANKS(RK), .CHIPS(CP), .BANKS(BK), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  logic [63:0] mem [CH][RK][CP][BK][ROWS][COLS];
  for (genvar a = 0; a < CH; a++) begin : g_a
    for (genvar b = 0; b < RK; b++) begin : g_b
      for (genvar c = 0; c < CP; c++) begin : g_c
        for (genvar d = 0; d < BK; d++) begin : g_d
          assign bank_rsp[a][b][c][d].rd_data =
            mem[a][b][c][d][bank_req[a][b][c][d].rd_row % ROWS][bank_req[a][b][c][d].rd_col % COLS];
          assign bank_rsp[a][b][c][d].bm_data =
            mem[a][b][c][d][bank_req[a][b][c][d].bm_row % ROWS][bank_req[a][b][c][d].bm_col % COLS];
          always @(posedge clk) if (bank_req[a][b][c][d].wr_en) begin
            mem[a][b][c][d][bank_req[a][b][c][d].wr_row % ROWS][bank_req[a][b][c][d].wr_col % COLS]
              <= bank_req[a][b][c][d].wr_data;
            // a write-back of a word holding 48 of 64 result bits is a flush
            if (pim_mode[a] && bank_req[a][b][c][d].wr_col == COL_W'(0)) n_flush++;
          end
        end
      end
    end
  end

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  // issue the same request on every channel and wait for all to finish
  task automatic host(host_req_t r, output int cycles);
    int t0;
    @(posedge clk); #1;
    foreach (req[ch]) begin req[ch] = r; req_valid[ch] = 1; end
    t0 = cyc;
    @(posedge clk); #1;
    foreach (req[ch]) req_valid[ch] = 0;
    while (!rsp_valid[0]) @(posedge clk);
    cycles = cyc - t0;
    #1;
  endtask

  function automatic host_req_t mk(host_op_e op, int rank, int bank, int row, int col);
    host_req_t r;
    r = '0;
    r.op = op; r.rank = 2'(rank); r.bank = 4'(bank); r.row = ROW_W'(row); r.col = COL_W'(col);
    return r;
  endfunction

  function automatic logic [LINE_W-1:0] bcast(logic [63:0] w);
    return {8{w}};
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_req_t r;
    int cy;
    logic [15:0] a1, b1, a2, b2;
    foreach (req_valid[ch]) begin req_valid[ch] = 0; req[ch] = '0; end
    foreach (mem[a, b, c, d, e, f]) mem[a][b][c][d][e][f] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // (1) SB writes of a few lines of row 0, then check where the words landed
    for (int n = 0; n < 4; n++) begin
      int rk, bk, col;
      logic [LINE_W-1:0] line;
      rk = n % RK; bk = (n * 3) % BK; col = (n * 5) % COLS;
      for (int i = 0; i < 16; i++) line[i*32 +: 32] = $urandom;
      r = mk(HR_WRITE, rk, bk, 0, col);
      r.line = line;
      host(r, cy);
      n_sbwr++;
      for (int ch = 0; ch < CH; ch++)
        for (int c = 0; c < CP; c++)
          check("SB write word in its chip", mem[ch][rk][c][bk][0][col], line[c*64 +: 64]);
    end
    // (2) PIM begin
    host(mk(HR_PIM_BEGIN, 0, 0, 0, 0), cy);
    n_mode++;
    check("AB mode", 64'(pim_mode[0]), 1);
    // (3) 16-bit unsigned range a1 < v < b1
    a1 = 16'h3000; b1 = 16'hb000;
    r = mk(HR_PIM_CONF, 0, 0, 0, int'(PC_CTRL)); r.line = bcast(64'd16 | (64'd1 << 9)); host(r, cy); n_conf++;
    r = mk(HR_PIM_CONF, 0, 0, 0, int'(PC_PRED_A)); r.line = bcast(64'(a1)); host(r, cy); n_conf++;
    r = mk(HR_PIM_CONF, 0, 0, 0, int'(PC_PRED_B)); r.line = bcast(64'(b1)); host(r, cy); n_conf++;
    r = mk(HR_PIM_FILTER, 0, 0, 0, 0); r.out_row = ROW_W'(1); r.out_col = '0;
    host(r, cy); n_filt++;
    // deterministic duration: request + OUTPOS write (10), tRCD (22), COLS reads
    // at tCCD_L (8), tRTP - tCCD_L (4) before PRE, tRP (22), response (1)
    checks++;
    if (cy != 10 + 22 + COLS * 8 + 4 + 22 + 1) begin
      failures++;
      $display("FAIL filter took %0d cycles", cy);
    end else begin
      $display("filter pass of %0d columns took %0d cycles", COLS, cy);
    end
    // (4) AND with a2 < v < b2
    a2 = 16'h1000; b2 = 16'h8000;
    r = mk(HR_PIM_CONF, 0, 0, 0, int'(PC_CTRL)); r.line = bcast(64'd16 | (64'd1 << 9) | (64'd1 << 10)); host(r, cy); n_conf++;
    r = mk(HR_PIM_CONF, 0, 0, 0, int'(PC_PRED_A)); r.line = bcast(64'(a2)); host(r, cy); n_conf++;
    r = mk(HR_PIM_CONF, 0, 0, 0, int'(PC_PRED_B)); r.line = bcast(64'(b2)); host(r, cy); n_conf++;
    r = mk(HR_PIM_FILTER, 0, 0, 0, 0); r.out_row = ROW_W'(1); r.out_col = '0;
    host(r, cy); n_filt++;
    // (5) PIM end and read back the bitmap words (column 0 of row 1)
    host(mk(HR_PIM_END, 0, 0, 0, 0), cy);
    n_mode++;
    check("SB mode", 64'(pim_mode[0]), 0);
    for (int rk = 0; rk < RK; rk++)
      for (int bk = 0; bk < BK; bk++) begin
        host(mk(HR_READ, rk, bk, 1, 0), cy);
        n_sbrd++;
        for (int ch = 0; ch < CH; ch++)
          for (int c = 0; c < CP; c++) begin
            logic [63:0] e;
            e = '0;
            for (int col = 0; col < COLS; col++)
              for (int k = 0; k < 4; k++) begin
                logic [15:0] v;
                bit p1;
                v = mem[ch][rk][c][bk][0][col][k*16 +: 16];
                p1 = (v > a1 && v < b1);
                e[col*4 + k] = p1 && (v > a2 && v < b2);
                if (p1 && !e[col*4 + k]) n_andclr++;
              end
            check("bitmap via SB read", rsp_line[ch][c*64 +: 64], e);
          end
      end
    if (n_sbwr == 0 || n_sbrd == 0 || n_mode < 2 || n_conf == 0 || n_filt < 2 || n_andclr == 0 || n_flush == 0) begin
      failures++;
      $display("FAIL coverage sbwr=%0d sbrd=%0d mode=%0d conf=%0d filt=%0d andclr=%0d flush=%0d",
               n_sbwr, n_sbrd, n_mode, n_conf, n_filt, n_andclr, n_flush);
    end
    $display("mechanisms: sb_write=%0d sb_read=%0d mode_switch=%0d pimconf=%0d filter=%0d and_cleared=%0d flush=%0d",
             n_sbwr, n_sbrd, n_mode, n_conf, n_filt, n_andclr, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
