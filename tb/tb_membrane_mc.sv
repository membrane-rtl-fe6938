// tb_membrane_mc: self-checking test of the PIM-aware memory controller.
//
// A small responder plays the DRAM side: after every RD it returns 8 beats
// that encode the command's rank, bank and column. The test issues a cache-line
// write and read, PIM begin, a PIMCONF write, a full 128-column PIM_FILTER and
// PIM end, logs every command with its cycle and checks: the DDR4 timings
// (ACT->RD/WR = tRCD, RD->RD = tCCD_L in a filter pass, ACT->PRE >= tRAS,
// PRE->done >= tRP), the number of filter reads, chip selects (one rank in SB
// mode, all ranks in AB mode), the MRS mode bit, the write beats (the line
// de-interleaved so word c goes to chip c), and the returned read line.
module tb_membrane_mc;
  import membrane_pkg::*;

  localparam int RANKS = 4, T_RCD = 22, T_RP = 22, T_RAS = 52, T_CCD_L = 8, T_RTP = 12, COLS = 128;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, rsp_valid, pim_mode, dq_oe, dq_in_valid = 0;
  host_req_t req = '0;
  logic [LINE_W-1:0] rsp_line;
  dram_cmd_t cmd;
  logic [RANKS-1:0] cs;
  logic [WORD_W-1:0] dq_out, dq_in = '0;
  int checks = 0, failures = 0, cyc = 0;

  membrane_mc dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  typedef struct { dram_cmd_e c; int t; logic [RANKS-1:0] cs; int col; int row; } ev_t;
  ev_t log_q [$];
  logic [63:0] beats [$];
  int rd_pending = 0;
  logic [63:0] rd_word;

  // log commands and write beats at each rising edge
  always @(posedge clk) if (rst_n) begin
    if (cmd.cmd != DC_NOP) log_q.push_back('{cmd.cmd, cyc, cs, int'(cmd.col), int'(cmd.row)});
    if (dq_oe) beats.push_back(dq_out);
  end

  // responder: beats on the 8 cycles after an SB read
  always @(posedge clk) begin
    if (cmd.cmd == DC_RD && !pim_mode) begin
      rd_pending <= 8;
      rd_word <= {32'(cmd.col), 16'(cmd.bank), 16'(cmd.rank)};
    end else if (rd_pending > 0) rd_pending <= rd_pending - 1;
  end
  always_comb begin
    int t;
    t = 8 - rd_pending;
    dq_in_valid = (rd_pending > 0);
    dq_in = '0;
    // chip c sends byte t of its word; every chip holds rd_word ^ c
    for (int c = 0; c < 8; c++) dq_in[c*8 +: 8] = 8'((rd_word ^ 64'(c)) >> (8 * t));
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic run(host_req_t r, output int t_done);
    @(posedge clk); #1 req = r; req_valid = 1;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    while (!rsp_valid) @(posedge clk);
    t_done = cyc;
    #1;
  endtask

  function automatic logic [63:0] beat_of(logic [511:0] line, int t);
    logic [63:0] b;
    for (int c = 0; c < 8; c++) b[c*8 +: 8] = line[c*64 + t*8 +: 8];
    return b;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_req_t r;
    int td;
    logic [511:0] line;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // ---- SB write
    for (int i = 0; i < 16; i++) line[i*32 +: 32] = $urandom;
    r = '0; r.op = HR_WRITE; r.rank = 2; r.bank = 5; r.row = 77; r.col = 9; r.line = line;
    log_q.delete(); beats.delete();
    run(r, td);
    check("write cmds", log_q.size(), 3);
    check("write ACT", int'(log_q[0].c), int'(DC_ACT));
    check("write cs one rank", int'(log_q[0].cs), 4);
    check("write WR", int'(log_q[1].c), int'(DC_WR));
    check("tRCD", log_q[1].t - log_q[0].t, T_RCD);
    check("write PRE", int'(log_q[2].c), int'(DC_PRE));
    checks++; if (log_q[2].t - log_q[0].t < T_RAS) begin failures++; $display("FAIL tRAS"); end
    checks++; if (td - log_q[2].t < T_RP) begin failures++; $display("FAIL tRP"); end
    check("write beats", beats.size(), 8);
    for (int t = 0; t < 8; t++) begin
      checks++;
      if (beats[t] !== beat_of(line, t)) begin failures++; $display("FAIL beat %0d", t); end
    end
    // ---- SB read
    r = '0; r.op = HR_READ; r.rank = 1; r.bank = 3; r.row = 5; r.col = 17;
    log_q.delete();
    run(r, td);
    check("read RD", int'(log_q[1].c), int'(DC_RD));
    check("read tRCD", log_q[1].t - log_q[0].t, T_RCD);
    checks++; if (log_q[2].t - log_q[1].t < T_RTP) begin failures++; $display("FAIL tRTP"); end
    for (int c = 0; c < 8; c++) begin
      checks++;
      if (rsp_line[c*64 +: 64] !== ({32'd17, 16'd3, 16'd1} ^ 64'(c))) begin
        failures++; $display("FAIL read word %0d %h", c, rsp_line[c*64 +: 64]);
      end
    end
    // ---- PIM begin
    r = '0; r.op = HR_PIM_BEGIN;
    log_q.delete();
    run(r, td);
    check("MRS", int'(log_q[0].c), int'(DC_MRS));
    check("MRS all ranks", int'(log_q[0].cs), 15);
    check("MRS AB bit", log_q[0].row, 1);
    check("pim_mode", int'(pim_mode), 1);
    // ---- PIMCONF
    r = '0; r.op = HR_PIM_CONF; r.col = COL_W'(PC_PRED_A); r.line = {8{64'h1234_5678_9abc_def0}};
    log_q.delete(); beats.delete();
    run(r, td);
    check("conf WR", int'(log_q[0].c), int'(DC_WR));
    check("conf all ranks", int'(log_q[0].cs), 15);
    check("conf index", log_q[0].col, int'(PC_PRED_A));
    for (int t = 0; t < 8; t++) begin
      checks++;
      if (beats[t] !== {8{8'(64'h1234_5678_9abc_def0 >> (8 * t))}}) begin failures++; $display("FAIL conf beat"); end
    end
    // ---- PIM_FILTER
    r = '0; r.op = HR_PIM_FILTER; r.row = 300; r.out_row = 301; r.out_col = 64;
    log_q.delete(); beats.delete();
    run(r, td);
    check("filter OUTPOS write", int'(log_q[0].c), int'(DC_WR));
    check("filter OUTPOS index", log_q[0].col, int'(PC_OUTPOS));
    checks++;
    if (beats[0] !== {8{8'(64'({7'd64, 16'd301}))}}) begin failures++; $display("FAIL outpos beat %h", beats[0]); end
    check("filter ACT", int'(log_q[1].c), int'(DC_ACT));
    check("filter ACT row", log_q[1].row, 300);
    check("filter ACT all ranks", int'(log_q[1].cs), 15);
    check("filter cmds", log_q.size(), 2 + COLS + 1);
    check("filter tRCD", log_q[2].t - log_q[1].t, T_RCD);
    for (int c = 0; c < COLS; c++) begin
      check("filter RD", int'(log_q[2 + c].c), int'(DC_RD));
      check("filter RD col", log_q[2 + c].col, c);
      if (c > 0) check("tCCD_L", log_q[2 + c].t - log_q[1 + c].t, T_CCD_L);
    end
    check("filter PRE", int'(log_q[2 + COLS].c), int'(DC_PRE));
    check("filter PRE all ranks", int'(log_q[2 + COLS].cs), 15);
    checks++; if (log_q[2 + COLS].t - log_q[1 + COLS].t < T_RTP) begin failures++; $display("FAIL filter tRTP"); end
    checks++; if (td - log_q[2 + COLS].t < T_RP) begin failures++; $display("FAIL filter tRP"); end
    $display("PIM_FILTER of %0d columns: %0d cycles from ACT to done", COLS, td - log_q[1].t);
    // ---- PIM end
    r = '0; r.op = HR_PIM_END;
    log_q.delete();
    run(r, td);
    check("MRS SB bit", log_q[0].row, 0);
    check("pim_mode off", int'(pim_mode), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
