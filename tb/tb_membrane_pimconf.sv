// tb_membrane_pimconf: self-checking test of the PIMCONF register file.
//
// Checks the reset values, each register write, the clamping of the field
// width into 2..64, the fallback of the unused data-type code and the one-cycle
// OUTPOS pulse.
module tb_membrane_pimconf;
  import membrane_pkg::*;

  logic clk = 0, rst_n = 0, we = 0;
  pimconf_reg_e idx = PC_CTRL;
  logic [WORD_W-1:0] wdata = '0, pred_a, pred_b;
  filt_cfg_t cfg;
  logic [ROW_W-1:0] out_row;
  logic [COL_W-1:0] out_col;
  logic outpos_set;
  int checks = 0, failures = 0;

  membrane_pimconf dut (.*);
  always #5 clk = ~clk;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  task automatic wr(pimconf_reg_e i, logic [63:0] d);
    @(posedge clk); #1 we = 1; idx = i; wdata = d;
    @(posedge clk); #1 we = 0;
  endtask

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1;
    check("reset width", 64'(cfg.width), 64);
    check("reset op", 64'(cfg.op), 64'(OP_EQ));
    check("reset multi", 64'(cfg.multi), 0);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      logic [63:0] a, b, c;
      int w;
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      w = $urandom_range(0, 127);
      c = 64'(w) | (64'($urandom_range(0, 3)) << 7) | (64'($urandom_range(0, 1)) << 9) |
          (64'($urandom_range(0, 1)) << 10);
      wr(PC_PRED_A, a);
      check("pred_a", pred_a, a);
      wr(PC_PRED_B, b);
      check("pred_b", pred_b, b);
      check("pred_a kept", pred_a, a);
      wr(PC_CTRL, c);
      check("width", 64'(cfg.width), (w < 2) ? 2 : (w > 64) ? 64 : w);
      check("dtype", 64'(cfg.dtype), (c[8:7] == 3) ? 0 : 64'(c[8:7]));
      check("op", 64'(cfg.op), 64'(c[9]));
      check("multi", 64'(cfg.multi), 64'(c[10]));
      check("no outpos pulse", 64'(outpos_set), 0);
      @(posedge clk); #1 we = 1; idx = PC_OUTPOS; wdata = {$urandom, $urandom};
      @(posedge clk); #1 we = 0;
      check("outpos pulse", 64'(outpos_set), 1);
      check("out_row", 64'(out_row), 64'(wdata[ROW_W-1:0]));
      check("out_col", 64'(out_col), 64'(wdata[ROW_W +: COL_W]));
      @(posedge clk); #1;
      check("outpos pulse ends", 64'(outpos_set), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
