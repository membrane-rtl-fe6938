// tb_membrane_du: self-checking test of the cache De-interleaving Unit (x8).
//
// Read side: a random cache line is split into the 8 beats a rank of x8 chips
// would send when 64-bit word c lives whole in chip c (beat t carries byte t of
// every chip's word, chip c on byte lane c); the DU must rebuild the line one
// cycle after the last beat. Write side: the DU must produce exactly those
// beats on the 8 cycles after wr_start.
module tb_membrane_du;
  import membrane_pkg::*;

  logic clk = 0, rst_n = 0;
  logic rd_beat_valid = 0, rd_line_valid, wr_start = 0, wr_beat_valid;
  logic [WORD_W-1:0] rd_beat = '0, wr_beat;
  logic [LINE_W-1:0] rd_line, wr_line = '0;
  int checks = 0, failures = 0;

  membrane_du dut (.*);
  always #5 clk = ~clk;

  function automatic logic [63:0] beat_of(logic [511:0] line, int t);
    logic [63:0] b;
    for (int c = 0; c < 8; c++) b[c*8 +: 8] = line[c*64 + t*8 +: 8];
    return b;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      logic [511:0] line;
      for (int i = 0; i < 16; i++) line[i*32 +: 32] = $urandom;
      // read: 8 beats, with a random gap before
      repeat ($urandom_range(0, 3)) @(posedge clk);
      for (int t = 0; t < 8; t++) begin
        @(posedge clk); #1 rd_beat_valid = 1; rd_beat = beat_of(line, t);
        checks++;
        if (rd_line_valid) begin failures++; $display("FAIL early line valid"); end
      end
      @(posedge clk); #1 rd_beat_valid = 0;
      checks++;
      if (!rd_line_valid || rd_line !== line) begin
        failures++;
        $display("FAIL read line %0d valid=%b", n, rd_line_valid);
      end
      @(posedge clk); #1;
      checks++;
      if (rd_line_valid) begin failures++; $display("FAIL line valid held"); end
      // write: line in, 8 beats out
      wr_start = 1; wr_line = line;
      @(posedge clk); #1 wr_start = 0;
      for (int t = 0; t < 8; t++) begin
        checks++;
        if (!wr_beat_valid || wr_beat !== beat_of(line, t)) begin
          failures++;
          $display("FAIL write beat %0d got %h exp %h", t, wr_beat, beat_of(line, t));
        end
        @(posedge clk); #1;
      end
      checks++;
      if (wr_beat_valid) begin failures++; $display("FAIL write beat valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
