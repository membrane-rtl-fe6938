// tb_membrane_bitmap_buffer: self-checking test of the BFU bitmap buffer.
//
// Random groups of 1..32 result bits are appended, with occasional idle cycles
// and flushes. A reference keeps the expected bit stream as a queue and builds
// each 64-bit word independently; every write-back is compared with it, with
// and without the multi-predicate AND against a random previous word.
module tb_membrane_bitmap_buffer;
  import membrane_pkg::*;

  logic clk = 0, rst_n = 0;
  logic clear, append, flush, sel_and;
  logic [LANES_MAX-1:0] bits;
  logic [5:0] n_bits;
  logic [WORD_W-1:0] prev_word, wb_data;
  logic wb_valid;
  logic [6:0] fill;
  int checks = 0, failures = 0, words = 0, flushes = 0, ands = 0;

  membrane_bitmap_buffer dut (.*);

  always #5 clk = ~clk;

  bit exp_q[$];   // bits appended but not yet written back

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check write-backs on the falling edge, when the inputs are stable
  always @(negedge clk) if (rst_n && wb_valid) begin
    logic [63:0] e;
    int n;
    e = '0;
    n = append ? 64 : exp_q.size() + 0;
    // the words formed by appended bits already in the queue
    if (append) begin
      for (int i = 0; i < n_bits; i++) exp_q.push_back(bits[i]);
      for (int i = 0; i < 64; i++) e[i] = exp_q[i];
      for (int i = 0; i < 64; i++) void'(exp_q.pop_front());
    end else begin
      for (int i = 0; i < exp_q.size(); i++) e[i] = exp_q[i];
      exp_q.delete();
      flushes++;
    end
    if (sel_and) begin
      e = e & prev_word;
      ands++;
    end
    checks++;
    words++;
    if (wb_data !== e) begin
      failures++;
      $display("FAIL word %0d got %h exp %h", words, wb_data, e);
    end
  end else if (rst_n && append) begin
    for (int i = 0; i < n_bits; i++) exp_q.push_back(bits[i]);
  end else if (rst_n && flush) begin
    exp_q.delete();   // flush of an empty buffer
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (32'(fill) != exp_q.size()) begin
      failures++;
      $display("FAIL fill %0d exp %0d", fill, exp_q.size());
    end
  end

  initial begin
    clear = 0; append = 0; flush = 0; sel_and = 0; bits = '0; n_bits = 6'd1; prev_word = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(posedge clk);
      #1;
      append    = ($urandom_range(9) < 7);
      flush     = !append && ($urandom_range(19) == 0);
      n_bits    = 6'($urandom_range(1, 32));
      if (cyc % 500 < 250) n_bits = 6'(64 / $urandom_range(2, 64));
      bits      = $urandom;
      sel_and   = (cyc >= 1500);
      prev_word = {$urandom, $urandom};
    end
    @(posedge clk);
    #1 append = 0; flush = 0;
    repeat (2) @(posedge clk);
    if (flushes == 0 || ands == 0 || words < 100) begin
      failures++;
      $display("FAIL coverage words=%0d flushes=%0d ands=%0d", words, flushes, ands);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
