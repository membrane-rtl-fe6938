// tb_membrane_rcb: self-checking test of the comparator block.
//
// For every field width 2..64, every data type and both comparisons, random
// column words are compared against a reference that unpacks each field and
// compares it with ordinary integer or real arithmetic: unsigned, sign-extended
// two's complement, $bitstoreal/$bitstoshortreal for 64/32-bit floats and a
// sign-magnitude value for other float widths. Predicates are drawn from the
// word's own fields so that equal and in-range outcomes occur often.
module tb_membrane_rcb;
  import membrane_pkg::*;

  logic [6:0]           width;
  dtype_e               dtype;
  cmp_op_e              op;
  logic [WORD_W-1:0]    pred_a, pred_b, data;
  logic [LANES_MAX-1:0] result;
  logic [5:0]           n_lanes;
  int checks = 0, failures = 0;
  int hits = 0;

  membrane_rcb dut (.*);

  function automatic logic [63:0] field(logic [63:0] x, int w, int k);
    logic [63:0] m;
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    return (x >> (k * w)) & m;
  endfunction

  // -1: less, 0: equal, 1: greater
  function automatic int cmp3(logic [63:0] x, logic [63:0] y, int w, dtype_e t);
    longint sx, sy;
    real rx, ry;
    case (t)
      DT_UINT: return (x < y) ? -1 : (x == y) ? 0 : 1;
      DT_SINT: begin
        sx = (w < 64 && x[w-1]) ? longint'(x | ~((64'd1 << w) - 1)) : longint'(x);
        sy = (w < 64 && y[w-1]) ? longint'(y | ~((64'd1 << w) - 1)) : longint'(y);
        return (sx < sy) ? -1 : (sx == sy) ? 0 : 1;
      end
      default: begin
        if (w == 64) begin
          rx = $bitstoreal(x); ry = $bitstoreal(y);
        end else if (w == 32) begin
          rx = real'($bitstoshortreal(x[31:0])); ry = real'($bitstoshortreal(y[31:0]));
        end else begin
          rx = x[w-1] ? -real'(x & ((64'd1 << (w-1)) - 1)) : real'(x & ((64'd1 << (w-1)) - 1));
          ry = y[w-1] ? -real'(y & ((64'd1 << (w-1)) - 1)) : real'(y & ((64'd1 << (w-1)) - 1));
        end
        return (rx < ry) ? -1 : (rx == ry) ? 0 : 1;
      end
    endcase
  endfunction

  // a float field that is neither a zero nor a NaN/infinity (exponent all ones)
  function automatic logic [63:0] fix_float(logic [63:0] v, int w);
    logic [63:0] m;
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    v = v & m;
    if (w == 64 && v[62:52] == 11'h7ff) v[62] = 1'b0;
    if (w == 32 && v[30:23] == 8'hff) v[30] = 1'b0;
    if ((v & (m >> 1)) == 0) v[0] = 1'b1;
    return v;
  endfunction

  initial begin : watchdog
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 2; w <= 64; w++) begin
      for (int t = 0; t < 3; t++) begin
        for (int o = 0; o < 2; o++) begin
          for (int rep = 0; rep < 6; rep++) begin
            int lanes;
            logic [63:0] fa, fb, tmp;
            lanes = 64 / w;
            width = 7'(w);
            dtype = dtype_e'(t);
            op    = cmp_op_e'(o);
            data  = {$urandom, $urandom};
            if (dtype == DT_FLOAT)
              for (int k = 0; k < lanes; k++) begin
                tmp = fix_float(field(data, w, k), w);
                data = (data & ~(((w == 64) ? '1 : ((64'd1 << w) - 1)) << (k * w))) | (tmp << (k * w));
              end
            fa = field(data, w, $urandom_range(lanes - 1));
            fb = field(data, w, $urandom_range(lanes - 1));
            if (cmp3(fa, fb, w, dtype) > 0) begin tmp = fa; fa = fb; fb = tmp; end
            if (rep == 5 && dtype != DT_FLOAT) begin   // a random, likely absent value
              fa = field({$urandom, $urandom}, w, 0);
            end
            pred_a = fa;
            pred_b = fb;
            #1;
            checks++;
            if (n_lanes != 6'(lanes)) begin
              failures++;
              $display("FAIL lanes w=%0d got %0d", w, n_lanes);
            end
            for (int k = 0; k < LANES_MAX; k++) begin
              logic exp;
              if (k < lanes) begin
                if (op == OP_EQ) exp = (cmp3(field(data, w, k), fa, w, dtype) == 0);
                else exp = (cmp3(fa, field(data, w, k), w, dtype) < 0) &&
                           (cmp3(field(data, w, k), fb, w, dtype) < 0);
              end else exp = 1'b0;
              hits += int'(exp);
              checks++;
              if (result[k] !== exp) begin
                failures++;
                if (failures < 20)
                  $display("FAIL w=%0d t=%0d op=%0d lane=%0d data=%h a=%h b=%h got=%b exp=%b",
                           w, t, o, k, data, fa, fb, result[k], exp);
              end
            end
          end
        end
      end
    end
    if (hits == 0) begin
      failures++;
      $display("FAIL no comparison ever matched");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
