// membrane_rcb: Reconfigurable Comparator Block of the bank-level filtering
// unit (BFU).
//
// One 64-bit column word from the bank holds floor(64/width) packed fields of
// `width` bits (2..64), field k in bits [k*width +: width]. Every field is
// compared at once, SIMD fashion, either for equality (value == a) or for an
// open range (a < value < b), and field k's outcome appears on result[k].
// Unsigned, two's-complement and IEEE-754 style floating-point fields are
// supported.
//
// How it works: all three types are first mapped to an order-preserving
// unsigned key (signed: flip the field's sign bit; float: invert every bit of a
// negative value, flip the sign bit of a positive one). The comparisons are then
// one ripple chain per relation across all 64 bit positions, cut at every field
// boundary, so one circuit serves every field width. The field-boundary mask and
// the predicates repeated into every field are built by replicating a
// width-bit pattern with six doubling shifts; each field's sign bit is passed
// down its field by a chain of multiplexers, and field j's result is picked
// from bit (j+1)*width-1.
//
// Timing: purely combinational; the BFU registers its output.
//
// From the paper: the two comparisons, integer and floating-point support, any
// width from 2 to 64 bits with narrower fields processed in SIMD fashion. This
// design's own choices: the packing order (field 0 in the low bits), the
// key-mapping trick, treating -0.0 and +0.0 as different values and NaNs as
// ordinary bit patterns, and the predicates being right-aligned `width`-bit
// values.
module membrane_rcb
  import membrane_pkg::*;
(
  input  logic [6:0]           width,     // field width, 2..64
  input  dtype_e               dtype,
  input  cmp_op_e              op,
  input  logic [WORD_W-1:0]    pred_a,    // right-aligned predicate a
  input  logic [WORD_W-1:0]    pred_b,    // right-aligned predicate b
  input  logic [WORD_W-1:0]    data,      // packed column word
  output logic [LANES_MAX-1:0] result,    // one bit per field, field 0 in bit 0
  output logic [5:0]           n_lanes    // number of valid result bits
);

  logic [WORD_W-1:0] lsb_m, msb_m;         // field LSB / MSB positions
  logic [WORD_W-1:0] sign_v;               // each bit's field sign bit (data)
  logic [WORD_W-1:0] fmask;                // low `width` bits set
  logic [WORD_W-1:0] key_v, key_a, key_b;  // order-preserving keys
  logic [WORD_W-1:0] ta, tb;               // predicate keys (width bits)
  logic [WORD_W-1:0] bit_res;              // field result at its MSB position
  logic [WORD_W-1:0] eq_c, gt_a, lt_b;     // comparison chains
  logic [6:0]        w;                    // width clamped to 2..64
  logic              sa, sb;               // predicate sign bits

  assign w     = (width < 7'(MIN_ELEM)) ? 7'(MIN_ELEM) :
                 (width > 7'(MAX_ELEM)) ? 7'(MAX_ELEM) : width;
  assign fmask = (w == 7'(MAX_ELEM)) ? '1 : ~({WORD_W{1'b1}} << w);
  assign n_lanes = 6'(7'(WORD_W) / w);

  // Replicate a width-bit pattern across the word by doubling: after step s
  // the pattern repeats 2**s times.
  function automatic logic [WORD_W-1:0] replicate(input logic [WORD_W-1:0] v,
                                                  input logic [6:0] fw);
    logic [WORD_W-1:0] r;
    logic [12:0]       sh;
    r  = v;
    sh = {6'b0, fw};
    for (int unsigned s = 0; s < 6; s++) begin
      if (sh < 13'(WORD_W)) r = r | (r << sh);
      sh = sh << 1;
    end
    return r;
  endfunction

  assign lsb_m = replicate(WORD_W'(1), w);
  // a field MSB exists only for fields that fit completely in the word
  assign msb_m = lsb_m << (w - 7'd1);
  assign key_a = replicate(ta, w);
  assign key_b = replicate(tb, w);

  // Every bit learns the sign (MSB) of its own field, walking down from the top.
  for (genvar i = 0; i < WORD_W; i++) begin : g_sign
    if (i == WORD_W - 1) begin : g_top
      assign sign_v[i] = data[i];
    end else begin : g_below
      assign sign_v[i] = msb_m[i] ? data[i] : sign_v[i+1];
    end
  end

  // Field j's result sits at bit (j+1)*width-1.
  for (genvar j = 0; j < LANES_MAX; j++) begin : g_res
    logic [5:0] pos;   // only meaningful while field j exists (pos <= 63)
    assign pos       = 6'(7'(j + 1) * w - 7'd1);
    assign result[j] = (6'(j) < n_lanes) ? bit_res[pos] : 1'b0;
  end

  // Predicate keys: the sign bit of a field is its MSB, msb_m & fmask.
  assign sa = |(pred_a & msb_m & fmask);
  assign sb = |(pred_b & msb_m & fmask);
  always_comb begin
    case (dtype)
      DT_SINT: begin
        ta = (pred_a ^ msb_m) & fmask;
        tb = (pred_b ^ msb_m) & fmask;
      end
      DT_FLOAT: begin
        ta = sa ? (~pred_a & fmask) : ((pred_a ^ msb_m) & fmask);
        tb = sb ? (~pred_b & fmask) : ((pred_b ^ msb_m) & fmask);
      end
      default: begin
        ta = pred_a & fmask;
        tb = pred_b & fmask;
      end
    endcase
    case (dtype)
      DT_SINT:  key_v = data ^ msb_m;
      DT_FLOAT: key_v = (sign_v & ~data) | (~sign_v & (data ^ msb_m));
      default:  key_v = data;
    endcase
  end

  // Ripple comparison chains from each field's LSB to its MSB:
  // eq_c[i]: v==a, gt_a[i]: v>a, lt_b[i]: v<b over the field's bits up to i.
  for (genvar i = 0; i < WORD_W; i++) begin : g_chain
    if (i == 0) begin : g_first
      assign eq_c[i] = ~(key_v[i] ^ key_a[i]);
      assign gt_a[i] = key_v[i] & ~key_a[i];
      assign lt_b[i] = ~key_v[i] & key_b[i];
    end else begin : g_next
      assign eq_c[i] = ~(key_v[i] ^ key_a[i]) & (lsb_m[i] | eq_c[i-1]);
      assign gt_a[i] = (key_v[i] & ~key_a[i]) |
                       (~(key_v[i] ^ key_a[i]) & ~lsb_m[i] & gt_a[i-1]);
      assign lt_b[i] = (~key_v[i] & key_b[i]) |
                       (~(key_v[i] ^ key_b[i]) & ~lsb_m[i] & lt_b[i-1]);
    end
  end

  assign bit_res = (op == OP_EQ) ? eq_c : (gt_a & lt_b);

endmodule
