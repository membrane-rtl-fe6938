// membrane_pkg: shared types and constants of the Membrane bank-level PIM
// filtering design.
//
// Sizes follow the DDR4-8Gb-x8 main configuration: a bank delivers one 64-bit
// column word per burst (BL8 on an x8 device), a row holds 128 such columns, a
// chip has 16 banks (4 bank groups of 4), a rank has 8 chips, a channel has 4
// ranks and the system has 8 channels. Command encodings, the PIMCONF register
// map, the row/column widths and the DRAM timing values in clock cycles are
// this design's own choices; the timing values are DDR4-3200 (22-22-22) data
// sheet numbers.
package membrane_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned WORD_W   = 64;   // bits fetched per bank burst
  localparam int unsigned ROW_W    = 16;   // row address bits (64K rows, 8Gb x8)
  localparam int unsigned COL_W    = 7;    // 64-bit column index within a row
  localparam int unsigned BURST    = 8;    // beats per burst (BL8)
  localparam int unsigned DEV_W    = 8;    // data pins per chip (x8)
  localparam int unsigned LINE_W   = 512;  // cache line in bits
  localparam int unsigned MIN_ELEM = 2;    // narrowest packed field
  localparam int unsigned MAX_ELEM = 64;   // widest packed field
  localparam int unsigned LANES_MAX = WORD_W / MIN_ELEM;  // 32 results/column

  // ---------------------------------------------------------------- filter config
  // Data type of the packed field.
  typedef enum logic [1:0] {
    DT_UINT  = 2'd0,   // unsigned integer / dictionary code
    DT_SINT  = 2'd1,   // two's complement integer
    DT_FLOAT = 2'd2    // IEEE-754 style sign-magnitude (half/single/double)
  } dtype_e;

  // Comparison performed by the comparator block.
  typedef enum logic [0:0] {
    OP_EQ    = 1'b0,   // value == a
    OP_RANGE = 1'b1    // a < value < b
  } cmp_op_e;

  typedef struct packed {
    logic [6:0] width;   // field width in bits, 2..64
    dtype_e     dtype;
    cmp_op_e    op;
    logic       multi;   // AND the new result into the previous bitmap
  } filt_cfg_t;

  // PIMCONF register indices (column address of a PIMCONF write).
  typedef enum logic [1:0] {
    PC_CTRL   = 2'd0,    // data[6:0]=width, [8:7]=dtype, [9]=op, [10]=multi
    PC_PRED_A = 2'd1,    // first predicate value, right-aligned
    PC_PRED_B = 2'd2,    // second predicate value (range upper bound)
    PC_OUTPOS = 2'd3     // data[ROW_W-1:0]=output row, [ROW_W+COL_W-1:ROW_W]=first output column
  } pimconf_reg_e;

  // ---------------------------------------------------------------- DRAM command bus
  typedef enum logic [2:0] {
    DC_NOP = 3'd0,
    DC_ACT = 3'd1,       // open a row (all banks in AB mode)
    DC_RD  = 3'd2,       // SB: read column to pins; AB: read column into every BFU
    DC_WR  = 3'd3,       // SB: write column from pins; AB: PIMCONF write
    DC_PRE = 3'd4,       // close the row; in AB mode also flushes the BFU bitmap
    DC_MRS = 3'd5        // mode register set: row[0]=1 selects AB mode
  } dram_cmd_e;

  typedef struct packed {
    dram_cmd_e        cmd;
    logic [1:0]       rank;   // ignored in AB mode (broadcast)
    logic [3:0]       bank;   // {bank group, bank}; ignored in AB mode
    logic [ROW_W-1:0] row;
    logic [COL_W-1:0] col;
  } dram_cmd_t;

  // Per-bank port to the (external) DRAM cell array.
  typedef struct packed {
    logic [ROW_W-1:0]  rd_row;    // open row
    logic [COL_W-1:0]  rd_col;    // column being read
    logic              rd_en;
    logic              wr_en;     // column write (normal write or bitmap write-back)
    logic [ROW_W-1:0]  wr_row;
    logic [COL_W-1:0]  wr_col;
    logic [WORD_W-1:0] wr_data;
    logic [ROW_W-1:0]  bm_row;    // previous-bitmap read address
    logic [COL_W-1:0]  bm_col;
  } bank_req_t;

  typedef struct packed {
    logic [WORD_W-1:0] rd_data;   // word at rd_row/rd_col
    logic [WORD_W-1:0] bm_data;   // word at bm_row/bm_col
  } bank_rsp_t;

  // ---------------------------------------------------------------- host requests
  typedef enum logic [2:0] {
    HR_READ      = 3'd0,  // read one cache line (SB mode)
    HR_WRITE     = 3'd1,  // write one cache line (SB mode)
    HR_PIM_BEGIN = 3'd2,  // drain, then MRS into AB mode
    HR_PIM_END   = 3'd3,  // MRS back into SB mode
    HR_PIM_CONF  = 3'd4,  // PIMCONF write, register index in col
    HR_PIM_FILTER= 3'd5   // filter one input row into the output page
  } host_op_e;

  typedef struct packed {
    host_op_e         op;
    logic [1:0]       rank;
    logic [3:0]       bank;
    logic [ROW_W-1:0] row;       // input row (filter) or accessed row
    logic [COL_W-1:0] col;       // accessed column or PIMCONF index
    logic [ROW_W-1:0] out_row;   // filter: output page row
    logic [COL_W-1:0] out_col;   // filter: offset within the output row
    logic [LINE_W-1:0] line;     // write data, as the CPU sees it
  } host_req_t;

  // Number of fields packed in one 64-bit column at width w (floor(64/w)).
  function automatic logic [5:0] lanes_of(input logic [6:0] w);
    logic [5:0] n;
    n = '0;
    for (int unsigned k = MIN_ELEM; k <= MAX_ELEM; k++)
      if (w == 7'(k)) n = 6'((WORD_W / k) > LANES_MAX ? LANES_MAX : (WORD_W / k));
    return n;
  endfunction

endpackage
