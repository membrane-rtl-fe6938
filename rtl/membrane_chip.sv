// membrane_chip: the PIM logic of one x8 DDR4 Membrane DRAM chip: the mode
// register, command decode, one BFU per bank and the data pins.
//
// Single-Bank (SB) mode is ordinary DRAM: ACT opens a row in one bank, RD sends
// that bank's 64-bit column word out over the 8 data pins in 8 beats (bits
// [8t+7:8t] on beat t), WR gathers 8 beats and writes one column word.
// An MRS command with row[0]=1 switches the chip into All-Bank (AB) mode, row[0]=0
// back to SB mode. In AB mode the bank address is ignored: ACT opens the same row
// in every bank, RD reads the same column of every bank into that bank's BFU,
// WR is a PIMCONF write whose 64-bit word (gathered from 8 beats) is broadcast
// to every BFU with register index col[1:0], and PRE tells every BFU to flush
// its partly filled bitmap word. BFU bitmap write-back and previous-bitmap reads
// go to the bank's cell array through the same per-bank port.
//
// The cell arrays are outside this module: `bank_req[b]` carries the open row,
// the column read and any column write of bank b, and `bank_rsp[b]` returns the
// column word (read in the same cycle).
//
// Timing: read beats leave on the 8 cycles after the RD; write beats are taken
// on the 8 cycles after the WR (one beat per clock; the memory controller keeps
// to the same schedule). `cs` is the rank's chip select.
//
// From the paper: SB/AB modes switched through the mode register, an AB READ
// performing the read and the comparison in all banks at the same column,
// PIMCONF writes broadcast to all BFUs, the 64-bit column burst per bank (BL8 on
// x8). The encodings and the beat schedule are this design's.
module membrane_chip
  import membrane_pkg::*;
#(
  parameter int unsigned BANKS = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cs,
  input  dram_cmd_t         cmd,
  input  logic [DEV_W-1:0]  dq_in,
  output logic [DEV_W-1:0]  dq_out,
  output logic              dq_oe,
  output logic              mode_ab,
  output bank_req_t         bank_req [BANKS],
  input  bank_rsp_t         bank_rsp [BANKS]
);

  localparam int unsigned BW = (BANKS > 1) ? $clog2(BANKS) : 1;

  logic [ROW_W-1:0]  open_row [BANKS];
  logic              ab_q;
  // read serializer
  logic [3:0]        rd_cnt;
  logic [WORD_W-1:0] rd_shift;
  // write deserializer
  logic [3:0]        wr_cnt;
  logic [WORD_W-1:0] wr_shift;
  logic              wr_ab;
  logic [BW-1:0]     wr_bank;
  logic [COL_W-1:0]  wr_col;
  logic              wr_done;
  logic [WORD_W-1:0] wr_word;

  logic              is_act, is_rd, is_wr, is_pre, is_mrs;
  logic [BW-1:0]     cbank;

  assign is_act = cs && cmd.cmd == DC_ACT;
  assign is_rd  = cs && cmd.cmd == DC_RD;
  assign is_wr  = cs && cmd.cmd == DC_WR;
  assign is_pre = cs && cmd.cmd == DC_PRE;
  assign is_mrs = cs && cmd.cmd == DC_MRS;
  assign cbank  = BW'(cmd.bank);
  assign mode_ab = ab_q;

  // last beat arrives this cycle
  assign wr_done = (wr_cnt == 4'd1);
  assign wr_word = {dq_in, wr_shift[WORD_W-1:DEV_W]};

  // BFU outputs
  logic              bfu_wb_en   [BANKS];
  logic [ROW_W-1:0]  bfu_wb_row  [BANKS];
  logic [COL_W-1:0]  bfu_wb_col  [BANKS];
  logic [WORD_W-1:0] bfu_wb_data [BANKS];
  logic [ROW_W-1:0]  bfu_bm_row  [BANKS];
  logic [COL_W-1:0]  bfu_bm_col  [BANKS];

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    membrane_bfu u_bfu (
      .clk, .rst_n,
      .conf_we   (ab_q && wr_done && wr_ab),
      .conf_idx  (pimconf_reg_e'(wr_col[1:0])),
      .conf_wdata(wr_word),
      .col_rd    (ab_q && is_rd),
      .col_data  (bank_rsp[b].rd_data),
      .flush_req (ab_q && is_pre),
      .wb_en     (bfu_wb_en[b]),
      .wb_row    (bfu_wb_row[b]),
      .wb_col    (bfu_wb_col[b]),
      .wb_data   (bfu_wb_data[b]),
      .bm_row    (bfu_bm_row[b]),
      .bm_col    (bfu_bm_col[b]),
      .bm_prev   (bank_rsp[b].bm_data)
    );

    always_comb begin
      bank_req[b].rd_row = open_row[b];
      bank_req[b].rd_col = cmd.col;
      bank_req[b].rd_en  = is_rd && (ab_q || cbank == BW'(b));
      bank_req[b].bm_row = bfu_bm_row[b];
      bank_req[b].bm_col = bfu_bm_col[b];
      if (ab_q) begin
        bank_req[b].wr_en   = bfu_wb_en[b];
        bank_req[b].wr_row  = bfu_wb_row[b];
        bank_req[b].wr_col  = bfu_wb_col[b];
        bank_req[b].wr_data = bfu_wb_data[b];
      end else begin
        bank_req[b].wr_en   = wr_done && !wr_ab && wr_bank == BW'(b);
        bank_req[b].wr_row  = open_row[b];
        bank_req[b].wr_col  = wr_col;
        bank_req[b].wr_data = wr_word;
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                     open_row[b] <= '0;
      else if (is_act && (ab_q || cbank == BW'(b)))  open_row[b] <= cmd.row;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ab_q     <= 1'b0;
      rd_cnt   <= '0;
      rd_shift <= '0;
      wr_cnt   <= '0;
      wr_shift <= '0;
      wr_ab    <= 1'b0;
      wr_bank  <= '0;
      wr_col   <= '0;
    end else begin
      if (is_mrs) ab_q <= cmd.row[0];
      // SB read: capture the column word, then shift it out a byte per cycle
      if (is_rd && !ab_q) begin
        rd_shift <= bank_rsp[cbank].rd_data;
        rd_cnt   <= 4'd8;
      end else if (rd_cnt != 0) begin
        rd_shift <= rd_shift >> DEV_W;
        rd_cnt   <= rd_cnt - 4'd1;
      end
      // write: gather 8 beats
      if (is_wr) begin
        wr_cnt  <= 4'd8;
        wr_ab   <= ab_q;
        wr_bank <= cbank;
        wr_col  <= cmd.col;
      end else if (wr_cnt != 0) begin
        wr_shift <= {dq_in, wr_shift[WORD_W-1:DEV_W]};
        wr_cnt   <= wr_cnt - 4'd1;
      end
    end
  end

  assign dq_out = rd_shift[DEV_W-1:0];
  assign dq_oe  = (rd_cnt != 0);

endmodule
