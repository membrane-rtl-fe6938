// membrane_top: a Membrane memory system: CHANNELS memory channels, each with a
// PIM-aware memory controller (with its cache De-interleaving Unit) and RANKS
// ranks of CHIPS x8 DRAM chips, each chip with BANKS banks and one Bank-level
// Filtering Unit (BFU) per bank.
//
// The host issues, per channel, normal cache-line reads and writes and the PIM
// requests (begin/end All-Bank mode, PIMCONF writes, PIM_FILTER of one row);
// the same PIM request is normally given to every channel at once, each
// filtering its part of a PIM page. Within a channel the command bus and the
// 64-bit data bus are shared by all ranks; chip c of a rank drives data bits
// [8c+7:8c]. In All-Bank mode every bank of every chip of every rank reads the
// same column into its BFU, so one read command filters
// CHANNELS*RANKS*CHIPS*BANKS 64-bit words.
//
// The DRAM cell arrays are not part of this RTL: `bank_req` and `bank_rsp`
// connect each bank's BFU and data path to its array
// ([channel][rank][chip][bank]); the array returns the addressed words in the
// same cycle.
//
// Defaults follow the paper's evaluated system: 8 channels, 4 ranks per
// channel, DDR4 8Gb x8 chips (8 per rank) with 4 bank groups of 4 banks, 128
// 64-bit columns per row.
module membrane_top
  import membrane_pkg::*;
#(
  parameter int unsigned CHANNELS = 8,
  parameter int unsigned RANKS    = 4,
  parameter int unsigned CHIPS    = WORD_W / DEV_W,
  parameter int unsigned BANKS    = 16,
  parameter int unsigned COLS     = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  // host, one request port per channel
  input  logic              req_valid [CHANNELS],
  output logic              req_ready [CHANNELS],
  input  host_req_t         req       [CHANNELS],
  output logic              rsp_valid [CHANNELS],
  output logic [LINE_W-1:0] rsp_line  [CHANNELS],
  output logic              pim_mode  [CHANNELS],
  // DRAM cell arrays
  output bank_req_t         bank_req  [CHANNELS][RANKS][CHIPS][BANKS],
  input  bank_rsp_t         bank_rsp  [CHANNELS][RANKS][CHIPS][BANKS]
);

  for (genvar ch = 0; ch < CHANNELS; ch++) begin : g_ch
    dram_cmd_t         cmd;
    logic [RANKS-1:0]  cs;
    logic [WORD_W-1:0] mc_dq_out;
    logic              mc_dq_oe;
    logic [WORD_W-1:0] rank_beat [RANKS];
    logic [RANKS-1:0]  rank_oe;
    logic [WORD_W-1:0] dq_in;

    membrane_mc #(.RANKS(RANKS), .COLS(COLS)) u_mc (
      .clk, .rst_n,
      .req_valid(req_valid[ch]), .req_ready(req_ready[ch]), .req(req[ch]),
      .rsp_valid(rsp_valid[ch]), .rsp_line(rsp_line[ch]), .pim_mode(pim_mode[ch]),
      .cmd, .cs, .dq_out(mc_dq_out), .dq_oe(mc_dq_oe),
      .dq_in, .dq_in_valid(|rank_oe)
    );

    for (genvar rk = 0; rk < RANKS; rk++) begin : g_rk
      logic [CHIPS-1:0] chip_oe;
      for (genvar c = 0; c < CHIPS; c++) begin : g_chip
        logic             mode_ab;
        logic [DEV_W-1:0] dq_o;
        logic             oe;
        membrane_chip #(.BANKS(BANKS)) u_chip (
          .clk, .rst_n,
          .cs(cs[rk]), .cmd,
          .dq_in(mc_dq_out[c*DEV_W +: DEV_W]),
          .dq_out(dq_o), .dq_oe(oe), .mode_ab,
          .bank_req(bank_req[ch][rk][c]),
          .bank_rsp(bank_rsp[ch][rk][c])
        );
        assign rank_beat[rk][c*DEV_W +: DEV_W] = dq_o;
        assign chip_oe[c] = oe;
      end
      assign rank_oe[rk] = chip_oe[0];
    end

    // the rank that drives the shared data bus
    always_comb begin
      dq_in = '0;
      for (int unsigned rk = 0; rk < RANKS; rk++)
        if (rank_oe[rk]) dq_in = dq_in | rank_beat[rk];
    end
  end

endmodule
