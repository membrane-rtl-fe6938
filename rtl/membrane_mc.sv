// membrane_mc: one channel's memory controller with Membrane PIM support.
//
// The controller takes host requests one at a time (valid/ready) and turns each
// into a fixed, deterministic sequence of DRAM commands, waiting the DRAM timing
// parameters between them. It needs no feedback from the chips because every
// latency is known in advance.
//   HR_READ / HR_WRITE  normal (Single-Bank) cache-line access to one rank and
//                       bank, closed-page: ACT, tRCD, RD or WR, PRE, tRP. Data
//                       passes through the cache De-interleaving Unit.
//   HR_PIM_BEGIN/END    MRS to every rank, switching All-Bank mode on or off.
//                       Requests are served in order, so the queue is drained
//                       before the switch.
//   HR_PIM_CONF         PIMCONF write to every rank (register index in col).
//   HR_PIM_FILTER       filter one input row into the output page: a PIMCONF
//                       write of the output position, ACT of the input row in
//                       all banks of all ranks, one RD per column every
//                       tCCD_L (COLS reads), then PRE, which also flushes the
//                       BFU bitmaps, and tRP.
// `rsp_valid` pulses when a request is complete; for HR_READ `rsp_line` then
// holds the line.
//
// DRAM side: `cmd` with a chip select per rank (`cs`); write beats on
// `dq_out`/`dq_oe` (8 cycles after a WR), read beats on `dq_in` while
// `dq_in_valid` (8 cycles after a RD). One beat per clock.
//
// From the paper: the mode switch through the mode register, PIMCONF writes
// broadcast to all BFUs, and the PIM_FILTER sequence (activate the row, step
// through its columns, deterministic latencies so no waiting on status). This
// design's choices: the request encoding, the closed-page policy, sending the
// output position as a PIMCONF write, driving all ranks of the channel at once
// in AB mode, one beat per clock, and the default timings (DDR4-3200 22-22-22
// in memory clock cycles).
module membrane_mc
  import membrane_pkg::*;
#(
  parameter int unsigned RANKS   = 4,
  parameter int unsigned COLS    = 128,  // 64-bit columns per row
  parameter int unsigned T_RCD   = 22,
  parameter int unsigned T_RP    = 22,
  parameter int unsigned T_RAS   = 52,
  parameter int unsigned T_CCD_L = 8,
  parameter int unsigned T_RTP   = 12,
  parameter int unsigned T_WR    = 24,
  parameter int unsigned T_MRD   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // host side
  input  logic              req_valid,
  output logic              req_ready,
  input  host_req_t         req,
  output logic              rsp_valid,
  output logic [LINE_W-1:0] rsp_line,
  output logic              pim_mode,
  // DRAM side
  output dram_cmd_t         cmd,
  output logic [RANKS-1:0]  cs,
  output logic [WORD_W-1:0] dq_out,
  output logic              dq_oe,
  input  logic [WORD_W-1:0] dq_in,
  input  logic              dq_in_valid
);

  typedef enum logic [3:0] {
    S_IDLE, S_ACTW, S_RDW, S_PREW, S_DONEW, S_F_CONFW, S_F_ACTW, S_F_RD
  } state_e;

  state_e           st;
  host_req_t        r;
  logic [7:0]       wait_q;
  logic [7:0]       ras_q;
  logic [COL_W:0]   col_q;
  logic             ab_q;
  logic [RANKS-1:0] cs_all, cs_one;

  // de-interleaving unit
  logic              du_wr_start;
  logic [LINE_W-1:0] du_wr_line;
  logic              du_rd_valid;
  logic [LINE_W-1:0] du_rd_line;

  membrane_du u_du (
    .clk, .rst_n,
    .rd_beat_valid(dq_in_valid), .rd_beat(dq_in),
    .rd_line_valid(du_rd_valid), .rd_line(du_rd_line),
    .wr_start(du_wr_start), .wr_line(du_wr_line),
    .wr_beat_valid(dq_oe), .wr_beat(dq_out)
  );

  assign cs_all   = '1;
  assign req_ready = (st == S_IDLE);
  assign pim_mode  = ab_q;

  // PIMCONF word carrying the output position, the same for every chip
  function automatic logic [LINE_W-1:0] outpos_line(logic [ROW_W-1:0] row, logic [COL_W-1:0] col);
    logic [WORD_W-1:0] w;
    w = WORD_W'({col, row});
    return {(LINE_W / WORD_W){w}};
  endfunction

  always_comb begin
    cs_one = '0;
    cs_one[r.rank] = 1'b1;
  end

  // command and DU start decode (combinational from state)
  always_comb begin
    cmd         = '{cmd: DC_NOP, rank: '0, bank: '0, row: '0, col: '0};
    cs          = '0;
    du_wr_start = 1'b0;
    du_wr_line  = r.line;
    case (st)
      S_IDLE: if (req_valid) begin
        cmd.rank = req.rank;
        cmd.bank = req.bank;
        cmd.row  = req.row;
        cmd.col  = req.col;
        case (req.op)
          HR_READ, HR_WRITE: begin
            cmd.cmd = DC_ACT;
            cs[req.rank] = 1'b1;
          end
          HR_PIM_BEGIN, HR_PIM_END: begin
            cmd.cmd = DC_MRS;
            cmd.row = ROW_W'(req.op == HR_PIM_BEGIN);
            cs      = cs_all;
          end
          HR_PIM_CONF: begin
            cmd.cmd     = DC_WR;
            cs          = cs_all;
            du_wr_start = 1'b1;
            du_wr_line  = req.line;
          end
          HR_PIM_FILTER: begin
            cmd.cmd     = DC_WR;
            cmd.col     = COL_W'(PC_OUTPOS);
            cs          = cs_all;
            du_wr_start = 1'b1;
            du_wr_line  = outpos_line(req.out_row, req.out_col);
          end
          default: ;
        endcase
      end
      S_ACTW: if (wait_q == 0) begin
        cmd = '{cmd: (r.op == HR_READ) ? DC_RD : DC_WR, rank: r.rank, bank: r.bank, row: r.row, col: r.col};
        cs  = cs_one;
        du_wr_start = (r.op == HR_WRITE);
      end
      S_PREW: if (wait_q == 0 && ras_q >= 8'(T_RAS)) begin
        cmd = '{cmd: DC_PRE, rank: r.rank, bank: r.bank, row: '0, col: '0};
        cs  = (r.op == HR_PIM_FILTER) ? cs_all : cs_one;
      end
      S_F_CONFW: if (wait_q == 0) begin
        cmd = '{cmd: DC_ACT, rank: '0, bank: '0, row: r.row, col: '0};
        cs  = cs_all;
      end
      S_F_ACTW: if (wait_q == 0) begin
        cmd = '{cmd: DC_RD, rank: '0, bank: '0, row: r.row, col: '0};
        cs  = cs_all;
      end
      S_F_RD: if (wait_q == 0 && col_q != (COL_W+1)'(COLS)) begin
        cmd = '{cmd: DC_RD, rank: '0, bank: '0, row: r.row, col: col_q[COL_W-1:0]};
        cs  = cs_all;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      r         <= '0;
      wait_q    <= '0;
      ras_q     <= '0;
      col_q     <= '0;
      ab_q      <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_line  <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (wait_q != 0) wait_q <= wait_q - 8'd1;
      if (ras_q != 8'hff) ras_q <= ras_q + 8'd1;
      case (st)
        S_IDLE: if (req_valid) begin
          r <= req;
          case (req.op)
            HR_READ, HR_WRITE: begin
              ras_q  <= 8'd1;
              wait_q <= 8'(T_RCD - 1);
              st     <= S_ACTW;
            end
            HR_PIM_BEGIN, HR_PIM_END: begin
              ab_q   <= (req.op == HR_PIM_BEGIN);
              wait_q <= 8'(T_MRD - 1);
              st     <= S_DONEW;
            end
            HR_PIM_CONF: begin
              wait_q <= 8'(BURST);
              st     <= S_DONEW;
            end
            HR_PIM_FILTER: begin
              wait_q <= 8'(BURST);
              st     <= S_F_CONFW;
            end
            default: st <= S_IDLE;
          endcase
        end
        S_ACTW: if (wait_q == 0) begin
          if (r.op == HR_READ) st <= S_RDW;
          else begin
            wait_q <= 8'(BURST + T_WR - 1);
            st     <= S_PREW;
          end
        end
        S_RDW: if (du_rd_valid) begin
          rsp_line <= du_rd_line;
          wait_q   <= 8'(T_RTP > BURST + 1 ? T_RTP - BURST - 1 : 0);
          st       <= S_PREW;
        end
        S_PREW: if (wait_q == 0 && ras_q >= 8'(T_RAS)) begin
          wait_q <= 8'(T_RP - 1);
          st     <= S_DONEW;
        end
        S_DONEW: if (wait_q == 0) begin
          rsp_valid <= 1'b1;
          st        <= S_IDLE;
        end
        S_F_CONFW: if (wait_q == 0) begin
          ras_q  <= 8'd1;
          wait_q <= 8'(T_RCD - 1);
          st     <= S_F_ACTW;
        end
        S_F_ACTW: if (wait_q == 0) begin
          col_q  <= (COL_W+1)'(1);
          wait_q <= 8'(T_CCD_L - 1);
          st     <= S_F_RD;
        end
        S_F_RD: if (wait_q == 0) begin
          if (col_q == (COL_W+1)'(COLS)) begin
            wait_q <= 8'(T_RTP > T_CCD_L ? T_RTP - T_CCD_L : 0);
            st     <= S_PREW;
          end else begin
            col_q  <= col_q + 1'b1;
            wait_q <= 8'(T_CCD_L - 1);
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // PIM commands are only legal in All-Bank mode.
  always_ff @(posedge clk) begin
    if (rst_n && req_valid && req_ready &&
        (req.op == HR_PIM_CONF || req.op == HR_PIM_FILTER))
      assert (ab_q) else $error("PIM request outside All-Bank mode");
  end

endmodule
