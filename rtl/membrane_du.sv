// membrane_du: Cache De-interleaving Unit (DU) in the memory controller.
//
// For bank-level filtering each 64-bit word of a cache line must live whole in
// one DRAM chip, not be striped across the chips of a rank. The chips still
// drive DEV_W pins each per beat, so a beat of the 64-bit channel carries
// DEV_W bits from each of the 64/DEV_W chips. The DU holds one cache line and
// routes every beat's pieces to where they belong: the DEV_W bits of chip c on
// beat t go to line bits [c*BURST*DEV_W + t*DEV_W +: DEV_W]. With x8 chips,
// byte c of each beat goes to 64-bit word c of the line, so after the 8 beats
// word c holds chip c's whole column word. Writing a line reverses the routing.
//
// Read side: `rd_beat_valid` with `rd_beat` on 8 cycles (beat 0 first); the
// assembled line appears on `rd_line` with a one-cycle `rd_line_valid` pulse on
// the cycle after the eighth beat.
// Write side: `wr_start` loads `wr_line`; the 8 beats then leave on
// `wr_beat` with `wr_beat_valid` on the following 8 cycles.
//
// The buffer and the byte routing are the paper's (x8 example); the handshake
// and the generalisation to other device widths are this design's.
module membrane_du
  import membrane_pkg::*;
#(
  parameter int unsigned DEVW = DEV_W   // data pins per chip
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_beat_valid,
  input  logic [WORD_W-1:0] rd_beat,
  output logic              rd_line_valid,
  output logic [LINE_W-1:0] rd_line,
  input  logic              wr_start,
  input  logic [LINE_W-1:0] wr_line,
  output logic              wr_beat_valid,
  output logic [WORD_W-1:0] wr_beat
);

  localparam int unsigned CHIPS = WORD_W / DEVW;

  // Line bit index of bit j of chip c's piece on beat t.
  function automatic int unsigned line_pos(int unsigned c, int unsigned t, int unsigned j);
    return c * BURST * DEVW + t * DEVW + j;
  endfunction

  logic [LINE_W-1:0] rd_buf;
  logic [2:0]        rd_beat_n;
  logic [LINE_W-1:0] wr_buf;
  logic [3:0]        wr_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_buf        <= '0;
      rd_beat_n     <= '0;
      rd_line_valid <= 1'b0;
    end else begin
      rd_line_valid <= 1'b0;
      if (rd_beat_valid) begin
        for (int unsigned c = 0; c < CHIPS; c++)
          for (int unsigned j = 0; j < DEVW; j++)
            rd_buf[line_pos(c, 32'(rd_beat_n), j)] <= rd_beat[c*DEVW + j];
        rd_beat_n <= rd_beat_n + 3'd1;
        if (rd_beat_n == 3'(BURST - 1)) rd_line_valid <= 1'b1;
      end
    end
  end
  assign rd_line = rd_buf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_buf <= '0;
      wr_cnt <= '0;
    end else if (wr_start) begin
      wr_buf <= wr_line;
      wr_cnt <= 4'(BURST);
    end else if (wr_cnt != 0) begin
      wr_cnt <= wr_cnt - 4'd1;
    end
  end

  always_comb begin
    logic [2:0] t;
    t = 3'(4'(BURST) - wr_cnt);
    wr_beat = '0;
    for (int unsigned c = 0; c < CHIPS; c++)
      for (int unsigned j = 0; j < DEVW; j++)
        wr_beat[c*DEVW + j] = wr_buf[line_pos(c, 32'(t), j)];
  end
  assign wr_beat_valid = (wr_cnt != 0);

endmodule
