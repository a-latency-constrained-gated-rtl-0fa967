// if_tile_pl2aie: interface tile, programmable logic to vector-tile direction.
//
// The interface tiles carry AXI4-Stream data between the PL and the vector
// tiles, converting 128-bit PL beats to 32-bit words. The PL runs at a quarter
// of the tile clock (312.5 MHz against 1.25 GHz), so one 128-bit beat per PL
// cycle matches one 32-bit word per tile cycle. This design uses one clock,
// the tile clock, and a clock enable pl_ce that is high one cycle in four: the
// PL side handshakes only on pl_ce cycles. Word 0 of a beat is bits [31:0]
// (this design's choice). A beat with s_last marks the last of its four words.
// Timing: the first word of a beat is offered the cycle after the beat is
// taken; a new beat is taken on the pl_ce cycle where the last word of the
// previous beat leaves, so the stream runs at full rate.
module if_tile_pl2aie
  import gru_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pl_ce,
  // PL side, 128 bits, transfers only when pl_ce is high
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [127:0] s_data,
  input  logic         s_last,
  // tile side, 32 bits
  output logic         m_valid,
  input  logic         m_ready,
  output fp32_t        m_data,
  output logic         m_last
);
  logic [127:0] beat;
  logic         beat_last;
  logic         full;
  logic [1:0]   wcnt;

  assign m_valid = full;
  assign m_data  = beat[32*wcnt +: 32];
  assign m_last  = beat_last && (wcnt == 2'd3);
  assign s_ready = pl_ce && (!full || (wcnt == 2'd3 && m_ready));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat      <= '0;
      beat_last <= 1'b0;
      full      <= 1'b0;
      wcnt      <= '0;
    end else begin
      if (m_valid && m_ready) begin
        if (wcnt == 2'd3) full <= 1'b0;
        wcnt <= wcnt + 1'b1;
      end
      if (s_valid && s_ready) begin
        beat      <= s_data;
        beat_last <= s_last;
        full      <= 1'b1;
        wcnt      <= '0;
      end
    end
  end
endmodule
