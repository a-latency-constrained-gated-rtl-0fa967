// if_tile_aie2pl: interface tile, vector-tile to programmable logic direction.
//
// Gathers 32-bit words from a tile stream into 128-bit PL beats, word 0 in
// bits [31:0]. A word with s_last closes the beat early and the unused words
// are zero, so a one-word packet becomes one PL beat. A completed beat moves
// to an output register; the PL side (clock enable pl_ce, one tile cycle in
// four) takes it when m_ready is high on a pl_ce cycle. Gathering and output
// register form two stages, so gathering of the next beat overlaps the wait
// for pl_ce. The early close on s_last and the zero fill are this design's
// choices; the source states the 32/128-bit conversion only.
module if_tile_aie2pl
  import gru_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pl_ce,
  // tile side, 32 bits
  input  logic         s_valid,
  output logic         s_ready,
  input  fp32_t        s_data,
  input  logic         s_last,
  // PL side, 128 bits, transfers only when pl_ce is high
  output logic         m_valid,
  input  logic         m_ready,
  output logic [127:0] m_data,
  output logic         m_last
);
  logic [127:0] gbuf;
  logic [1:0]   gcnt;
  logic         gfull, glast;
  logic         out_free;

  assign s_ready  = !gfull;
  assign out_free = !m_valid || (pl_ce && m_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gbuf    <= '0;
      gcnt    <= '0;
      gfull   <= 1'b0;
      glast   <= 1'b0;
      m_valid <= 1'b0;
      m_data  <= '0;
      m_last  <= 1'b0;
    end else begin
      if (pl_ce && m_valid && m_ready) m_valid <= 1'b0;
      if (gfull && out_free) begin
        m_valid <= 1'b1;
        m_data  <= gbuf;
        m_last  <= glast;
        gfull   <= 1'b0;
        gbuf    <= '0;
        gcnt    <= '0;
      end
      if (s_valid && s_ready) begin
        gbuf[32*gcnt +: 32] <= s_data;
        gcnt                <= gcnt + 1'b1;
        if (gcnt == 2'd3 || s_last) begin
          gfull <= 1'b1;
          glast <= s_last;
        end
      end
    end
  end
endmodule
