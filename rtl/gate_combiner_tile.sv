// gate_combiner_tile: third tile of the per-row gate template.
//
// For each of its ROWS rows it takes one W.x result and one U.h result, adds
// them and the row's bias, turns the sum into an activation-table index and
// sends a one-word packet {gate, row, index} towards the aggregator. The
// source describes this tile as "adds the results together with the bias,
// assigns an ID, and transforms the floating point to a LUT index"; the
// addition order (W.x + U.h) + b and the packet layout (gru_pkg::gate_pkt_t)
// are this design's choices. Rows are handled in order ROW_BASE,
// ROW_BASE+1, ... matching the order in which the row kernels emit them.
//
// Interface: two fp32 input streams, a bias write port, one packet stream
// out. Timing: a packet is registered on the edge where both inputs are
// valid and the output register is free; both inputs are taken on that edge.
module gate_combiner_tile
  import gru_pkg::*;
#(
  parameter gate_e       GATE     = GATE_Z,
  parameter int unsigned ROW_BASE = 0,
  parameter int unsigned ROWS     = 1,
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          b_we,
  input  logic [RW-1:0] b_row,
  input  fp32_t         b_data,
  input  logic          wx_valid,
  output logic          wx_ready,
  input  fp32_t         wx_data,
  input  logic          uh_valid,
  output logic          uh_ready,
  input  fp32_t         uh_data,
  output logic          pkt_valid,
  input  logic          pkt_ready,
  output gate_pkt_t     pkt_data
);
  fp32_t                bias [ROWS];
  logic [RW-1:0]        k;
  fp32_t                s1, s2;
  logic [LUT_IDX_W-1:0] idx;
  logic                 fire;

  fp32_add        u_add1 (.a(wx_data), .b(uh_data), .s(s1));
  fp32_add        u_add2 (.a(s1), .b(bias[k]), .s(s2));
  fp32_to_lut_idx u_idx  (.x(s2), .idx(idx));

  assign fire     = wx_valid && uh_valid && (!pkt_valid || pkt_ready);
  assign wx_ready = fire;
  assign uh_ready = fire;

  always_ff @(posedge clk) begin
    if (b_we) bias[b_row] <= b_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt_valid <= 1'b0;
      pkt_data  <= '0;
      k         <= '0;
    end else begin
      if (pkt_valid && pkt_ready) pkt_valid <= 1'b0;
      if (fire) begin
        pkt_valid     <= 1'b1;
        pkt_data.gate <= GATE;
        pkt_data.row  <= 8'(ROW_BASE + int'(k));
        pkt_data.rsvd <= '0;
        pkt_data.idx  <= idx;
        k             <= (k == RW'(ROWS - 1)) ? '0 : k + 1'b1;
      end
    end
  end
endmodule
