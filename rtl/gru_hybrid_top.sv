// gru_hybrid_top: one GRU layer in the hybrid tile/PL architecture.
//
// Every row i of each of the three gates (update z, reset r, candidate h~) has
// its own group of three kernels: a W kernel for W_row.x, a U kernel for
// U_row.h (for the candidate: U_row.(r (.) h)) and a combiner that adds bias,
// makes the activation-table index and tags the packet. ROWS_PER_TILE > 1
// lets each kernel handle that many consecutive rows ("row reuse"); the
// default of 1 gives the source's count of 3*HIDDEN*3 + 1 kernels. The three
// combiners of a row group share one interface tile through a three-way
// packet merge. A PL aggregation kernel reads all these interface tiles,
// applies sigmoid or tanh by table look-up and writes the reset vector back
// to the candidate U kernels and the update and candidate vectors to a single
// hidden-state tile, which forms h_t, broadcasts it to all U kernels and
// sends it out. The input x enters through an interface tile and is broadcast
// to all W kernels, which work ahead of the recurrent part as long as they are
// not back-pressured.
//
// Clocking: one clock, the tile clock; the PL side (aggregator and the PL
// ends of the interface tiles) uses a clock enable that is high one cycle in
// four, standing for the 312.5 MHz PL clock against the 1.25 GHz tiles.
//
// Interface:
//   rtp_*   host writes of runtime parameters: weights W and U (gate, row,
//           column), biases (gate, row), activation tables (entry in rtp_col);
//           write them while the layer is idle.
//   x_*     128-bit PL stream of input vectors, ceil(INPUT/4) beats each, word 0
//           of a beat in bits [31:0], zero padded; x_last on the final beat.
//   h_*     128-bit PL stream of the new hidden state, ceil(HIDDEN/4) beats per
//           step, zero padded, h_last on the final beat.
// The hidden state starts at zero after reset. Each x vector yields one h_t.
// The per-gate output streams of the aggregator, the single clock with an
// enable, the packet format and the table mapping are this design's choices.
module gru_hybrid_top
  import gru_pkg::*;
#(
  parameter int unsigned HIDDEN        = 32,
  parameter int unsigned INPUT         = 512,
  parameter int unsigned ROWS_PER_TILE = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  // runtime parameters
  input  logic         rtp_we,
  input  rtp_kind_e    rtp_kind,
  input  gate_e        rtp_gate,
  input  logic [7:0]   rtp_row,
  input  logic [15:0]  rtp_col,
  input  fp32_t        rtp_data,
  // input vectors, PL side
  input  logic         x_valid,
  output logic         x_ready,
  input  logic [127:0] x_data,
  input  logic         x_last,
  // hidden state out, PL side
  output logic         h_valid,
  input  logic         h_ready,
  output logic [127:0] h_data,
  output logic         h_last
);
  localparam int unsigned G  = HIDDEN / ROWS_PER_TILE;       // row groups = interface tiles
  localparam int unsigned XP = round_up(INPUT, PL_WORDS);    // x words per vector
  localparam int unsigned HP = round_up(HIDDEN, PL_WORDS);   // h words per vector
  localparam int unsigned RW = (ROWS_PER_TILE > 1) ? $clog2(ROWS_PER_TILE) : 1;

  // ---------------------------------------------------------------- PL clock enable
  logic [1:0] ce_cnt;
  logic       pl_ce;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ce_cnt <= '0;
    else        ce_cnt <= ce_cnt + 1'b1;
  end
  assign pl_ce = (ce_cnt == 2'(PL_RATIO - 1));

  // ---------------------------------------------------------------- x in and broadcast
  logic  xw_valid, xw_ready, xw_last;
  fp32_t xw_data;
  logic [3*G-1:0] bx_valid, bx_ready;
  fp32_t bx_data;
  logic  bx_last;

  if_tile_pl2aie u_if_x (
    .clk, .rst_n, .pl_ce,
    .s_valid(x_valid), .s_ready(x_ready), .s_data(x_data), .s_last(x_last),
    .m_valid(xw_valid), .m_ready(xw_ready), .m_data(xw_data), .m_last(xw_last)
  );
  stream_broadcast #(.N_OUT(3*G)) u_bcast_x (
    .s_valid(xw_valid), .s_ready(xw_ready), .s_data(xw_data), .s_last(xw_last),
    .m_valid(bx_valid), .m_ready(bx_ready), .m_data(bx_data), .m_last(bx_last)
  );

  // ---------------------------------------------------------------- hidden state tile
  logic  zv_valid, zv_ready, zv_last, hcv_valid, hcv_ready, hcv_last;
  fp32_t zv_data, hcv_data;
  logic  hb_valid, hb_ready, hb_last, ho_valid, ho_ready, ho_last;
  fp32_t hb_data, ho_data;
  logic [3*G-1:0] bh_valid, bh_ready;
  fp32_t bh_data;
  logic  bh_last;

  hidden_update_tile #(.HIDDEN(HIDDEN), .HP(HP)) u_ht (
    .clk, .rst_n,
    .z_valid(zv_valid), .z_ready(zv_ready), .z_data(zv_data),
    .hc_valid(hcv_valid), .hc_ready(hcv_ready), .hc_data(hcv_data),
    .hb_valid, .hb_ready, .hb_data, .hb_last,
    .ho_valid, .ho_ready, .ho_data, .ho_last
  );
  stream_broadcast #(.N_OUT(3*G)) u_bcast_h (
    .s_valid(hb_valid), .s_ready(hb_ready), .s_data(hb_data), .s_last(hb_last),
    .m_valid(bh_valid), .m_ready(bh_ready), .m_data(bh_data), .m_last(bh_last)
  );
  if_tile_aie2pl u_if_hout (
    .clk, .rst_n, .pl_ce,
    .s_valid(ho_valid), .s_ready(ho_ready), .s_data(ho_data), .s_last(ho_last),
    .m_valid(h_valid), .m_ready(h_ready), .m_data(h_data), .m_last(h_last)
  );

  // ---------------------------------------------------------------- reset-gate vector to candidate kernels
  logic  rv_valid, rv_ready, rv_last;
  fp32_t rv_data;
  logic [G-1:0] br_valid, br_ready;
  fp32_t br_data;
  logic  br_last;
  stream_broadcast #(.N_OUT(G)) u_bcast_r (
    .s_valid(rv_valid), .s_ready(rv_ready), .s_data(rv_data), .s_last(rv_last),
    .m_valid(br_valid), .m_ready(br_ready), .m_data(br_data), .m_last(br_last)
  );

  // ---------------------------------------------------------------- per-row-group kernels
  logic  w_res_valid [3][G], w_res_ready [3][G];
  fp32_t w_res_data  [3][G];
  logic  u_res_valid [3][G], u_res_ready [3][G];
  fp32_t u_res_data  [3][G];
  logic  [2:0]  pk_valid [G];
  logic  [2:0]  pk_ready [G];
  logic  [31:0] pk_data  [G][3];
  logic  m_valid [G], m_ready [G], m_last [G];
  logic  [31:0] m_data [G];
  logic  [G-1:0] agg_in_valid, agg_in_ready;
  logic  [127:0] agg_in_data [G];

  logic          rtp_in_group [G];
  logic [RW-1:0] rtp_lrow;
  assign rtp_lrow = RW'(int'(rtp_row) % ROWS_PER_TILE);

  for (genvar g = 0; g < G; g++) begin : g_grp
    assign rtp_in_group[g] = (int'(rtp_row) / ROWS_PER_TILE) == g;

    for (genvar q = 0; q < 3; q++) begin : g_gate
      // W_row . x
      row_dot_tile #(.N(XP), .ROWS(ROWS_PER_TILE)) u_w (
        .clk, .rst_n,
        .wt_we    (rtp_we && rtp_kind == RTP_W && rtp_gate == gate_e'(q) && rtp_in_group[g]),
        .wt_row   (rtp_lrow),
        .wt_col   (rtp_col[$clog2(round_up(XP, LANES))-1:0]),
        .wt_data  (rtp_data),
        .vec_valid(bx_valid[q*G+g]),
        .vec_ready(bx_ready[q*G+g]),
        .vec_data (bx_data),
        .res_valid(w_res_valid[q][g]),
        .res_ready(w_res_ready[q][g]),
        .res_data (w_res_data[q][g])
      );

      // U_row . h, or U_row . (r (.) h) for the candidate
      if (q == GATE_H) begin : g_uh
        hcand_u_tile #(.N(HP), .ROWS(ROWS_PER_TILE)) u_u (
          .clk, .rst_n,
          .wt_we    (rtp_we && rtp_kind == RTP_U && rtp_gate == GATE_H && rtp_in_group[g]),
          .wt_row   (rtp_lrow),
          .wt_col   (rtp_col[$clog2(round_up(HP, LANES))-1:0]),
          .wt_data  (rtp_data),
          .h_valid  (bh_valid[q*G+g]),
          .h_ready  (bh_ready[q*G+g]),
          .h_data   (bh_data),
          .r_valid  (br_valid[g]),
          .r_ready  (br_ready[g]),
          .r_data   (br_data),
          .res_valid(u_res_valid[q][g]),
          .res_ready(u_res_ready[q][g]),
          .res_data (u_res_data[q][g])
        );
      end else begin : g_uzr
        row_dot_tile #(.N(HP), .ROWS(ROWS_PER_TILE)) u_u (
          .clk, .rst_n,
          .wt_we    (rtp_we && rtp_kind == RTP_U && rtp_gate == gate_e'(q) && rtp_in_group[g]),
          .wt_row   (rtp_lrow),
          .wt_col   (rtp_col[$clog2(round_up(HP, LANES))-1:0]),
          .wt_data  (rtp_data),
          .vec_valid(bh_valid[q*G+g]),
          .vec_ready(bh_ready[q*G+g]),
          .vec_data (bh_data),
          .res_valid(u_res_valid[q][g]),
          .res_ready(u_res_ready[q][g]),
          .res_data (u_res_data[q][g])
        );
      end

      // + bias, ID, LUT index
      gate_combiner_tile #(.GATE(gate_e'(q)), .ROW_BASE(g * ROWS_PER_TILE), .ROWS(ROWS_PER_TILE)) u_c (
        .clk, .rst_n,
        .b_we     (rtp_we && rtp_kind == RTP_BIAS && rtp_gate == gate_e'(q) && rtp_in_group[g]),
        .b_row    (rtp_lrow),
        .b_data   (rtp_data),
        .wx_valid (w_res_valid[q][g]),
        .wx_ready (w_res_ready[q][g]),
        .wx_data  (w_res_data[q][g]),
        .uh_valid (u_res_valid[q][g]),
        .uh_ready (u_res_ready[q][g]),
        .uh_data  (u_res_data[q][g]),
        .pkt_valid(pk_valid[g][q]),
        .pkt_ready(pk_ready[g][q]),
        .pkt_data (pk_data[g][q])
      );
    end

    // three-way packet merge onto this group's interface tile
    packet_merge #(.N_IN(3)) u_pm (
      .clk, .rst_n,
      .in_valid (pk_valid[g]),
      .in_ready (pk_ready[g]),
      .in_data  (pk_data[g]),
      .out_valid(m_valid[g]),
      .out_ready(m_ready[g]),
      .out_data (m_data[g]),
      .out_last (m_last[g])
    );
    if_tile_aie2pl u_if_p (
      .clk, .rst_n, .pl_ce,
      .s_valid(m_valid[g]), .s_ready(m_ready[g]), .s_data(m_data[g]), .s_last(m_last[g]),
      .m_valid(agg_in_valid[g]), .m_ready(agg_in_ready[g]), .m_data(agg_in_data[g]), .m_last()
    );
  end

  // ---------------------------------------------------------------- PL aggregation kernel
  logic [2:0]   agg_out_valid, agg_out_ready;
  logic [127:0] agg_out_data;
  logic         agg_out_last;

  pl_aggregator #(.HIDDEN(HIDDEN), .NUM_IF(G)) u_agg (
    .clk, .rst_n, .pl_ce,
    .lut_we   (rtp_we && (rtp_kind == RTP_LUT_SIG || rtp_kind == RTP_LUT_TANH)),
    .lut_sel  (rtp_kind == RTP_LUT_TANH),
    .lut_addr (rtp_col[LUT_IDX_W-1:0]),
    .lut_data (rtp_data),
    .in_valid (agg_in_valid),
    .in_ready (agg_in_ready),
    .in_data  (agg_in_data),
    .out_valid(agg_out_valid),
    .out_ready(agg_out_ready),
    .out_data (agg_out_data),
    .out_last (agg_out_last)
  );

  if_tile_pl2aie u_if_z (
    .clk, .rst_n, .pl_ce,
    .s_valid(agg_out_valid[GATE_Z]), .s_ready(agg_out_ready[GATE_Z]), .s_data(agg_out_data), .s_last(agg_out_last),
    .m_valid(zv_valid), .m_ready(zv_ready), .m_data(zv_data), .m_last(zv_last)
  );
  if_tile_pl2aie u_if_r (
    .clk, .rst_n, .pl_ce,
    .s_valid(agg_out_valid[GATE_R]), .s_ready(agg_out_ready[GATE_R]), .s_data(agg_out_data), .s_last(agg_out_last),
    .m_valid(rv_valid), .m_ready(rv_ready), .m_data(rv_data), .m_last(rv_last)
  );
  if_tile_pl2aie u_if_hc (
    .clk, .rst_n, .pl_ce,
    .s_valid(agg_out_valid[GATE_H]), .s_ready(agg_out_ready[GATE_H]), .s_data(agg_out_data), .s_last(agg_out_last),
    .m_valid(hcv_valid), .m_ready(hcv_ready), .m_data(hcv_data), .m_last(hcv_last)
  );

  // the configuration must be one the structure supports
  initial begin
    assert (HIDDEN % ROWS_PER_TILE == 0) else $error("HIDDEN must be a multiple of ROWS_PER_TILE");
    assert (HIDDEN <= 256) else $error("packet row field holds 8 bits");
  end
endmodule
