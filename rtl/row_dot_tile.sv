// row_dot_tile: row-wise matrix-vector kernel (one W_row.x or U_row.h tile).
//
// The tile holds ROWS rows of a weight matrix, written by the host as runtime
// parameters. A whole vector of N fp32 words arrives on a 32-bit stream, one
// word per cycle; it is kept in the tile so that rows after the first reuse it
// ("row reuse"). Each MAC step multiplies LANES (8) consecutive weights of the
// row with the matching vector elements and adds the products lane by lane
// into an 8-lane accumulator. For the first row the steps run as soon as each
// group of 8 words has arrived, so that row is limited by the stream rate;
// later rows take one step per cycle from the stored vector. When a row is
// consumed, the 8 lanes are reduced to a scalar and sent on the result stream.
// This follows the row-wise scheme of the source (MAC the first part of the
// row, accumulate the rest, reduce the vector); the source applies no
// activation in this tile for the hybrid architecture.
//
// Choices of this design: a MAC is a rounded multiply followed by a rounded
// add (not fused); the reduction order is ((l0+l1)+(l2+l3))+((l4+l5)+(l6+l7));
// when N is not a multiple of 8 the missing lanes are treated as zero; the
// tile accepts the next vector while the previous result still waits.
//
// Timing: for row 0, res_valid is set by the second clock edge after the
// edge that accepts the last vector word; each further row takes ceil(N/8)+1
// cycles. The result register
// holds its value until res_ready; if it is still full when the next result
// is due, the tile waits.
module row_dot_tile
  import gru_pkg::*;
#(
  parameter int unsigned N    = 512,   // vector length in words
  parameter int unsigned ROWS = 1,     // rows computed by this tile
  localparam int unsigned NCH  = (N + LANES - 1) / LANES,
  localparam int unsigned NPAD = NCH * LANES,
  localparam int unsigned CW   = (NPAD > 1) ? $clog2(NPAD) : 1,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // runtime-parameter write of one weight
  input  logic              wt_we,
  input  logic [RW-1:0]     wt_row,
  input  logic [CW-1:0]     wt_col,
  input  fp32_t             wt_data,
  // vector stream
  input  logic              vec_valid,
  output logic              vec_ready,
  input  fp32_t             vec_data,
  // result stream, one word per row
  output logic              res_valid,
  input  logic              res_ready,
  output fp32_t             res_data
);
  localparam int unsigned HW   = (NCH > 1) ? $clog2(NCH) : 1;

  typedef enum logic [1:0] {S_LOAD, S_LAST, S_MAC, S_RED} state_e;
  state_e state;

  fp32_t wmem [ROWS][NPAD];
  fp32_t vbuf [NPAD];
  fp32_t acc  [LANES];
  fp32_t acc_nx [LANES];
  fp32_t prod [LANES];
  fp32_t wl [LANES], vl [LANES];
  fp32_t red1 [4];
  fp32_t red2 [2];
  fp32_t red3;

  logic [CW-1:0] widx;        // next vector word
  logic          mac_pend;    // a chunk of row 0 is complete
  logic [HW-1:0] mac_ch;      // that chunk
  logic [HW-1:0] ch_cnt;      // chunk counter of rows > 0
  logic [RW-1:0] row_cnt;
  logic          mac_fire;
  logic [HW-1:0] ch_sel;
  logic          res_free;
  logic          last_word, chunk_end;

  always_ff @(posedge clk) begin
    if (wt_we) wmem[wt_row][wt_col] <= wt_data;
  end

  assign vec_ready = (state == S_LOAD);
  assign last_word = (widx == CW'(N - 1));
  assign chunk_end = (widx[2:0] == 3'd7) || last_word;
  assign mac_fire  = ((state == S_LOAD || state == S_LAST) && mac_pend) || (state == S_MAC);
  assign ch_sel    = (state == S_MAC) ? ch_cnt : mac_ch;
  assign res_free  = !res_valid || res_ready;

  // one MAC step: LANES multiplies and LANES accumulating adds
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_comb begin
      if (int'(ch_sel) * LANES + l < N) begin
        wl[l] = wmem[row_cnt][int'(ch_sel) * LANES + l];
        vl[l] = vbuf[int'(ch_sel) * LANES + l];
      end else begin
        wl[l] = '0;
        vl[l] = '0;
      end
    end
    fp32_mul u_mul (.a(wl[l]), .b(vl[l]), .p(prod[l]));
    fp32_add u_add (.a(acc[l]), .b(prod[l]), .s(acc_nx[l]));
  end

  // lane reduction tree
  for (genvar k = 0; k < 4; k++) begin : g_red1
    fp32_add u_r1 (.a(acc[2*k]), .b(acc[2*k+1]), .s(red1[k]));
  end
  for (genvar k = 0; k < 2; k++) begin : g_red2
    fp32_add u_r2 (.a(red1[2*k]), .b(red1[2*k+1]), .s(red2[k]));
  end
  fp32_add u_r3 (.a(red2[0]), .b(red2[1]), .s(red3));

  always_ff @(posedge clk) begin
    if (vec_valid && vec_ready) vbuf[widx] <= vec_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      widx      <= '0;
      mac_pend  <= 1'b0;
      mac_ch    <= '0;
      ch_cnt    <= '0;
      row_cnt   <= '0;
      res_valid <= 1'b0;
      res_data  <= '0;
      for (int l = 0; l < LANES; l++) acc[l] <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (mac_fire) acc <= acc_nx;
      mac_pend <= 1'b0;
      unique case (state)
        S_LOAD: if (vec_valid) begin
          if (chunk_end) begin
            mac_pend <= 1'b1;
            mac_ch   <= HW'(widx / LANES);
          end
          if (last_word) begin
            widx  <= '0;
            state <= S_LAST;
          end else begin
            widx <= widx + 1'b1;
          end
        end
        S_LAST: state <= S_RED;          // final chunk of row 0 is MACed now
        S_MAC: begin
          if (ch_cnt == HW'(NCH - 1)) state <= S_RED;
          else ch_cnt <= ch_cnt + 1'b1;
        end
        S_RED: if (res_free) begin
          res_valid <= 1'b1;
          res_data  <= red3;
          for (int l = 0; l < LANES; l++) acc[l] <= '0;
          ch_cnt <= '0;
          if (row_cnt == RW'(ROWS - 1)) begin
            row_cnt <= '0;
            state   <= S_LOAD;
          end else begin
            row_cnt <= row_cnt + 1'b1;
            state   <= S_MAC;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // a result that waits must not change
  property p_res_stable;
    @(posedge clk) disable iff (!rst_n) res_valid && !res_ready |=> $stable(res_data);
  endproperty
  a_res_stable: assert property (p_res_stable);

endmodule
