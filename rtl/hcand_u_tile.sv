// hcand_u_tile: recurrent kernel of the candidate state, U_h.(r (.) h).
//
// The candidate gate multiplies its recurrent weights not with h but with the
// element-wise product of the reset-gate output r and h. This tile first takes
// the whole h vector (N words) from the hidden-state broadcast and stores it;
// then, as the r vector arrives word by word from the aggregator, it forms
// r_i*h_i in an fp32 multiplier and streams the products into an inner
// row_dot_tile, which holds the weight rows and does the 8-lane MAC and the
// reduction. The source only states that specialised candidate kernels
// interface with the reset gate; storing h first and multiplying on the fly
// is this design's choice.
//
// Interface: h and r streams in (one fp32 word per transfer, N words per
// vector), weight writes as in row_dot_tile, one result word per row out.
// Timing: h words are taken one per cycle while the h buffer is not full;
// r words are taken one per cycle once h is complete; the result follows the
// row_dot_tile timing counted from the last r word.
module hcand_u_tile
  import gru_pkg::*;
#(
  parameter int unsigned N    = 32,
  parameter int unsigned ROWS = 1,
  localparam int unsigned NPAD = ((N + LANES - 1) / LANES) * LANES,
  localparam int unsigned CW   = (NPAD > 1) ? $clog2(NPAD) : 1,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned IW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wt_we,
  input  logic [RW-1:0] wt_row,
  input  logic [CW-1:0] wt_col,
  input  fp32_t         wt_data,
  input  logic          h_valid,
  output logic          h_ready,
  input  fp32_t         h_data,
  input  logic          r_valid,
  output logic          r_ready,
  input  fp32_t         r_data,
  output logic          res_valid,
  input  logic          res_ready,
  output fp32_t         res_data
);
  fp32_t         hbuf [N];
  logic          h_full;
  logic [IW-1:0] hcnt, rcnt;
  fp32_t         rh;
  logic          core_valid, core_ready;

  fp32_mul u_rh (.a(r_data), .b(hbuf[rcnt]), .p(rh));

  assign h_ready    = !h_full;
  assign core_valid = r_valid && h_full;
  assign r_ready    = core_ready && h_full;

  always_ff @(posedge clk) begin
    if (h_valid && h_ready) hbuf[hcnt] <= h_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_full <= 1'b0;
      hcnt   <= '0;
      rcnt   <= '0;
    end else begin
      if (h_valid && h_ready) begin
        if (hcnt == IW'(N - 1)) begin
          hcnt   <= '0;
          h_full <= 1'b1;
        end else begin
          hcnt <= hcnt + 1'b1;
        end
      end
      if (r_valid && r_ready) begin
        if (rcnt == IW'(N - 1)) begin
          rcnt   <= '0;
          h_full <= 1'b0;
        end else begin
          rcnt <= rcnt + 1'b1;
        end
      end
    end
  end

  row_dot_tile #(.N(N), .ROWS(ROWS)) u_core (
    .clk, .rst_n,
    .wt_we, .wt_row, .wt_col, .wt_data,
    .vec_valid (core_valid),
    .vec_ready (core_ready),
    .vec_data  (rh),
    .res_valid, .res_ready, .res_data
  );
endmodule
