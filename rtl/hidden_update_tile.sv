// hidden_update_tile: the new-hidden-state tile, h_t = (1 - z) (.) h_{t-1} + z (.) h~.
//
// The tile keeps the hidden state h (HP words, HIDDEN of them in use, the rest
// held at zero as padding) and runs a loop of three phases:
//   EMIT  send h, word by word, on the broadcast stream to the recurrent
//         kernels, and (except for the initial all-zero state after reset) on
//         the external output stream; both advance together.
//   ZIN   take the activated update gate z, HP words, into a buffer.
//   HIN   take the activated candidate h~ word by word and, in the same cycle,
//         compute (1 - z_i)*h_i + z_i*h~_i with fp32 units and store it as the
//         new h_i.
// The source gives the equation and that one tile computes it; the phase
// order, the buffering of z, the initial zero state after reset and the
// evaluation order of the formula are this design's choices.
// Timing: one word per cycle in every phase when the streams allow.
module hidden_update_tile
  import gru_pkg::*;
#(
  parameter int unsigned HIDDEN = 32,
  parameter int unsigned HP     = 32,   // words per vector, >= HIDDEN
  localparam int unsigned IW = (HP > 1) ? $clog2(HP) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  z_valid,
  output logic  z_ready,
  input  fp32_t z_data,
  input  logic  hc_valid,
  output logic  hc_ready,
  input  fp32_t hc_data,
  // broadcast of h to the recurrent kernels
  output logic  hb_valid,
  input  logic  hb_ready,
  output fp32_t hb_data,
  output logic  hb_last,
  // external output of h_t
  output logic  ho_valid,
  input  logic  ho_ready,
  output fp32_t ho_data,
  output logic  ho_last
);
  typedef enum logic [1:0] {S_EMIT, S_ZIN, S_HIN} state_e;
  state_e        state;
  fp32_t         h    [HP];
  fp32_t         zbuf [HP];
  logic [IW-1:0] cnt;
  logic          ext;           // this emission goes out too
  logic          emit_go;
  logic          last;
  fp32_t         zi, omz, p1, p2, hn;

  assign last     = (cnt == IW'(HP - 1));
  assign hb_valid = (state == S_EMIT) && (!ext || ho_ready);
  assign ho_valid = (state == S_EMIT) && ext && hb_ready;
  assign hb_data  = h[cnt];
  assign ho_data  = h[cnt];
  assign hb_last  = last;
  assign ho_last  = last;
  assign emit_go  = (state == S_EMIT) && hb_ready && (!ext || ho_ready);
  assign z_ready  = (state == S_ZIN);
  assign hc_ready = (state == S_HIN);

  assign zi = zbuf[cnt];
  fp32_add u_omz (.a(FP32_ONE), .b({~zi[31], zi[30:0]}), .s(omz));
  fp32_mul u_p1  (.a(omz), .b(h[cnt]), .p(p1));
  fp32_mul u_p2  (.a(zi), .b(hc_data), .p(p2));
  fp32_add u_hn  (.a(p1), .b(p2), .s(hn));

  always_ff @(posedge clk) begin
    if (z_valid && z_ready) zbuf[cnt] <= z_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_EMIT;
      cnt   <= '0;
      ext   <= 1'b0;
      for (int i = 0; i < HP; i++) h[i] <= '0;
    end else begin
      unique case (state)
        S_EMIT: if (emit_go) begin
          cnt <= last ? '0 : cnt + 1'b1;
          if (last) state <= S_ZIN;
        end
        S_ZIN: if (z_valid) begin
          cnt <= last ? '0 : cnt + 1'b1;
          if (last) state <= S_HIN;
        end
        S_HIN: if (hc_valid) begin
          h[cnt] <= (int'(cnt) < HIDDEN) ? hn : '0;
          cnt    <= last ? '0 : cnt + 1'b1;
          if (last) begin
            state <= S_EMIT;
            ext   <= 1'b1;
          end
        end
        default: state <= S_EMIT;
      endcase
    end
  end
endmodule
