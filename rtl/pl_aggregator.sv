// pl_aggregator: the PL aggregation kernel of the hybrid architecture.
//
// Partial results leave the vector tiles as one-word packets {gate, row, LUT
// index} through NUM_IF interface tiles. This kernel, clocked by the PL clock
// enable pl_ce (one tile cycle in four), runs the four-step loop the source
// describes:
//   S_READ   blocking read: wait until every interface tile offers a beat,
//            then take one beat from each at once;
//   S_APPLY  decode each packet's gate and row, look the index up in the
//            sigmoid table (update and reset gates) or the tanh table
//            (candidate), and store the value at its row of that gate's vector;
//   S_CHECK  if a gate's vector is complete, start writing it (reset gate
//            first, then update, then candidate), else read again;
//   S_WRITE  write the vector to that gate's output interface tile, four words
//            per 128-bit beat in row order, zero padded to a whole beat, with
//            out_last on the final beat; then clear the gate's valid flags.
// The tables are written by the host (lut_we); their contents, size and the
// index mapping (see gru_pkg) are this design's choices, as are the per-gate
// output streams, the write priority and the state split. The source reports
// an HLS implementation with II 6-8 and depth 7-9 PL cycles; this FSM needs 3
// PL cycles from the read to the first output beat of a completed vector.
module pl_aggregator
  import gru_pkg::*;
#(
  parameter int unsigned HIDDEN = 32,
  parameter int unsigned NUM_IF = 32,
  localparam int unsigned HP = ((HIDDEN + PL_WORDS - 1) / PL_WORDS) * PL_WORDS,
  localparam int unsigned NB = HP / PL_WORDS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pl_ce,
  // activation table writes
  input  logic               lut_we,
  input  logic               lut_sel,        // 0 sigmoid, 1 tanh
  input  logic [LUT_IDX_W-1:0] lut_addr,
  input  fp32_t              lut_data,
  // packets from the interface tiles
  input  logic [NUM_IF-1:0]  in_valid,
  output logic [NUM_IF-1:0]  in_ready,
  input  logic [127:0]       in_data [NUM_IF],
  // one output stream per gate, indexed by gate_e
  output logic [2:0]         out_valid,
  input  logic [2:0]         out_ready,
  output logic [127:0]       out_data,
  output logic               out_last
);
  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1;

  typedef enum logic [1:0] {S_READ, S_APPLY, S_CHECK, S_WRITE} state_e;
  state_e state;

  fp32_t            sig_lut  [LUT_N];
  fp32_t            tanh_lut [LUT_N];
  gate_pkt_t        pk   [NUM_IF];
  fp32_t            res  [3][HP];
  logic [HIDDEN-1:0] vld [3];
  logic [1:0]       wgate;
  logic [BW-1:0]    wbeat;
  logic             all_valid;

  assign all_valid = &in_valid;
  assign in_ready  = {NUM_IF{pl_ce && (state == S_READ) && all_valid}};

  always_comb begin
    out_valid = '0;
    if (state == S_WRITE) out_valid[wgate] = 1'b1;
    for (int j = 0; j < PL_WORDS; j++)
      out_data[32*j +: 32] = res[wgate][int'(wbeat) * PL_WORDS + j];
    out_last = (wbeat == BW'(NB - 1));
  end

  always_ff @(posedge clk) begin
    if (lut_we) begin
      if (lut_sel) tanh_lut[lut_addr] <= lut_data;
      else         sig_lut[lut_addr]  <= lut_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_READ;
      wgate <= '0;
      wbeat <= '0;
      for (int g = 0; g < 3; g++) begin
        vld[g] <= '0;
        for (int i = 0; i < HP; i++) res[g][i] <= '0;
      end
      for (int i = 0; i < NUM_IF; i++) pk[i] <= '0;
    end else if (pl_ce) begin
      unique case (state)
        S_READ: if (all_valid) begin
          for (int i = 0; i < NUM_IF; i++) pk[i] <= gate_pkt_t'(in_data[i][31:0]);
          state <= S_APPLY;
        end
        S_APPLY: begin
          for (int i = 0; i < NUM_IF; i++) begin
            if (int'(pk[i].row) < HIDDEN && pk[i].gate != 2'd3) begin
              res[pk[i].gate][int'(pk[i].row)] <= (pk[i].gate == GATE_H) ? tanh_lut[pk[i].idx]
                                                                         : sig_lut[pk[i].idx];
              vld[pk[i].gate][int'(pk[i].row)] <= 1'b1;
            end
          end
          state <= S_CHECK;
        end
        S_CHECK: begin
          if (&vld[GATE_R]) begin
            wgate <= GATE_R;
            state <= S_WRITE;
          end else if (&vld[GATE_Z]) begin
            wgate <= GATE_Z;
            state <= S_WRITE;
          end else if (&vld[GATE_H]) begin
            wgate <= GATE_H;
            state <= S_WRITE;
          end else begin
            state <= S_READ;
          end
          wbeat <= '0;
        end
        S_WRITE: if (out_ready[wgate]) begin
          if (wbeat == BW'(NB - 1)) begin
            vld[wgate] <= '0;
            wbeat      <= '0;
            state      <= S_CHECK;
          end else begin
            wbeat <= wbeat + 1'b1;
          end
        end
        default: state <= S_READ;
      endcase
    end
  end

  // every packet must name a gate and a row that exist
  for (genvar i = 0; i < NUM_IF; i++) begin : g_chk
    a_pkt_ok: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_APPLY && pl_ce) |-> (int'(pk[i].row) < HIDDEN && pk[i].gate != 2'd3));
  end
endmodule
