// gru_pkg: types and constants shared by the GRU hybrid datapath.
//
// The design moves single precision floats (fp32_t) on 32-bit streams in the
// vector-tile domain and 128-bit beats in the programmable-logic domain. Gate
// results travel to the aggregator as one 32-bit packet each (gate_pkt_t): the
// gate, the row and the activation-table index. The layout of that packet, the
// table size and its input range are choices of this design; the source only
// says that the third tile "adds the bias, assigns an ID, and transforms the
// floating point to a LUT index".
package gru_pkg;

  typedef logic [31:0] fp32_t;

  // Gate identifiers carried in every packet.
  typedef enum logic [1:0] {
    GATE_Z = 2'd0,   // update gate, sigmoid
    GATE_R = 2'd1,   // reset gate, sigmoid
    GATE_H = 2'd2    // candidate hidden state, tanh
  } gate_e;

  // Vector lanes of one MAC step: 8 lanes of fp32 (two 128-bit loads).
  localparam int unsigned LANES = 8;

  // Clock ratio between the vector-tile clock (1.25 GHz) and the PL clock
  // (312.5 MHz). The PL side runs on a clock enable, one cycle in four.
  localparam int unsigned PL_RATIO = 4;

  // 128-bit PL beat = 4 fp32 words.
  localparam int unsigned PL_WORDS = 4;

  // Activation tables: LUT_N entries covering [-2^(LUT_IDX_W-1-LUT_FRAC),
  // 2^(LUT_IDX_W-1-LUT_FRAC)) in steps of 2^-LUT_FRAC. Index of x is
  // clamp(floor(x * 2^LUT_FRAC) + LUT_N/2, 0, LUT_N-1).
  localparam int unsigned LUT_IDX_W = 10;
  localparam int unsigned LUT_N     = 1 << LUT_IDX_W;
  localparam int unsigned LUT_FRAC  = 6;

  // One gate result on its way to the aggregator (32 bits).
  typedef struct packed {
    gate_e                gate;   // [31:30]
    logic [7:0]           row;    // [29:22]
    logic [11:0]          rsvd;   // [21:10] zero
    logic [LUT_IDX_W-1:0] idx;    // [9:0]
  } gate_pkt_t;

  // Runtime-parameter write from the host.
  typedef enum logic [2:0] {
    RTP_W        = 3'd0,  // input weights  W_gate[row][col]
    RTP_U        = 3'd1,  // recurrent weights U_gate[row][col]
    RTP_BIAS     = 3'd2,  // bias b_gate[row]
    RTP_LUT_SIG  = 3'd3,  // sigmoid table entry [col]
    RTP_LUT_TANH = 3'd4   // tanh table entry [col]
  } rtp_kind_e;

  // Rounded fp32 constant 1.0.
  localparam fp32_t FP32_ONE = 32'h3f80_0000;

  // Round up to a multiple of m.
  function automatic int unsigned round_up(int unsigned n, int unsigned m);
    return ((n + m - 1) / m) * m;
  endfunction

endpackage
