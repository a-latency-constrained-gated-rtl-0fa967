// stream_broadcast: delivers one 32-bit stream to N_OUT consumers.
//
// Models the stream-switch broadcast the source uses to send the same vector
// from one source to many tiles. A word advances only when every consumer is
// ready, so all consumers see the same sequence. m_valid[i] is qualified with
// that joint readiness; this requires consumers whose ready does not depend
// on their valid, which holds for every tile in this design.
// Combinational, no storage, no added latency.
module stream_broadcast
  import gru_pkg::*;
#(
  parameter int unsigned N_OUT = 4
) (
  input  logic             s_valid,
  output logic             s_ready,
  input  fp32_t            s_data,
  input  logic             s_last,
  output logic [N_OUT-1:0] m_valid,
  input  logic [N_OUT-1:0] m_ready,
  output fp32_t            m_data,
  output logic             m_last
);
  assign s_ready = &m_ready;
  assign m_valid = {N_OUT{s_valid && s_ready}};
  assign m_data  = s_data;
  assign m_last  = s_last;
endmodule
