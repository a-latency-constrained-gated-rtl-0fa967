// tb_stream_broadcast: one source, three consumers with random readiness.
// Each consumer must receive the source sequence exactly, and a word may only
// advance when every consumer is ready.
module tb_stream_broadcast;
  import gru_pkg::*;
  localparam int unsigned N_OUT = 3, WORDS = 300;
  logic s_valid = 0, s_ready, s_last = 0;
  fp32_t s_data = 0;
  logic [N_OUT-1:0] m_valid, m_ready = '0;
  fp32_t m_data;
  logic m_last;
  logic clk = 0;
  int checks = 0, failures = 0;
  int got [N_OUT];
  int sent = 0;

  stream_broadcast #(.N_OUT(N_OUT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    for (int i = 0; i < N_OUT; i++) m_ready[i] = 1'($urandom_range(3) != 0);
    s_valid = (sent < WORDS) && 1'($urandom_range(3) != 0);
    s_data  = 32'(sent) * 32'h9e37_79b9;
    s_last  = (sent % 10) == 9;
  end
  always @(posedge clk) begin
    for (int i = 0; i < N_OUT; i++) begin
      if (m_valid[i] && m_ready[i]) begin
        checks++;
        if (m_data !== 32'(got[i]) * 32'h9e37_79b9 || m_last !== ((got[i] % 10) == 9)) failures++;
        got[i]++;
      end
      if (m_valid[i] && !(&m_ready)) begin
        checks++;
        failures++;
      end
    end
    if (s_valid && s_ready) sent++;
  end

  initial begin
    for (int i = 0; i < N_OUT; i++) got[i] = 0;
    while (sent < WORDS) @(posedge clk);
    repeat (2) @(posedge clk);
    for (int i = 0; i < N_OUT; i++) begin
      checks++;
      if (got[i] != WORDS) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
