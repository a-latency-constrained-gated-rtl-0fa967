// tb_if_tile_aie2pl: sends 32-bit words in packets of 1 to 9 words (s_last on
// the final word) and checks the 128-bit beats taken on the PL clock enable:
// words in order from bit 0, zero fill after an early s_last, m_last on the
// beat that holds a packet's final word.
module tb_if_tile_aie2pl;
  import gru_pkg::*;
  logic clk = 0, rst_n = 0, pl_ce;
  logic s_valid = 0, s_ready, s_last = 0;
  fp32_t s_data = 0;
  logic m_valid, m_ready = 0, m_last;
  logic [127:0] m_data;
  int checks = 0, failures = 0;
  logic [1:0] ce_cnt = 0;
  logic [127:0] expq [$];
  logic explast [$];

  if_tile_aie2pl dut (.*);
  always #5 clk = ~clk;
  assign pl_ce = (ce_cnt == 2'd1);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    ce_cnt <= ce_cnt + 1'b1;
    if (pl_ce && m_valid && m_ready) begin
      logic [127:0] e;
      logic el;
      e  = expq.pop_front();
      el = explast.pop_front();
      checks++;
      if (m_data !== e || m_last !== el) begin
        failures++;
        $display("beat %h/%b expected %h/%b", m_data, m_last, e, el);
      end
    end
  end
  always @(negedge clk) m_ready = 1'($urandom_range(3) != 0);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 200; p++) begin
      int len;
      logic [127:0] beat;
      len  = 1 + $urandom_range(8);
      beat = '0;
      for (int i = 0; i < len; i++) begin
        fp32_t w;
        w = $urandom;
        beat[32*(i%4) +: 32] = w;
        if (i % 4 == 3 || i == len - 1) begin
          expq.push_back(beat);
          explast.push_back(i == len - 1);
          beat = '0;
        end
        s_valid = 1; s_data = w; s_last = (i == len - 1);
        do @(posedge clk); while (!s_ready);
        @(negedge clk);
        s_valid = 0;
        if ($urandom_range(3) == 0) @(negedge clk);
      end
    end
    while (expq.size() != 0) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
