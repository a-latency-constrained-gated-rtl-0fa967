// tb_if_tile_pl2aie: sends 128-bit beats on the PL clock enable and checks the
// 32-bit words (order, values, last flag). With an always-ready sink it also
// checks the full rate: 32 beats must come out as 128 words in 128
// consecutive tile cycles.
module tb_if_tile_pl2aie;
  import gru_pkg::*;
  localparam int BEATS = 32;
  logic clk = 0, rst_n = 0, pl_ce;
  logic s_valid = 0, s_ready, s_last = 0;
  logic [127:0] s_data = 0;
  logic m_valid, m_ready = 1, m_last;
  fp32_t m_data;
  int checks = 0, failures = 0;
  int cyc = 0, nword = 0, first_cyc = -1, last_cyc = -1;
  int nbeat = 0;
  bit stall = 0;
  logic [1:0] ce_cnt = 0;

  if_tile_pl2aie dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t word_of(int i);
    return 32'(i) * 32'h0101_0107 + 32'h55;
  endfunction

  always @(posedge clk) begin
    cyc++;
    ce_cnt <= ce_cnt + 1'b1;
    if (rst_n && m_valid && m_ready) begin
      checks++;
      if (m_data !== word_of(nword) || m_last !== ((nword % 8) == 7)) begin
        failures++;
        $display("word %0d = %h last %b", nword, m_data, m_last);
      end
      if (nword == 0) first_cyc = cyc;
      if (nword == 4 * BEATS - 1) last_cyc = cyc;
      nword++;
    end
    if (rst_n && s_valid && s_ready) nbeat++;
  end
  assign pl_ce = (ce_cnt == 2'd3);

  always @(negedge clk) begin
    if (rst_n) begin
      if (nbeat < 2 * BEATS) begin
        s_valid = 1'b1;
        for (int j = 0; j < 4; j++) s_data[32*j +: 32] = word_of(4 * nbeat + j);
        s_last = (nbeat % 2) == 1;
      end else s_valid = 1'b0;
      m_ready = stall ? 1'($urandom_range(1)) : 1'b1;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nword < 4 * BEATS) @(posedge clk);
    checks++;
    if (last_cyc - first_cyc != 4 * BEATS - 1) begin
      failures++;
      $display("rate: %0d words took %0d cycles", 4 * BEATS, last_cyc - first_cyc + 1);
    end
    stall = 1;
    while (nword < 8 * BEATS) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
