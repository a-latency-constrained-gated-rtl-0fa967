// tb_gate_combiner_tile: checks that the combiner adds W.x, U.h and the row
// bias in fp32, maps the sum to the right activation-table index (directed
// values at the table edges and random values) and tags the packet with its
// gate and row, for two rows per tile.
module tb_gate_combiner_tile;
  import gru_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned ROWS = 2, ROW_BASE = 5;
  logic clk = 0, rst_n = 0;
  logic b_we = 0;
  logic [0:0] b_row = 0;
  fp32_t b_data = 0;
  logic wx_valid = 0, wx_ready, uh_valid = 0, uh_ready;
  fp32_t wx_data = 0, uh_data = 0;
  logic pkt_valid, pkt_ready = 1;
  gate_pkt_t pkt_data;
  int checks = 0, failures = 0;
  fp32_t bias [ROWS];
  gate_pkt_t expq [$];

  gate_combiner_tile #(.GATE(GATE_H), .ROW_BASE(ROW_BASE), .ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LUT_IDX_W-1:0] ref_idx(fp32_t x);
    real v;
    longint f;
    v = f2r(x) * real'(1 << LUT_FRAC);
    if (v >= 4096.0) return '1;
    if (v <= -4096.0) return '0;
    f = longint'($floor(v)) + longint'(LUT_N / 2);
    if (f < 0) return '0;
    if (f > LUT_N - 1) return '1;
    return LUT_IDX_W'(f);
  endfunction

  always @(posedge clk) begin
    if (pkt_valid && pkt_ready) begin
      gate_pkt_t e;
      e = expq.pop_front();
      checks++;
      if (pkt_data !== e) begin
        failures++;
        $display("packet %h expected %h", pkt_data, e);
      end
    end
    pkt_ready <= 1'($urandom_range(3) != 0);
  end

  int k = 0;
  task automatic send(fp32_t a, fp32_t b);
    gate_pkt_t e;
    e.gate = GATE_H;
    e.row  = 8'(ROW_BASE + k);
    e.rsvd = '0;
    e.idx  = ref_idx(fadd(fadd(a, b), bias[k]));
    expq.push_back(e);
    k = (k + 1) % ROWS;
    wx_valid = 1; wx_data = a;
    uh_valid = 1; uh_data = b;
    do @(posedge clk); while (!wx_ready);
    @(negedge clk);
    wx_valid = 0; uh_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      bias[r] = 0;
      b_we = 1; b_row = 1'(r); b_data = 0;
      @(negedge clk);
    end
    b_we = 0;
    // directed: exact table edges and saturation
    send(32'hc1000000, 0);          // -8     -> 0
    send(32'h40fe0000, 0);          // 7.9375 -> 1020
    send(32'h41800000, 0);          // 16     -> saturate 1023
    send(32'hc2c80000, 0);          // -100   -> 0
    send(32'hba83126f, 0);          // -0.001 -> 511
    send(32'h00000000, 0);          // 0      -> 512
    send(32'h3c800000, 0);          // 1/64   -> 513
    send(32'hbc800000, 0);          // -1/64  -> 511
    send(32'hbc900000, 0);          // -1.125/64 -> 510
    for (int r = 0; r < ROWS; r++) begin
      bias[r] = rand_f(2);
      b_we = 1; b_row = 1'(r); b_data = bias[r];
      @(negedge clk);
    end
    b_we = 0;
    for (int i = 0; i < 3000; i++) send(rand_f(3), rand_f(3));
    while (expq.size() != 0) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
