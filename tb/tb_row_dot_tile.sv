// tb_row_dot_tile: checks the row-wise dot-product kernel with a vector length
// that is not a multiple of 8 and three rows per tile (row reuse). Weights and
// vectors are random; the expected results come from an fp32 emulation of the
// same lane-wise MAC and reduction order. Also checks that the first row's
// result is registered on the second clock edge after the one that accepts the last vector word, with random stalls on
// both streams in later vectors.
module tb_row_dot_tile;
  import gru_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned N = 20, ROWS = 3;
  localparam int unsigned NPAD = 24;

  logic clk = 0, rst_n = 0;
  logic wt_we = 0;
  logic [1:0] wt_row = 0;
  logic [4:0] wt_col = 0;
  fp32_t wt_data = 0;
  logic vec_valid = 0, vec_ready;
  fp32_t vec_data = 0;
  logic res_valid, res_ready = 0;
  fp32_t res_data;
  int checks = 0, failures = 0;
  int cycle = 0;

  fp32_t w [ROWS][N];
  fp32_t v [N];
  fp32_t expq [$];

  row_dot_tile #(.N(N), .ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t ref_row(int r);
    fp32_t acc [LANES];
    fp32_t s1 [4];
    fp32_t s2 [2];
    for (int l = 0; l < LANES; l++) acc[l] = 0;
    for (int c = 0; c < NPAD / LANES; c++)
      for (int l = 0; l < LANES; l++)
        if (c * LANES + l < N) acc[l] = fadd(acc[l], fmul(w[r][c*LANES+l], v[c*LANES+l]));
    for (int k = 0; k < 4; k++) s1[k] = fadd(acc[2*k], acc[2*k+1]);
    for (int k = 0; k < 2; k++) s2[k] = fadd(s1[2*k], s1[2*k+1]);
    return fadd(s2[0], s2[1]);
  endfunction

  // result checker
  int got = 0;
  bit rand_ready = 0;
  always @(posedge clk) begin
    if (res_valid && res_ready) begin
      fp32_t e;
      e = expq.pop_front();
      checks++;
      got++;
      if (res_data !== e) begin
        failures++;
        $display("row result %h expected %h", res_data, e);
      end
    end
    res_ready <= rand_ready ? 1'($urandom) : 1'b1;
  end

  task automatic send_vector(bit gaps);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      vec_valid = 1'b1;
      vec_data  = v[i];
      do @(posedge clk); while (!vec_ready);
      if (gaps) begin
        @(negedge clk);
        vec_valid = 1'b0;
        repeat ($urandom_range(2)) @(negedge clk);
      end
    end
    @(negedge clk);
    vec_valid = 1'b0;
  endtask

  initial begin
    int t_last, t_res;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < N; c++) begin
          w[r][c]  = rand_f(4);
          @(negedge clk);
          wt_we   = 1'b1;
          wt_row  = 2'(r);
          wt_col  = 5'(c);
          wt_data = w[r][c];
        end
      @(negedge clk);
      wt_we = 1'b0;
      for (int i = 0; i < N; i++) v[i] = rand_f(4);
      for (int r = 0; r < ROWS; r++) expq.push_back(ref_row(r));
      rand_ready = (trial > 0);
      send_vector(trial > 0);
      t_last = cycle;
      if (trial == 0) begin
        while (!res_valid) @(posedge clk);
        t_res = cycle;
        checks++;
        if (t_res - t_last != 2) begin
          failures++;
          $display("row-0 latency %0d cycles, expected 2", t_res - t_last);
        end
      end
      while (expq.size() != 0) @(posedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (got != 6 * ROWS) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
