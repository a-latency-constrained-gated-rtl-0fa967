// tb_hcand_u_tile: checks the candidate recurrent kernel U_h.(r (.) h): the h
// vector is sent first, then r; each row result must equal an fp32 emulation
// of the element-wise product followed by the 8-lane MAC and reduction.
module tb_hcand_u_tile;
  import gru_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned N = 12, ROWS = 2, NPAD = 16;
  logic clk = 0, rst_n = 0;
  logic wt_we = 0;
  logic [0:0] wt_row = 0;
  logic [3:0] wt_col = 0;
  fp32_t wt_data = 0;
  logic h_valid = 0, h_ready, r_valid = 0, r_ready;
  fp32_t h_data = 0, r_data = 0;
  logic res_valid, res_ready = 1;
  fp32_t res_data;
  int checks = 0, failures = 0;
  fp32_t w [ROWS][N];
  fp32_t h [N], r [N];
  fp32_t expq [$];

  hcand_u_tile #(.N(N), .ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t ref_row(int k);
    fp32_t acc [LANES];
    fp32_t s1 [4];
    fp32_t s2 [2];
    for (int l = 0; l < LANES; l++) acc[l] = 0;
    for (int i = 0; i < N; i++) acc[i % LANES] = fadd(acc[i % LANES], fmul(w[k][i], fmul(r[i], h[i])));
    for (int j = 0; j < 4; j++) s1[j] = fadd(acc[2*j], acc[2*j+1]);
    for (int j = 0; j < 2; j++) s2[j] = fadd(s1[2*j], s1[2*j+1]);
    return fadd(s2[0], s2[1]);
  endfunction

  always @(posedge clk) begin
    if (rst_n && res_valid && res_ready) begin
      fp32_t e;
      e = expq.pop_front();
      checks++;
      if (res_data !== e) begin
        failures++;
        $display("result %h expected %h", res_data, e);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      for (int k = 0; k < ROWS; k++)
        for (int c = 0; c < N; c++) begin
          w[k][c] = rand_f(3);
          @(negedge clk);
          wt_we = 1; wt_row = 1'(k); wt_col = 4'(c); wt_data = w[k][c];
        end
      @(negedge clk);
      wt_we = 0;
      for (int i = 0; i < N; i++) begin
        h[i] = rand_f(3);
        r[i] = r2f(f2r(rand_f(2)) / 8.0);
        if (r[i][31]) r[i][31] = 1'b0;
      end
      for (int k = 0; k < ROWS; k++) expq.push_back(ref_row(k));
      for (int i = 0; i < N; i++) begin
        h_valid = 1; h_data = h[i];
        do @(posedge clk); while (!h_ready);
        @(negedge clk);
      end
      h_valid = 0;
      // r may only be consumed after h is complete
      checks++;
      if (!(dut.h_full)) failures++;
      for (int i = 0; i < N; i++) begin
        r_valid = 1; r_data = r[i];
        do @(posedge clk); while (!r_ready);
        @(negedge clk);
        r_valid = 0;
        repeat ($urandom_range(1)) @(negedge clk);
      end
      while (expq.size() != 0) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
