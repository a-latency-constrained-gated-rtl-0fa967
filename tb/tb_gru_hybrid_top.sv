// tb_gru_hybrid_top: end-to-end test of one GRU layer at a reduced size (6
// hidden units, 5 inputs, two rows per kernel). It loads random weights and
// biases and sampled sigmoid/tanh tables through the runtime-parameter port,
// streams NSTEP input vectors back to back and compares every h_t with an
// fp32 emulation of the same computation (same lane order, same table
// mapping). It also counts how often each mechanism of the design occurs and
// fails if one never does: row reuse in a kernel, zero padding of x and of the
// aggregator's vectors, packet-merge contention, blocking-read waits in the
// aggregator, W kernels taking the next x while the recurrence is still
// running, table saturation, and back-pressure on the h output.
module tb_gru_hybrid_top;
  import gru_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned HIDDEN = 6, INPUT = 5, ROWS = 2;
  localparam int unsigned NSTEP = 6;
  localparam int unsigned XP = ((INPUT + 3) / 4) * 4, HP = ((HIDDEN + 3) / 4) * 4;
  localparam int unsigned WATCHDOG = 200000;

  logic clk = 0, rst_n = 0;
  logic rtp_we = 0;
  rtp_kind_e rtp_kind = RTP_W;
  gate_e rtp_gate = GATE_Z;
  logic [7:0] rtp_row = 0;
  logic [15:0] rtp_col = 0;
  fp32_t rtp_data = 0;
  logic x_valid = 0, x_ready, x_last = 0;
  logic [127:0] x_data = 0;
  logic h_valid, h_ready = 0, h_last;
  logic [127:0] h_data;

  gru_hybrid_top #(.HIDDEN(HIDDEN), .INPUT(INPUT), .ROWS_PER_TILE(ROWS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  fp32_t W [3][HIDDEN][INPUT];
  fp32_t U [3][HIDDEN][HIDDEN];
  fp32_t B [3][HIDDEN];
  fp32_t sigt [LUT_N], tanht [LUT_N];
  fp32_t X [NSTEP][XP];
  fp32_t Href [NSTEP + 1][HP];
  int cyc = 0;

  // mechanism counters
  int n_rowreuse = 0, n_xpad = 0, n_aggpad = 0, n_merge_contention = 0;
  int n_blocking_wait = 0, n_prefetch = 0, n_lut_sat = 0, n_backpressure = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ reference
  function automatic fp32_t dotp(fp32_t w [], fp32_t v [], int n);
    fp32_t acc [LANES];
    fp32_t s1 [4];
    fp32_t s2 [2];
    for (int l = 0; l < LANES; l++) acc[l] = 0;
    for (int i = 0; i < n; i++) acc[i % LANES] = fadd(acc[i % LANES], fmul(w[i], v[i]));
    for (int j = 0; j < 4; j++) s1[j] = fadd(acc[2*j], acc[2*j+1]);
    for (int j = 0; j < 2; j++) s2[j] = fadd(s1[2*j], s1[2*j+1]);
    return fadd(s2[0], s2[1]);
  endfunction

  function automatic int ref_idx(fp32_t x);
    real v;
    longint f;
    v = f2r(x) * real'(1 << LUT_FRAC);
    if (v >= 4096.0) return LUT_N - 1;
    if (v <= -4096.0) return 0;
    f = longint'($floor(v)) + longint'(LUT_N / 2);
    if (f < 0) return 0;
    if (f > LUT_N - 1) return LUT_N - 1;
    return int'(f);
  endfunction

  function automatic fp32_t act(int q, fp32_t wx, fp32_t uh, fp32_t b);
    int k;
    k = ref_idx(fadd(fadd(wx, uh), b));
    return (q == GATE_H) ? tanht[k] : sigt[k];
  endfunction

  task automatic compute_reference();
    fp32_t wrow [], urow [], xv [], hv [], rh [];
    fp32_t z [HIDDEN], r [HIDDEN], hc [HIDDEN];
    for (int i = 0; i < HP; i++) Href[0][i] = 0;
    for (int t = 0; t < NSTEP; t++) begin
      xv = new[XP];
      hv = new[HP];
      rh = new[HP];
      for (int c = 0; c < XP; c++) xv[c] = X[t][c];
      for (int c = 0; c < HP; c++) hv[c] = Href[t][c];
      for (int q = 0; q < 2; q++)
        for (int i = 0; i < HIDDEN; i++) begin
          wrow = new[XP];
          urow = new[HP];
          for (int c = 0; c < XP; c++) wrow[c] = (c < INPUT) ? W[q][i][c] : 0;
          for (int c = 0; c < HP; c++) urow[c] = (c < HIDDEN) ? U[q][i][c] : 0;
          if (q == GATE_Z) z[i] = act(q, dotp(wrow, xv, XP), dotp(urow, hv, HP), B[q][i]);
          else             r[i] = act(q, dotp(wrow, xv, XP), dotp(urow, hv, HP), B[q][i]);
        end
      for (int c = 0; c < HP; c++) rh[c] = (c < HIDDEN) ? fmul(r[c], hv[c]) : 0;
      for (int i = 0; i < HIDDEN; i++) begin
        wrow = new[XP];
        urow = new[HP];
        for (int c = 0; c < XP; c++) wrow[c] = (c < INPUT) ? W[GATE_H][i][c] : 0;
        for (int c = 0; c < HP; c++) urow[c] = (c < HIDDEN) ? U[GATE_H][i][c] : 0;
        hc[i] = act(GATE_H, dotp(wrow, xv, XP), dotp(urow, rh, HP), B[GATE_H][i]);
      end
      for (int i = 0; i < HP; i++)
        Href[t+1][i] = (i < HIDDEN)
          ? fadd(fmul(fadd(FP32_ONE, {~z[i][31], z[i][30:0]}), Href[t][i]), fmul(z[i], hc[i]))
          : 0;
    end
  endtask

  // ------------------------------------------------------------------ stimulus helpers
  task automatic rtp(rtp_kind_e k, gate_e g, int row, int col, fp32_t d);
    @(negedge clk);
    rtp_we = 1; rtp_kind = k; rtp_gate = g; rtp_row = 8'(row); rtp_col = 16'(col); rtp_data = d;
  endtask

  function automatic fp32_t urand(real scale);
    return r2f((real'($urandom_range(20000)) / 10000.0 - 1.0) * scale);
  endfunction

  // ------------------------------------------------------------------ monitors
  int nbeat_out = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (h_valid && !h_ready) n_backpressure++;
      if (dut.pl_ce && dut.u_agg.state == 2'd0 && !(&dut.agg_in_valid))
        n_blocking_wait++;
      for (int g = 0; g < HIDDEN / ROWS; g++)
        if ($countones(dut.pk_valid[g]) >= 2) n_merge_contention++;
      if (dut.xw_valid && dut.xw_ready && dut.u_ht.state != 2'd0 && dut.u_ht.ext) n_prefetch++;
      if (dut.u_agg.state == 2'd3 && dut.pl_ce) n_aggpad++;
      if (dut.g_grp[0].g_gate[0].u_w.state == 2'd2) n_rowreuse++;
      for (int g = 0; g < HIDDEN / ROWS; g++)
        if (dut.m_valid[g] && dut.m_ready[g] &&
            (dut.m_data[g][LUT_IDX_W-1:0] == '0 || dut.m_data[g][LUT_IDX_W-1:0] == '1)) n_lut_sat++;
    end
  end

  // ------------------------------------------------------------------ main
  initial begin
    int step_out;
    fp32_t got;
    int t0, t1;
    // parameters of the layer
    for (int q = 0; q < 3; q++)
      for (int i = 0; i < HIDDEN; i++) begin
        for (int c = 0; c < INPUT; c++) W[q][i][c] = urand(2.0 / $sqrt(real'(INPUT)));
        for (int c = 0; c < HIDDEN; c++) U[q][i][c] = urand(2.0 / $sqrt(real'(HIDDEN)));
        B[q][i] = urand(0.5);
      end
    B[GATE_Z][0] = r2f(40.0);        // drives the table index into saturation
    for (int a = 0; a < LUT_N; a++) begin
      real xc;
      xc = (real'(a) - real'(LUT_N / 2) + 0.5) / real'(1 << LUT_FRAC);
      sigt[a]  = r2f(1.0 / (1.0 + $exp(-xc)));
      tanht[a] = r2f((1.0 - $exp(-2.0 * xc)) / (1.0 + $exp(-2.0 * xc)));
    end
    for (int t = 0; t < NSTEP; t++)
      for (int c = 0; c < XP; c++) X[t][c] = (c < INPUT) ? urand(1.0) : 0;
    compute_reference();

    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < 3; q++)
      for (int i = 0; i < HIDDEN; i++) begin
        for (int c = 0; c < INPUT; c++) rtp(RTP_W, gate_e'(q), i, c, W[q][i][c]);
        for (int c = INPUT; c < XP; c++) rtp(RTP_W, gate_e'(q), i, c, 0);
        for (int c = 0; c < HIDDEN; c++) rtp(RTP_U, gate_e'(q), i, c, U[q][i][c]);
        for (int c = HIDDEN; c < HP; c++) rtp(RTP_U, gate_e'(q), i, c, 0);
        rtp(RTP_BIAS, gate_e'(q), i, 0, B[q][i]);
      end
    for (int a = 0; a < LUT_N; a++) begin
      rtp(RTP_LUT_SIG, GATE_Z, 0, a, sigt[a]);
      rtp(RTP_LUT_TANH, GATE_Z, 0, a, tanht[a]);
    end
    @(negedge clk);
    rtp_we = 0;

    fork
      // x source: all vectors back to back, on the PL clock enable
      begin
        for (int t = 0; t < NSTEP; t++)
          for (int b = 0; b < XP / 4; b++) begin
            @(negedge clk);
            x_valid = 1;
            for (int j = 0; j < 4; j++) x_data[32*j +: 32] = X[t][4*b + j];
            x_last = (b == XP / 4 - 1);
            if (XP > INPUT && b == XP / 4 - 1) n_xpad++;
            do @(posedge clk); while (!(x_ready && x_valid));
          end
        @(negedge clk);
        x_valid = 0;
      end
      // h sink with random back-pressure
      begin
        t0 = cyc;
        for (step_out = 0; step_out < NSTEP; step_out++) begin
          for (int b = 0; b < HP / 4; b++) begin
            do begin
              @(negedge clk);
              h_ready = 1'($urandom_range(2) != 0);
              @(posedge clk);
            end while (!(h_valid && h_ready && dut.pl_ce));
            for (int j = 0; j < 4; j++) begin
              got = h_data[32*j +: 32];
              checks++;
              if (got !== Href[step_out + 1][4*b + j]) begin
                failures++;
                $display("step %0d h[%0d] = %h (%f) expected %h (%f)", step_out, 4*b + j,
                         got, f2r(got), Href[step_out + 1][4*b + j], f2r(Href[step_out + 1][4*b + j]));
              end
            end
            checks++;
            if (h_last !== (b == HP / 4 - 1)) failures++;
          end
        end
        t1 = cyc;
      end
    join
    $display("%0d steps in %0d tile cycles (%0d per step)", NSTEP, t1 - t0, (t1 - t0) / NSTEP);
    $display("row reuse cycles %0d, x padding %0d, aggregator write beats %0d, merge contention %0d",
             n_rowreuse, n_xpad, n_aggpad, n_merge_contention);
    $display("blocking-read wait cycles %0d, x prefetch words %0d, table saturation %0d, h back-pressure %0d",
             n_blocking_wait, n_prefetch, n_lut_sat, n_backpressure);
    checks++; if (ROWS > 1 && n_rowreuse == 0) begin failures++; $display("row reuse never happened"); end
    checks++; if (XP > INPUT && n_xpad == 0) begin failures++; $display("x padding never happened"); end
    checks++; if (n_aggpad == 0)           begin failures++; $display("aggregator never wrote"); end
    checks++; if (n_merge_contention == 0) begin failures++; $display("merge contention never happened"); end
    checks++; if (n_blocking_wait == 0)    begin failures++; $display("blocking read never waited"); end
    checks++; if (n_prefetch == 0)         begin failures++; $display("x prefetch never happened"); end
    checks++; if (n_lut_sat == 0)          begin failures++; $display("table saturation never happened"); end
    checks++; if (n_backpressure == 0)     begin failures++; $display("h back-pressure never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
