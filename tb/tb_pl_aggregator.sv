// tb_pl_aggregator: drives the PL aggregation kernel with 6 hidden rows over 3
// interface tiles (two rows per tile). For each step every tile delivers the
// update- and reset-gate packets of its rows in random order; the candidate
// packets are released only after the reset vector has come out, as in the
// full design. Checks: reads are blocking (no tile is read unless all offer a
// packet); each gate vector comes out on its own stream with the values of
// the right table (sigmoid or tanh) at the right rows, zero padding and the
// last flag; the reset and candidate vectors leave 3 PL cycles after the read
// that completes them.
module tb_pl_aggregator;
  import gru_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned HIDDEN = 6, NUM_IF = 3, HP = 8;
  logic clk = 0, rst_n = 0, pl_ce;
  logic lut_we = 0, lut_sel = 0;
  logic [LUT_IDX_W-1:0] lut_addr = 0;
  fp32_t lut_data = 0;
  logic [NUM_IF-1:0] in_valid, in_ready;
  logic [127:0] in_data [NUM_IF];
  logic [2:0] out_valid, out_ready = 3'b111;
  logic [127:0] out_data;
  logic out_last;
  int checks = 0, failures = 0;
  logic [1:0] ce_cnt = 0;
  int plc = 0, last_read = 0;
  fp32_t sigt [LUT_N], tanht [LUT_N];
  gate_pkt_t q [NUM_IF][$];
  fp32_t expv [3][HP];
  int beat_no [3];
  bit r_seen = 0;
  int vectors_out [3];

  pl_aggregator #(.HIDDEN(HIDDEN), .NUM_IF(NUM_IF)) dut (.*);
  always #5 clk = ~clk;
  assign pl_ce = (ce_cnt == 2'd2);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb
    for (int i = 0; i < NUM_IF; i++) begin
      in_valid[i] = rst_n && (q[i].size() != 0);
      in_data[i]  = (q[i].size() != 0) ? {96'b0, q[i][0]} : '0;
    end

  always @(posedge clk) begin
    ce_cnt <= ce_cnt + 1'b1;
    if (pl_ce) begin
      plc++;
      if (|in_ready) begin
        checks++;
        if (!(&in_valid) || !(&in_ready)) failures++;
        for (int i = 0; i < NUM_IF; i++) void'(q[i].pop_front());
        last_read = plc;
      end
      for (int g = 0; g < 3; g++)
        if (out_valid[g] && out_ready[g]) begin
          if (beat_no[g] == 0 && g != GATE_Z) begin
            checks++;
            if (plc - last_read != 3) begin
              failures++;
              $display("gate %0d written %0d PL cycles after the read", g, plc - last_read);
            end
          end
          for (int j = 0; j < 4; j++) begin
            checks++;
            if (out_data[32*j +: 32] !== expv[g][4*beat_no[g] + j]) begin
              failures++;
              $display("gate %0d word %0d = %h expected %h", g, 4*beat_no[g]+j, out_data[32*j +: 32], expv[g][4*beat_no[g]+j]);
            end
          end
          checks++;
          if (out_last !== (beat_no[g] == HP / 4 - 1)) failures++;
          beat_no[g] = (beat_no[g] + 1) % (HP / 4);
          if (beat_no[g] == 0) begin
            vectors_out[g]++;
            if (g == GATE_R) r_seen = 1;
          end
        end
    end
  end

  function automatic gate_pkt_t mk(gate_e g, int row);
    gate_pkt_t p;
    p.gate = g;
    p.row  = 8'(row);
    p.rsvd = '0;
    p.idx  = LUT_IDX_W'($urandom);
    expv[g][row] = (g == GATE_H) ? tanht[p.idx] : sigt[p.idx];
    return p;
  endfunction

  initial begin
    for (int g = 0; g < 3; g++) begin
      beat_no[g] = 0;
      vectors_out[g] = 0;
      for (int i = 0; i < HP; i++) expv[g][i] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < LUT_N; a++) begin
      sigt[a]  = rand_f(2);
      tanht[a] = rand_f(2);
      lut_we = 1; lut_sel = 0; lut_addr = LUT_IDX_W'(a); lut_data = sigt[a];
      @(negedge clk);
      lut_sel = 1; lut_data = tanht[a];
      @(negedge clk);
    end
    lut_we = 0;
    for (int step = 0; step < 5; step++) begin
      r_seen = 0;
      for (int i = 0; i < NUM_IF; i++) begin
        gate_pkt_t p [4];
        p[0] = mk(GATE_Z, 2*i); p[1] = mk(GATE_Z, 2*i+1);
        p[2] = mk(GATE_R, 2*i); p[3] = mk(GATE_R, 2*i+1);
        for (int k = 3; k > 0; k--) begin
          int j;
          gate_pkt_t t;
          j = $urandom_range(k);
          t = p[k]; p[k] = p[j]; p[j] = t;
        end
        for (int k = 0; k < 4; k++) q[i].push_back(p[k]);
      end
      while (!r_seen) @(negedge clk);
      for (int i = 0; i < NUM_IF; i++) begin
        q[i].push_back(mk(GATE_H, 2*i + 1));
        q[i].push_back(mk(GATE_H, 2*i));
      end
      while (vectors_out[GATE_H] != step + 1 || vectors_out[GATE_Z] != step + 1) @(negedge clk);
    end
    checks++;
    if (vectors_out[GATE_R] != 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
