// tb_packet_merge: three sources send tagged packets with random gaps and the
// sink stalls at random. Checks that every packet comes out exactly once, that
// each source's packets keep their order, that out_last is set, and that
// three always-valid sources are served in turn (round robin).
module tb_packet_merge;
  localparam int unsigned N_IN = 3, PER = 200;
  logic clk = 0, rst_n = 0;
  logic [N_IN-1:0] in_valid = '0, in_ready;
  logic [31:0] in_data [N_IN];
  logic out_valid, out_ready = 0, out_last;
  logic [31:0] out_data;
  int checks = 0, failures = 0;
  int next_exp [N_IN];
  int sent [N_IN];
  int total = 0;
  bit rr_phase = 0;
  int last_src = -1;

  packet_merge #(.N_IN(N_IN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources: packet = {source, sequence}
  always @(negedge clk) begin
    for (int i = 0; i < N_IN; i++) begin
      if (rst_n && !in_valid[i] && sent[i] < PER && (rr_phase || $urandom_range(2) == 0)) begin
        in_valid[i] = 1'b1;
        in_data[i]  = {8'(i), 24'(sent[i])};
      end
    end
    out_ready = rr_phase ? 1'b1 : 1'($urandom_range(1));
  end
  always @(posedge clk) begin
    for (int i = 0; i < N_IN; i++)
      if (in_valid[i] && in_ready[i]) begin
        in_valid[i] <= 1'b0;
        sent[i]     <= sent[i] + 1;
      end
    if (out_valid && out_ready) begin
      int s, q;
      s = int'(out_data[31:24]);
      q = int'(out_data[23:0]);
      checks++;
      if (s >= N_IN || q != next_exp[s] || !out_last) begin
        failures++;
        $display("bad packet %h", out_data);
      end else next_exp[s]++;
      if (rr_phase && sent[0] < PER - 2 && sent[1] < PER - 2 && sent[2] < PER - 2) begin
        checks++;
        if (last_src >= 0 && s != (last_src + 1) % N_IN) begin
          failures++;
          $display("round robin broken: %0d after %0d", s, last_src);
        end
        last_src = s;
      end else last_src = -1;
      total++;
    end
  end

  initial begin
    for (int i = 0; i < N_IN; i++) begin
      in_data[i] = 0; next_exp[i] = 0; sent[i] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (total < N_IN * PER / 2) @(negedge clk);
    // all sources keep valid high, the sink never stalls
    rr_phase = 1;
    while (total < N_IN * PER) @(negedge clk);
    for (int i = 0; i < N_IN; i++) begin
      checks++;
      if (next_exp[i] != PER) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
