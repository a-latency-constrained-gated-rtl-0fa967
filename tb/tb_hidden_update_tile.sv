// tb_hidden_update_tile: 5 hidden units padded to 8 words. Checks that after
// reset the all-zero state is broadcast but not sent out, and that for three
// steps the emitted h equals an fp32 emulation of (1 - z)*h + z*h~ (padding
// words zero), identically on the broadcast and the external stream, with the
// last flag on the final word.
module tb_hidden_update_tile;
  import gru_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned HIDDEN = 5, HP = 8;
  logic clk = 0, rst_n = 0;
  logic z_valid = 0, z_ready, hc_valid = 0, hc_ready;
  fp32_t z_data = 0, hc_data = 0;
  logic hb_valid, hb_ready = 1, hb_last, ho_valid, ho_ready = 1, ho_last;
  fp32_t hb_data, ho_data;
  int checks = 0, failures = 0;
  fp32_t h [HP];
  fp32_t hb_q [$], ho_q [$];

  hidden_update_tile #(.HIDDEN(HIDDEN), .HP(HP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hb_n = 0, ho_n = 0;
  always @(posedge clk) begin
    if (rst_n && hb_valid && hb_ready) begin
      hb_q.push_back(hb_data);
      checks++;
      if (hb_last !== (hb_n % HP == HP - 1)) failures++;
      hb_n++;
    end
    if (rst_n && ho_valid && ho_ready) begin
      ho_q.push_back(ho_data);
      checks++;
      if (ho_last !== (ho_n % HP == HP - 1)) failures++;
      ho_n++;
    end
  end
  always @(negedge clk) begin
    hb_ready = 1'($urandom_range(3) != 0);
    ho_ready = 1'($urandom_range(3) != 0);
  end

  task automatic expect_vec(bit ext);
    while (hb_q.size() < HP || (ext && ho_q.size() < HP)) @(negedge clk);
    for (int i = 0; i < HP; i++) begin
      fp32_t b;
      b = hb_q.pop_front();
      checks++;
      if (b !== h[i]) begin
        failures++;
        $display("hb[%0d] = %h expected %h", i, b, h[i]);
      end
      if (ext) begin
        b = ho_q.pop_front();
        checks++;
        if (b !== h[i]) failures++;
      end
    end
    checks++;
    if (!ext && ho_q.size() != 0) failures++;
  endtask

  initial begin
    fp32_t z [HP], hc [HP];
    for (int i = 0; i < HP; i++) h[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    expect_vec(0);
    for (int step = 0; step < 3; step++) begin
      for (int i = 0; i < HP; i++) begin
        z[i]  = (i < HIDDEN) ? r2f(real'($urandom_range(1000)) / 1000.0) : 0;
        hc[i] = (i < HIDDEN) ? r2f(real'($urandom_range(2000)) / 1000.0 - 1.0) : 0;
      end
      for (int i = 0; i < HP; i++)
        if (i < HIDDEN)
          h[i] = fadd(fmul(fadd(FP32_ONE, {~z[i][31], z[i][30:0]}), h[i]), fmul(z[i], hc[i]));
      for (int i = 0; i < HP; i++) begin
        z_valid = 1; z_data = z[i];
        do @(posedge clk); while (!z_ready);
        @(negedge clk);
      end
      z_valid = 0;
      for (int i = 0; i < HP; i++) begin
        hc_valid = 1; hc_data = hc[i];
        do @(posedge clk); while (!hc_ready);
        @(negedge clk);
      end
      hc_valid = 0;
      expect_vec(1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
