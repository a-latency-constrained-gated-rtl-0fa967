// fp32_add: combinational IEEE-754 single precision adder.
//
// Used for the lane accumulation, the lane reduction, the bias addition and
// the hidden-state update. Choices of this design (the source gives only the
// data type): round to nearest, ties to even, with guard/round/sticky bits;
// subnormal inputs and results flush to zero; overflow gives infinity; NaN is
// not handled. An exact cancellation gives +0.
// Interface: a, b in, s out, no clock; result valid in the same cycle.
module fp32_add
  import gru_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t s
);
  fp32_t       x, y;          // |x| >= |y|
  logic [7:0]  d;
  logic [26:0] mx, my;        // {hidden, 23 fraction, guard, round, sticky}
  logic [26:0] sh;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic        found;
  logic signed [9:0] e;
  logic [23:0] m24;
  logic        inc;
  logic [24:0] m25;
  logic        a_zero, b_zero, cancel;

  always_comb begin
    a_zero = (a[30:23] == 8'd0);
    b_zero = (b[30:23] == 8'd0);
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    // align the smaller operand, folding lost bits into the sticky bit
    if (d >= 8'd27) sh = {26'b0, 1'b1};
    else begin
      sh = my >> d;
      if ((my & ((27'd1 << d) - 27'd1)) != 27'd0) sh[0] = 1'b1;
    end
    e = $signed({2'b0, x[30:23]});
    if (x[31] == y[31]) sum = {1'b0, mx} + {1'b0, sh};
    else                sum = {1'b0, mx} - {1'b0, sh};
    cancel = (sum == 28'd0);
    // normalise
    lz = 5'd0;
    found = 1'b0;
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 10'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          found = 1'b1;
          lz    = 5'(26 - i);
        end
      end
      sum = sum << lz;
      e   = e - $signed({5'b0, lz});
    end
    // round to nearest even
    m24 = sum[26:3];
    inc = sum[2] & (sum[1] | sum[0] | m24[0]);
    m25 = {1'b0, m24} + {24'b0, inc};
    if (m25[24]) begin
      m24 = m25[24:1];
      e   = e + 10'sd1;
    end else begin
      m24 = m25[23:0];
    end
    if (a_zero && b_zero)      s = {a[31] & b[31], 31'b0};
    else if (b_zero)           s = a;
    else if (a_zero)           s = b;
    else if (cancel)           s = 32'b0;
    else if (e <= 10'sd0)      s = {x[31], 31'b0};
    else if (e >= 10'sd255)    s = {x[31], 8'hff, 23'b0};
    else                       s = {x[31], e[7:0], m24[22:0]};
  end
endmodule
