// fp32_mul: combinational IEEE-754 single precision multiplier.
//
// The MAC lanes of the row kernels and the hidden-state update multiply fp32
// values; the source fixes the data type (single precision floating point) but
// not the arithmetic corner cases, so this unit makes these choices:
// round to nearest, ties to even; subnormal inputs and results flush to zero
// (sign kept); an exponent overflow gives infinity; NaN is not generated or
// propagated (an exponent field of 255 is treated as a large number).
// Interface: a, b in, p out, no clock; the result is valid in the same cycle.
module fp32_mul
  import gru_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t p
);
  logic        sign;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] prod;
  logic [23:0] m24;
  logic        g, s, inc;
  logic [24:0] m25;
  logic signed [10:0] e;

  always_comb begin
    sign = a[31] ^ b[31];
    ea   = a[30:23];
    eb   = b[30:23];
    ma   = {1'b1, a[22:0]};
    mb   = {1'b1, b[22:0]};
    prod = ma * mb;
    e    = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd127;
    if (prod[47]) begin
      m24 = prod[47:24];
      g   = prod[23];
      s   = |prod[22:0];
      e   = e + 11'sd1;
    end else begin
      m24 = prod[46:23];
      g   = prod[22];
      s   = |prod[21:0];
    end
    inc = g & (s | m24[0]);
    m25 = {1'b0, m24} + {24'b0, inc};
    if (m25[24]) begin
      m24 = m25[24:1];
      e   = e + 11'sd1;
    end else begin
      m24 = m25[23:0];
    end
    if (ea == 8'd0 || eb == 8'd0 || e <= 11'sd0)
      p = {sign, 31'b0};
    else if (e >= 11'sd255)
      p = {sign, 8'hff, 23'b0};
    else
      p = {sign, e[7:0], m24[22:0]};
  end
endmodule
