// fp32_to_lut_idx: maps an fp32 pre-activation to an activation-table index.
//
// idx = clamp(floor(x * 2^LUT_FRAC) + LUT_N/2, 0, LUT_N-1), so with the
// package defaults (10-bit index, 6 fraction bits) the table covers [-8, 8)
// in steps of 1/64 and saturates outside. The source says that the float is
// transformed to a LUT index but not how; this mapping is this design's.
// Subnormals count as zero. Combinational, no clock.
module fp32_to_lut_idx
  import gru_pkg::*;
(
  input  fp32_t                x,
  output logic [LUT_IDX_W-1:0] idx
);
  localparam int SHIFT0 = 150 - LUT_FRAC;   // x*2^FRAC = m24 * 2^(e - SHIFT0)
  localparam int EMAX   = 127 + LUT_IDX_W - 1 - LUT_FRAC;  // |x| >= 2^(EMAX-126) saturates
  logic [23:0]  m24;
  int           e, sh;
  logic [23:0]  ipart;
  logic         frac_nz;
  int           fl, v;

  always_comb begin
    m24 = {1'b1, x[22:0]};
    e   = int'(x[30:23]);
    sh  = SHIFT0 - e;
    ipart   = '0;
    frac_nz = 1'b0;
    if (e == 0) begin
      fl = 0;
    end else if (e > EMAX) begin
      fl = x[31] ? -(1 << LUT_IDX_W) : (1 << LUT_IDX_W);
    end else begin
      if (sh >= 24) begin
        ipart   = '0;
        frac_nz = 1'b1;
      end else begin
        ipart   = m24 >> sh;
        frac_nz = (m24 & ((24'd1 << sh) - 24'd1)) != 24'd0;
      end
      fl = x[31] ? -(int'(ipart) + int'(frac_nz)) : int'(ipart);
    end
    v = fl + int'(LUT_N / 2);
    if (v < 0)               idx = '0;
    else if (v > LUT_N - 1)  idx = '1;
    else                     idx = LUT_IDX_W'(v);
  end
endmodule
