// fp_mul: combinational IEEE-754 single-precision multiplier.
//
// Multiplies the two 24-bit significands into a 48-bit product, normalises by
// at most one place and rounds to nearest even. Subnormal inputs read as zero
// and underflowing results flush to zero; infinities and NaNs propagate
// (0 x inf gives a quiet NaN). The paper only fixes the number format; the
// structure is this design's own. No clock: callers register around it.
module fp_mul
  import stencil_pkg::*;
(
  input  f32_t a,
  input  f32_t b,
  output f32_t y
);
  logic        s;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] p;
  logic signed [10:0] e;
  logic [23:0] m;
  logic        g, st, up;
  logic [24:0] mr;
  logic        a_inf, b_inf, a_nan, b_nan, a_zero, b_zero;

  always_comb begin
    s  = a[31] ^ b[31];
    ea = a[30:23]; eb = b[30:23];
    ma = {1'b1, a[22:0]}; mb = {1'b1, b[22:0]};
    a_nan  = (ea == 8'hFF) && (a[22:0] != 0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != 0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == 0);
    a_zero = (ea == 0);
    b_zero = (eb == 0);
    p = ma * mb;
    e = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      m  = p[47:24]; g = p[23]; st = |p[22:0];
      e  = e + 1;
    end else begin
      m  = p[46:23]; g = p[22]; st = |p[21:0];
    end
    up = g & (st | m[0]);
    mr = {1'b0, m} + {24'd0, up};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = F32_QNAN;
    else if (a_inf || b_inf)
      y = {s, 8'hFF, 23'd0};
    else if (a_zero || b_zero || e <= 0)
      y = {s, 31'd0};
    else if (e >= 255)
      y = {s, 8'hFF, 23'd0};
    else
      y = {s, e[7:0], mr[22:0]};
  end
endmodule
