// fp_add: combinational IEEE-754 single-precision adder.
//
// Computes a + b with round-to-nearest-even. The operands are aligned with
// three extra bits (guard, round, sticky), added or subtracted, normalised and
// rounded. Subnormal inputs are read as zero and subnormal results are
// flushed to zero, as FPGA floating-point operators commonly do; infinities
// and NaNs are propagated (inf - inf gives a quiet NaN).
// The paper only states that single-precision arithmetic is used; the
// internal structure here is this design's own. It has no clock: the stencil
// units put pipeline registers around it.
module fp_add
  import stencil_pkg::*;
(
  input  f32_t a,
  input  f32_t b,
  output f32_t y
);
  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ma, mb, ml, ms;
  logic [7:0]  d;
  logic [26:0] xl, xs;
  logic [27:0] sum;
  logic [26:0] nrm;
  logic signed [10:0] e;
  logic [4:0]  lz;
  logic        rnd_up;
  logic [24:0] mr;

  always_comb begin
    sa = a[31]; ea = a[30:23]; ma = (ea == 0) ? 24'd0 : {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = (eb == 0) ? 24'd0 : {1'b1, b[22:0]};
    y = '0; sl = 0; ss = 0; el = 0; es = 0; ml = 0; ms = 0; d = 0;
    xl = 0; xs = 0; sum = 0; nrm = 0; e = 0; lz = 0; rnd_up = 0; mr = 0;
    if (ea == 8'hFF || eb == 8'hFF) begin
      if ((ea == 8'hFF && a[22:0] != 0) || (eb == 8'hFF && b[22:0] != 0))
        y = F32_QNAN;
      else if (ea == 8'hFF && eb == 8'hFF && sa != sb)
        y = F32_QNAN;
      else if (ea == 8'hFF)
        y = {sa, 8'hFF, 23'd0};
      else
        y = {sb, 8'hFF, 23'd0};
    end else begin
      // order operands by magnitude
      if ({ea, ma} >= {eb, mb}) begin
        sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
      end else begin
        sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
      end
      if (ml == 0) begin
        y = '0;                                  // both zero
      end else begin
        d  = (ms == 0) ? 8'd255 : el - es;
        xl = {ml, 3'b000};
        if (d >= 8'd27)
          xs = {26'd0, ms != 0};
        else
          xs = ({ms, 3'b000} >> d) | {26'd0, |(({ms, 3'b000}) & ((27'd1 << d) - 27'd1))};
        e = {3'b000, el};
        if (sl == ss) begin
          sum = {1'b0, xl} + {1'b0, xs};
          if (sum[27]) begin
            nrm = sum[27:1] | {26'd0, sum[0]};
            e   = e + 1;
          end else begin
            nrm = sum[26:0];
          end
        end else begin
          sum = {1'b0, xl} - {1'b0, xs};
          lz  = 0;
          for (int i = 26; i >= 0; i--) begin
            if (sum[i]) begin
              lz = 5'(26 - i);
              break;
            end
          end
          nrm = sum[26:0] << lz;
          e   = e - 11'(lz);
        end
        if (nrm == 0) begin
          y = '0;                                // exact cancellation: +0
        end else begin
          rnd_up = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
          mr = {1'b0, nrm[26:3]} + {24'd0, rnd_up};
          if (mr[24]) begin
            mr = mr >> 1;
            e  = e + 1;
          end
          if (e <= 0)
            y = {sl, 31'd0};                     // flush to zero
          else if (e >= 255)
            y = {sl, 8'hFF, 23'd0};
          else
            y = {sl, e[7:0], mr[22:0]};
        end
      end
    end
  end
endmodule
