// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// Used by the accumulate stage, where the weight scale is multiplied by the
// activation scale (giving float_scale) and float_scale by the converted
// group sum. The product of the two 24-bit significands is normalised by at
// most one place and rounded to nearest, ties to even. The paper asks only for
// FP32 arithmetic; the handling of special values is this design's choice:
// subnormal inputs count as zero, results below the normal range are flushed
// to a signed zero, overflow gives infinity, and any NaN or inf*0 gives the
// quiet NaN 0x7FC00000.
//
// Interface: a, b in; y = a*b out, no clock, no latency.
module fp32_mul
  import llamaf_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic        za, zb, ia, ib, na, nb;
  logic [47:0] p;
  logic [23:0] m24;
  logic        g, s, up;
  logic [24:0] m25;
  logic signed [10:0] e;

  always_comb begin
    sa = a[31]; sb = b[31]; sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    za = (ea == 8'd0);  zb = (eb == 8'd0);
    ia = (ea == 8'hFF) && (a[22:0] == '0);
    ib = (eb == 8'hFF) && (b[22:0] == '0);
    na = (ea == 8'hFF) && (a[22:0] != '0);
    nb = (eb == 8'hFF) && (b[22:0] != '0);
    p  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    if (p[47]) begin
      m24 = p[47:24]; g = p[23]; s = |p[22:0];
      e   = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd126;
    end else begin
      m24 = p[46:23]; g = p[22]; s = |p[21:0];
      e   = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd127;
    end
    up  = g & (s | m24[0]);
    m25 = {1'b0, m24} + 25'(up);
    if (m25[24]) begin
      m24 = m25[24:1];
      e   = e + 11'sd1;
    end else begin
      m24 = m25[23:0];
    end

    if (na || nb || (ia && zb) || (ib && za))
      y = FP32_QNAN;
    else if (ia || ib)
      y = {sy, 8'hFF, 23'd0};
    else if (za || zb)
      y = {sy, 31'd0};
    else if (e >= 11'sd255)
      y = {sy, 8'hFF, 23'd0};
    else if (e <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, e[7:0], m24[22:0]};
  end
endmodule
