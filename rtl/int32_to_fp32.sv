// int32_to_fp32: combinational conversion of a signed 32-bit integer to
// IEEE-754 single precision, rounded to nearest, ties to even.
//
// This is the INT32 -> FP32 cast that the accumulate stage applies to every
// group sum before scaling it. The magnitude is normalised by its
// leading-zero count; the bits below the 24-bit significand decide the
// rounding. Group sums of GS = 256 INT8 x INT8 products stay below 2^23 and
// convert exactly; the rounding path serves general inputs.
//
// Interface: a in; y = float(a) out, no clock, no latency.
module int32_to_fp32
  import llamaf_pkg::*;
(
  input  int32_t a,
  output fp32_t  y
);
  logic        s;
  logic [31:0] mag, norm;
  logic [4:0]  msb;
  logic [23:0] m24;
  logic        g, st, up;
  logic [24:0] m25;
  logic [8:0]  e;

  always_comb begin
    s   = a[31];
    mag = s ? (~a + 32'd1) : a;             // -2^31 gives 2^31, as unsigned
    msb = '0;
    for (int i = 0; i < 32; i++)
      if (mag[i]) msb = 5'(i);
    norm = mag << (5'd31 - msb);             // leading one at bit 31
    m24  = norm[31:8];
    g    = norm[7];
    st   = |norm[6:0];
    up   = g & (st | m24[0]);
    m25  = {1'b0, m24} + 25'(up);
    e    = 9'd127 + 9'(msb);
    if (m25[24]) begin
      m24 = m25[24:1];
      e   = e + 9'd1;
    end else begin
      m24 = m25[23:0];
    end
    if (mag == 32'd0) y = 32'd0;
    else              y = {s, e[7:0], m24[22:0]};
  end
endmodule
