// fp32_add: combinational IEEE-754 single-precision adder.
//
// Used by the accumulate stage to sum the scaled group sums of one row. The
// operand with the larger magnitude is taken as the base; the other
// significand is shifted right into guard, round and sticky bits, added or
// subtracted, normalised (right by one place, or left by the leading-zero
// count) and rounded to nearest, ties to even. As in fp32_mul, the special
// value handling is this design's choice: subnormals flush to zero, overflow
// gives infinity, NaN and inf-inf give 0x7FC00000, an exact cancellation
// gives +0.
//
// Interface: a, b in; y = a+b out, no clock, no latency.
module fp32_add
  import llamaf_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  fp32_t       x, z;          // |x| >= |z|
  logic        sx, sz, sub;
  logic [7:0]  ex, ez, d;
  logic [26:0] mx, mz;        // 24-bit significand + guard, round, sticky
  logic [27:0] sum;
  logic [4:0]  lz;
  logic [23:0] m24;
  logic        up;
  logic [24:0] m25;
  logic signed [10:0] e;
  logic        xnan, znan, xinf, zinf;

  always_comb begin
    if (a[30:0] >= b[30:0]) begin x = a; z = b; end
    else                    begin x = b; z = a; end
    sx = x[31]; sz = z[31]; sub = sx ^ sz;
    ex = x[30:23]; ez = z[30:23];
    xnan = (ex == 8'hFF) && (x[22:0] != '0);
    znan = (ez == 8'hFF) && (z[22:0] != '0);
    xinf = (ex == 8'hFF) && (x[22:0] == '0);
    zinf = (ez == 8'hFF) && (z[22:0] == '0);
    d  = ex - ez;
    mx = {1'b1, x[22:0], 3'b000};
    mz = {1'b1, z[22:0], 3'b000};
    if (d >= 8'd27)
      mz = 27'd1;                              // all of it in the sticky bit
    else
      mz = (mz >> d) | 27'((mz & ((27'd1 << d) - 27'd1)) != 27'd0);
    sum = sub ? ({1'b0, mx} - {1'b0, mz}) : ({1'b0, mx} + {1'b0, mz});
    e   = 11'(signed'({3'b0, ex}));
    lz  = '0;
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 11'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) begin
          lz = 5'(26 - i);
          break;
        end
      end
      sum = sum << lz;
      e   = e - 11'(lz);
    end
    m24 = sum[26:3];
    up  = sum[2] & (sum[1] | sum[0] | m24[0]);
    m25 = {1'b0, m24} + 25'(up);
    if (m25[24]) begin
      m24 = m25[24:1];
      e   = e + 11'sd1;
    end else begin
      m24 = m25[23:0];
    end

    if (xnan || znan || (xinf && zinf && sub))
      y = FP32_QNAN;
    else if (xinf)
      y = x;
    else if (ex == 8'd0)                       // both operands zero or subnormal
      y = {a[31] & b[31], 31'd0};
    else if (ez == 8'd0)                       // smaller operand is zero
      y = x;
    else if (sum == 28'd0)
      y = 32'd0;
    else if (e >= 11'sd255)
      y = {sx, 8'hFF, 23'd0};
    else if (e <= 11'sd0)
      y = {sx, 31'd0};
    else
      y = {sx, e[7:0], m24[22:0]};
  end
endmodule
