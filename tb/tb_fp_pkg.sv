// tb_fp_pkg: reference arithmetic for the testbenches.
//
// Converts between IEEE-754 single-precision bit patterns and SystemVerilog
// real (double) values, with the same conventions as the accelerator's FP32
// units: rounding to nearest with ties to even, subnormals flushed to zero.
// A product of two singles is exact in double, and a sum of two singles
// rounded first to double and then to single equals the correctly rounded
// single (double has more than 2*24+2 significand bits), so the reference
// results below are bit-exact.
package tb_fp_pkg;

  function automatic logic [31:0] real_to_f32(real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m53;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 32'h7FC0_0000 : {s, 8'hFF, 23'd0};
    e   = int'(d[62:52]) - 1023 + 127;
    m53 = {1'b1, d[51:0]};
    m   = {1'b0, m53[52:29]};
    g   = m53[28];
    st  = |m53[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic real f32_to_real(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] f32_mul(logic [31:0] a, logic [31:0] b);
    return real_to_f32(f32_to_real(a) * f32_to_real(b));
  endfunction

  function automatic logic [31:0] f32_add(logic [31:0] a, logic [31:0] b);
    return real_to_f32(f32_to_real(a) + f32_to_real(b));
  endfunction

  // a random normal single with exponent field in [emin, emax]
  function automatic logic [31:0] rand_f32(int emin, int emax);
    return {1'($urandom), 8'(emin + int'($urandom % 32'(emax - emin + 1))), 23'($urandom)};
  endfunction

endpackage
