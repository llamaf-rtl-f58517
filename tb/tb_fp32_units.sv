// tb_fp32_units: checks fp32_mul, fp32_add and int32_to_fp32 against a
// double-precision reference (tb_fp_pkg), bit for bit, on random normal
// operands (including near-cancelling sums) and on special values.
module tb_fp32_units;
  import tb_fp_pkg::*;

  logic [31:0] ma, mb, my, aa, ab, ay, ia, iy;
  int checks = 0, failures = 0;

  fp32_mul      u_mul (.a(ma), .b(mb), .y(my));
  fp32_add      u_add (.a(aa), .b(ab), .y(ay));
  int32_to_fp32 u_cvt (.a(ia), .y(iy));

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // multiplier
    for (int i = 0; i < 3000; i++) begin
      ma = rand_f32(70, 184); mb = rand_f32(70, 184);
      #1 check($sformatf("mul %h*%h", ma, mb), my, f32_mul(ma, mb));
    end
    ma = 32'h3F80_0000; mb = 32'h4000_0000; #1 check("1*2", my, 32'h4000_0000);
    ma = 32'h7F80_0000; mb = 32'h0000_0000; #1 check("inf*0", my, 32'h7FC0_0000);
    ma = 32'h7F00_0000; mb = 32'h7F00_0000; #1 check("overflow", my, 32'h7F80_0000);
    ma = 32'hC000_0000; mb = 32'h0000_0000; #1 check("-2*0", my, 32'h8000_0000);
    // adder: random, and near-equal magnitudes of opposite sign
    for (int i = 0; i < 3000; i++) begin
      aa = rand_f32(100, 150);
      ab = (i % 3 == 0) ? {~aa[31], aa[30:23], 23'($urandom)} : rand_f32(100, 150);
      #1 check($sformatf("add %h+%h", aa, ab), ay, f32_add(aa, ab));
    end
    aa = 32'h3F80_0000; ab = 32'hBF80_0000; #1 check("1-1", ay, 32'h0000_0000);
    aa = 32'h4040_0000; ab = 32'h0000_0000; #1 check("3+0", ay, 32'h4040_0000);
    aa = 32'h3F80_0000; ab = 32'h3380_0000; #1 check("1+2^-24 tie", ay, 32'h3F80_0000);
    aa = 32'h3F80_0001; ab = 32'h3380_0000; #1 check("tie to even up", ay, 32'h3F80_0002);
    aa = 32'h7F80_0000; ab = 32'hFF80_0000; #1 check("inf-inf", ay, 32'h7FC0_0000);
    // converter
    for (int i = 0; i < 3000; i++) begin
      ia = (i % 2 == 0) ? 32'($urandom) : 32'(signed'(22'($urandom)));
      #1 check($sformatf("cvt %0d", signed'(ia)), iy, real_to_f32(real'(signed'(ia))));
    end
    ia = 32'h8000_0000; #1 check("cvt min", iy, 32'hCF00_0000);
    ia = 32'h0000_0000; #1 check("cvt 0", iy, 32'h0000_0000);
    ia = 32'hFFFF_FFFF; #1 check("cvt -1", iy, 32'hBF80_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
