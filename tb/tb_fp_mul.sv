// tb_fp_mul: self-checking test of the binary32 multiplier. Random operands
// and directed cases are compared bit for bit with the binary64 product
// rounded to binary32 (exact, since a 24x24-bit product fits in 53 bits).
module tb_fp_mul;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_);
    logic [31:0] exp;
    a = ta; b = tb_;
    #1;
    exp = r2f(f2r(ta) * f2r(tb_));
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h: got %h expected %h", ta, tb_, y, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3f800000, 32'h40490fdb);   // 1 * pi
    check(32'hbf800000, 32'h40490fdb);   // -1 * pi
    check(32'h3fc00000, 32'h3fc00000);   // 1.5 * 1.5 = 2.25
    check(32'h3f800001, 32'h3f800001);   // rounding of 1+2^-22
    check(32'h3fffffff, 32'h3fffffff);   // carry out of rounding
    check(32'h00000000, 32'h3f800000);   // zero
    check(32'h3d4ccccd, 32'hbf000000);   // 0.05 * -0.5
    check(32'h3f800800, 32'h3f800800);   // exact tie, rounds down to even
    check(32'h3f801800, 32'h3f800800);   // exact tie, rounds up to even
    // short mantissas: products with exact ties are frequent
    for (int i = 0; i < 5000; i++)
      check({rand_f(110, 140)} & 32'hFFFF_F800, {rand_f(110, 140)} & 32'hFFFF_F800);
    for (int i = 0; i < 20000; i++)
      check(rand_f(90, 160), rand_f(90, 160));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
