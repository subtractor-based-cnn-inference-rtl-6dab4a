// tb_fp_addsub: self-checking test of the binary32 adder/subtractor.
// Random operands (exponents close enough that the binary64 reference sum is
// exact) and directed cases (cancellation, zeros, ties) are compared bit for
// bit with the rounded binary64 result.
module tb_fp_addsub;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  logic        sub;
  int checks = 0, failures = 0;

  fp_addsub dut (.a(a), .b(b), .sub(sub), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic ts);
    logic [31:0] exp;
    real r;
    a = ta; b = tb_; sub = ts;
    #1;
    r   = ts ? f2r(ta) - f2r(tb_) : f2r(ta) + f2r(tb_);
    exp = r2f(r);
    if (exp[30:0] == 31'd0) exp = 32'h0;  // exact zero is +0
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %h %s %h: got %h expected %h", ta, ts ? "-" : "+", tb_, y, exp);
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
    // directed
    check(32'h3f800000, 32'h3f800000, 1'b1);  // 1-1 = +0
    check(32'h3f800000, 32'h3f800000, 1'b0);  // 1+1 = 2
    check(32'h3f800000, 32'h33800000, 1'b0);  // 1 + 2^-24: tie, stays 1
    check(32'h3f800001, 32'h33800000, 1'b0);  // tie rounds to even upward
    check(32'h3f800000, 32'h33800000, 1'b1);  // 1 - 2^-24
    check(32'h00000000, 32'h40490fdb, 1'b0);  // 0 + pi
    check(32'h40490fdb, 32'h00000000, 1'b1);  // pi - 0
    check(32'h3f7fffff, 32'h3f800000, 1'b1);  // near cancellation
    check(32'hbd4ccccd, 32'h3d4ccccd, 1'b0);  // -0.05 + 0.05
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x, z;
      int e;
      e = 100 + int'($urandom_range(40));
      x = rand_f(e, e);
      z = rand_f(e - int'($urandom_range(26)), e);
      if ($urandom_range(1) == 1) check(x, z, 1'($urandom));
      else                   check(z, x, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
