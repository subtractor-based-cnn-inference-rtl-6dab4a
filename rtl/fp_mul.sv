// fp_mul: combinational IEEE 754 binary32 multiplier.
//
// y = a * b, rounded to nearest, ties to even. The 24x24-bit mantissa
// product is normalised by at most one position and rounded with guard and
// sticky bits; the exponents are added and rebiased.
//
// Simplifications (this design's choice): subnormal inputs are read as zero,
// subnormal results are flushed to a signed zero, overflow saturates to a
// signed infinity, Inf/NaN inputs are not treated specially.
//
// Purely combinational: no clock, no latency.
module fp_mul
  import subconv_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  always_comb begin
    logic        s;
    logic [23:0] ma, mb;
    logic [47:0] p;
    logic signed [9:0] e;
    logic [23:0] mant;
    logic        guard, stk, round_up;
    logic [24:0] mant_r;

    s  = a[31] ^ b[31];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = $signed({2'b00, a[30:23]}) + $signed({2'b00, b[30:23]}) - 10'sd127;
    if (p[47]) begin
      mant  = p[47:24];
      guard = p[23];
      stk   = |p[22:0];
      e     = e + 10'sd1;
    end else begin
      mant  = p[46:23];
      guard = p[22];
      stk   = |p[21:0];
    end
    round_up = guard & (stk | mant[0]);
    mant_r   = {1'b0, mant} + {24'd0, round_up};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 10'sd1;
    end
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) y = {s, 31'd0};
    else if (e >= 10'sd255)                   y = {s, 8'hFF, 23'd0};
    else if (e <= 10'sd0)                     y = {s, 31'd0};
    else                                      y = {s, e[7:0], mant_r[22:0]};
  end

endmodule
