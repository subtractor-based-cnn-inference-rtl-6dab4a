// fp_addsub: combinational IEEE 754 binary32 adder/subtractor.
//
// y = a + b (sub = 0) or y = a - b (sub = 1), rounded to nearest, ties to
// even. The larger-magnitude operand is chosen, the other is aligned with
// guard, round and sticky bits, the mantissas are added or subtracted, the
// result is normalised with a leading-zero count and rounded.
//
// Simplifications (this design's choice; the accelerator only sees finite
// weights and activations): subnormal inputs are read as zero and subnormal
// results are flushed to zero; Inf/NaN inputs are not treated specially, an
// overflowing result saturates to infinity. An exact zero result is +0.
//
// Purely combinational: no clock, no latency.
module fp_addsub
  import subconv_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  input  logic  sub,
  output fp32_t y
);

  always_comb begin
    logic        sa, sb, sl, ss;
    logic [7:0]  ea, eb, el, es;
    logic [23:0] ma, mb, ml, ms;
    logic [7:0]  d;
    logic [26:0] al;      // large mantissa with 3 guard bits
    logic [26:0] as_;     // aligned small mantissa, sticky in bit 0
    logic [27:0] sum;
    logic        eff_sub;
    logic [4:0]  lz;
    logic [27:0] norm;
    logic signed [9:0] e_res;
    logic [23:0] mant;
    logic        guard, rnd, stk, round_up;
    logic [24:0] mant_r;

    sa = a[31];
    sb = b[31] ^ sub;
    ea = a[30:23];
    eb = b[30:23];
    ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};

    // order by magnitude
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end

    eff_sub = sl ^ ss;
    d  = el - es;
    al = {ml, 3'b000};
    if (ms == 24'd0) begin
      as_ = '0;
    end else if (d >= 8'd27) begin
      as_ = 27'd1;                      // only sticky survives
    end else begin
      as_ = {ms, 3'b000} >> d;
      // sticky: any bit shifted out
      if ((({ms, 3'b000}) & ((27'd1 << d) - 27'd1)) != '0) as_[0] = 1'b1;
    end

    if (eff_sub) sum = {1'b0, al} - {1'b0, as_};
    else         sum = {1'b0, al} + {1'b0, as_};

    y        = '0;
    lz       = '0;
    norm     = '0;
    e_res    = '0;
    mant     = '0;
    guard    = 1'b0;
    rnd      = 1'b0;
    stk      = 1'b0;
    round_up = 1'b0;
    mant_r   = '0;
    if (ml == 24'd0) begin
      // both operands zero
      y = (sa & sb) ? 32'h8000_0000 : 32'h0;
    end else if (sum == '0) begin
      y = 32'h0;                        // exact cancellation: +0
    end else begin
      // leading zero count of sum[27:0]
      lz = 5'd0;
      for (int i = 27; i >= 0; i--) begin
        if (sum[i]) begin
          lz = 5'(27 - i);
          break;
        end
      end
      norm  = sum << lz;                // norm[27] is the leading one
      e_res = $signed({2'b00, el}) + 10'sd1 - $signed({5'd0, lz});
      mant  = norm[27:4];
      guard = norm[3];
      rnd   = norm[2];
      stk   = |norm[1:0];
      round_up = guard & (rnd | stk | mant[0]);
      mant_r = {1'b0, mant} + {24'd0, round_up};
      if (mant_r[24]) begin
        mant_r = mant_r >> 1;
        e_res  = e_res + 10'sd1;
      end
      if (e_res >= 10'sd255)      y = {sl, 8'hFF, 23'd0};
      else if (e_res <= 10'sd0)   y = {sl, 31'd0};
      else                        y = {sl, e_res[7:0], mant_r[22:0]};
    end
  end

endmodule
