// ref_model_pkg: behavioural reference of the weight preprocessing and of
// the modified convolution, written independently of the RTL with real
// arithmetic and explicit rounding to binary32 after every operation.
//
// ref_preprocess() sorts the weights (stable, ascending), splits them at
// zero, walks the positive list upwards and the negative list from the
// value closest to zero downwards, and pairs PP with PN when neither
// PP >= |PN| + r nor PP <= |PN| - r holds. The returned list has the pairs
// first (positive weight, then negative) and then the uncombined weights in
// the reverse of the order in which they were rejected, which is where the
// hardware places them.
package ref_model_pkg;
  import fp_ref_pkg::*;

  typedef struct {
    logic [31:0] v;
    int          id;     // location index c*25 + ky*5 + kx
    int          flag;   // 1 = combined, 2 = not combined
  } rent_t;

  typedef struct {
    rent_t lst[$];
    int    n_comb;
    int    neg_small;
    int    pos_small;
    int    leftover;
  } rres_t;

  function automatic rres_t ref_preprocess(logic [31:0] w[$], int ids[$], logic [31:0] rnd);
    rres_t res;
    int    order[$];
    int    pos[$], neg[$];
    rent_t unc[$];
    int    ip, in_;
    real   rr;
    res.n_comb = 0; res.neg_small = 0; res.pos_small = 0; res.leftover = 0;
    // stable insertion sort of indices by value
    foreach (w[i]) begin
      int j;
      j = order.size();
      while (j > 0 && f2r(w[order[j - 1]]) > f2r(w[i])) j--;
      order.insert(j, i);
    end
    foreach (order[k]) begin
      if (f2r(w[order[k]]) < 0.0) neg.push_back(order[k]);
      else                        pos.push_back(order[k]);
    end
    rr  = f2r(rnd);
    ip  = 0;
    in_ = neg.size() - 1;
    while (ip < pos.size() && in_ >= 0) begin
      real p, m, hi, lo;
      p  = f2r(w[pos[ip]]);
      m  = -f2r(w[neg[in_]]);
      hi = f2r(r2f(m + rr));
      lo = f2r(r2f(m - rr));
      if (p >= hi) begin
        unc.push_back('{w[neg[in_]], ids[neg[in_]], 2});
        in_--;
        res.neg_small++;
      end else if (p <= lo) begin
        unc.push_back('{w[pos[ip]], ids[pos[ip]], 2});
        ip++;
        res.pos_small++;
      end else begin
        res.lst.push_back('{w[pos[ip]], ids[pos[ip]], 1});
        res.lst.push_back('{w[neg[in_]], ids[neg[in_]], 1});
        res.n_comb += 2;
        ip++;
        in_--;
      end
    end
    while (ip < pos.size()) begin
      unc.push_back('{w[pos[ip]], ids[pos[ip]], 2});
      ip++;
      res.leftover++;
    end
    while (in_ >= 0) begin
      unc.push_back('{w[neg[in_]], ids[neg[in_]], 2});
      in_--;
      res.leftover++;
    end
    for (int k = unc.size() - 1; k >= 0; k--) res.lst.push_back(unc[k]);
    return res;
  endfunction

  // One output of the modified convolution. fm is the input map, ids are
  // mapped to addresses by c*h*w + (oy+ky)*w + (ox+kx).
  function automatic logic [31:0] ref_conv_point(rent_t lst[$], int n_comb, logic [31:0] fm[],
                                                 int h, int w, int oy, int ox);
    logic [31:0] acc, p, d;
    int k;
    acc = 32'h0;
    k = 0;
    while (k < lst.size()) begin
      if (k < n_comb) begin
        d = r2f(f2r(fm[addr(lst[k].id, h, w, oy, ox)]) - f2r(fm[addr(lst[k + 1].id, h, w, oy, ox)]));
        if (d[30:0] == 31'd0) d = 32'h0;
        p = r2f(f2r(lst[k].v) * f2r(d));
        k += 2;
      end else begin
        p = r2f(f2r(lst[k].v) * f2r(fm[addr(lst[k].id, h, w, oy, ox)]));
        k += 1;
      end
      acc = r2f(f2r(acc) + f2r(p));
      if (acc[30:0] == 31'd0) acc = 32'h0;
    end
    return acc;
  endfunction

  function automatic int addr(int id, int h, int w, int oy, int ox);
    int c, ky, kx;
    c  = id / 25;
    ky = (id % 25) / 5;
    kx = id % 5;
    return c * h * w + (oy + ky) * w + (ox + kx);
  endfunction

  // Exact (unmodified) convolution output in real arithmetic, for reporting
  // the approximation error.
  function automatic real exact_conv_point(logic [31:0] wt[$], int ids[$], logic [31:0] fm[],
                                           int h, int w, int oy, int ox);
    real s;
    s = 0.0;
    foreach (wt[i]) s += f2r(wt[i]) * f2r(fm[addr(ids[i], h, w, oy, ox)]);
    return s;
  endfunction

endpackage
