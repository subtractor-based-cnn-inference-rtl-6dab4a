// tb_lenet_conv: workload test of the accelerator on the three convolution
// layers of LeNet-5, every output channel, at default sizes.
//
//   C1:   6 channels, kernel 1x5x5,  input 1x32x32 -> 28x28
//   C3:  16 channels, kernel 6x5x5,  input 6x14x14 -> 10x10
//   C5: 120 channels, kernel 16x5x5, input 16x5x5  -> 1x1
//
// The weights are random and bell-shaped (no trained network is available),
// the input maps random and non-negative; each layer's map is loaded once
// and kept for all its channels. The same network is run at each of the 13
// rounding sizes 0 ... 0.3, and for each a line with the additions,
// subtractions, multiplications and their total is printed. Checks:
//   * at every size the counters agree with the pairs the reference found,
//     and subtractions + multiplications = 405600, the multiply-add count of
//     the three layers (each pair folds two multiply-adds into one
//     subtraction and one multiply-add);
//   * at rounding size 0: exactly 405600 multiplications, 405600 additions
//     and no subtraction;
//   * at rounding size 0.05 every output is compared bit for bit with the
//     reference model.
module tb_lenet_conv;
  import subconv_pkg::*;
  import fp_ref_pkg::*;
  import ref_model_pkg::*;

  localparam int unsigned CW = $clog2(N_MAX + 1);
  localparam int unsigned AW = $clog2(FMAP_WORDS);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          w_clear = 1'b0, w_valid = 1'b0;
  fp32_t         w_value = '0;
  loc_t          w_loc = '0;
  logic          fm_we = 1'b0;
  logic [AW-1:0] fm_addr = '0;
  fp32_t         fm_wdata = '0;
  logic [5:0]    cfg_in_h = '0, cfg_in_w = '0;
  logic [2:0]    cfg_k = '0;
  fp32_t         rounding = '0;
  logic          start = 1'b0, busy, done, out_valid;
  fp32_t         out_data;
  logic [5:0]    out_oy, out_ox;
  logic [CW-1:0] n_comb, n_total, stat_neg_small, stat_pos_small, stat_leftover;
  logic [31:0]   cnt_sub, cnt_mul, cnt_add;

  int checks = 0, failures = 0;
  longint exp_sub, exp_mul;

  // One fixed network: weights per layer and channel, one input map per
  // layer, generated once and reused for every rounding size.
  typedef logic [31:0] wvec_t[];
  wvec_t       wts [3][];
  logic [31:0] maps [3][];

  subconv_accel dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic loc_t id2loc(int id);
    return '{c: 4'(id / 25), ky: 3'((id % 25) / 5), kx: 3'(id % 5)};
  endfunction

  function automatic logic [31:0] rand_weight();
    real s;
    s = 0.0;
    for (int i = 0; i < 4; i++) s += (real'($urandom_range(20000)) - 10000.0) / 10000.0;
    s = s * 0.2;
    if (s == 0.0) s = 0.001;
    return r2f(s);
  endfunction

  task automatic make_layer(int l, int m, int c, int h, int w);
    wts[l] = new[m];
    for (int ch = 0; ch < m; ch++) begin
      wts[l][ch] = new[c * 25];
      foreach (wts[l][ch][i]) wts[l][ch][i] = rand_weight();
    end
    maps[l] = new[c * h * w];
    foreach (maps[l][i]) maps[l][i] = r2f(real'($urandom_range(1000)) / 1000.0 + 0.0005);
  endtask

  task automatic run_layer(int l, int m, int c, int h, int w, real rnd, bit check_out);
    logic [31:0] fm[];
    fm = maps[l];
    foreach (fm[i]) begin
      fm_we = 1'b1; fm_addr = AW'(i); fm_wdata = fm[i];
      @(negedge clk);
    end
    fm_we = 1'b0;
    cfg_in_h = 6'(h); cfg_in_w = 6'(w); cfg_k = 3'd5; rounding = r2f(rnd);
    for (int ch = 0; ch < m; ch++) begin
      logic [31:0] wt[$];
      int          ids[$];
      rres_t       r;
      int          nout;
      for (int i = 0; i < c * 25; i++) begin
        wt.push_back(wts[l][ch][i]);
        ids.push_back(i);
      end
      w_clear = 1'b1;
      @(negedge clk) w_clear = 1'b0;
      foreach (wt[i]) begin
        w_valid = 1'b1; w_value = wt[i]; w_loc = id2loc(ids[i]);
        @(negedge clk);
      end
      w_valid = 1'b0;
      r = ref_preprocess(wt, ids, r2f(rnd));
      start = 1'b1;
      @(negedge clk) start = 1'b0;
      nout = 0;
      forever begin
        if (out_valid) begin
          if (check_out) begin
            logic [31:0] e;
            e = ref_conv_point(r.lst, r.n_comb, fm, h, w, nout / (w - 4), nout % (w - 4));
            chk(out_data == e, $sformatf("layer %0dx%0dx%0d ch %0d out %0d = %h expected %h",
                                         c, h, w, ch, nout, out_data, e));
          end
          nout++;
        end
        if (done) break;
        @(negedge clk);
      end
      chk(nout == (h - 4) * (w - 4), "output count");
      exp_sub += longint'(nout) * (r.n_comb / 2);
      exp_mul += longint'(nout) * (r.n_comb / 2 + c * 25 - r.n_comb);
      @(negedge clk);
    end
  endtask

  task automatic run_net(real rnd, bit check_out);
    longint s0, m0, a0, s, mm, a;
    s0 = cnt_sub; m0 = cnt_mul; a0 = cnt_add;
    exp_sub = 0; exp_mul = 0;
    run_layer(0, 6, 1, 32, 32, rnd, check_out);
    run_layer(1, 16, 6, 14, 14, rnd, check_out);
    run_layer(2, 120, 16, 5, 5, rnd, check_out);
    s = cnt_sub - s0; mm = cnt_mul - m0; a = cnt_add - a0;
    $display("rounding %0.4f: additions %0d subtractions %0d multiplications %0d total %0d",
             rnd, a, s, mm, a + s + mm);
    chk(s == exp_sub && mm == exp_mul && a == exp_mul, "operation counts against reference");
    chk(s + mm == 64'd405600, "every multiply-add is either kept or folded into a pair");
    if (rnd == 0.0) chk(s == 0 && mm == 64'd405600 && a == 64'd405600, "Table I row for rounding 0");
    else            chk(s > 0, "no pair combined");
  endtask

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real sizes [13] = '{0.0, 0.0001, 0.005, 0.01, 0.015, 0.02, 0.025, 0.05, 0.1, 0.15, 0.2,
                      0.25, 0.3};

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    make_layer(0, 6, 1, 32, 32);
    make_layer(1, 16, 6, 14, 14);
    make_layer(2, 120, 16, 5, 5);
    // rounding sizes 0 ... 0.3; outputs are checked in full at 0.05, the
    // size that keeps the accuracy loss small on a trained LeNet-5
    foreach (sizes[i]) run_net(sizes[i], sizes[i] == 0.05);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
