// tb_subconv_accel: end-to-end test of the accelerator at its default sizes.
//
// For one output channel of each LeNet-5 convolution layer shape
// (1x32x32 input / 5x5 kernel, 6x14x14 / 6x5x5, 16x5x5 / 16x5x5) it loads a
// random kernel and input map, runs preprocessing and convolution with a
// rounding size, and checks every output bit for bit against the reference
// model, the number of combined pairs, the operation counters and the total
// run time. It counts how often each mechanism occurred (pair combined,
// negative weight rejected, positive weight rejected, leftover weights after
// one list ran out, a run with rounding 0 acting as a plain convolution)
// and fails for a mechanism that never occurred. The mean deviation of the
// approximate outputs from the exact convolution is printed.
module tb_subconv_accel;
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
  int ev_comb = 0, ev_neg_small = 0, ev_pos_small = 0, ev_leftover = 0, ev_plain = 0;

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

  // Roughly bell-shaped weight: sum of uniform values, scaled.
  function automatic logic [31:0] rand_weight();
    real s;
    s = 0.0;
    for (int i = 0; i < 4; i++) s += (real'($urandom_range(20000)) - 10000.0) / 10000.0;
    s = s * 0.25;
    if (s == 0.0) s = 0.001;
    return r2f(s);
  endfunction

  task automatic run_layer(string name, int c, int h, int w, real rnd);
    logic [31:0] wt[$];
    int          ids[$];
    logic [31:0] fm[];
    rres_t       r;
    int          nout, cyc, terms, exp_cyc;
    logic [31:0] s0, m0, a0;
    real         err;
    for (int ch = 0; ch < c; ch++)
      for (int i = 0; i < 25; i++) begin
        wt.push_back(rand_weight());
        ids.push_back(ch * 25 + i);
      end
    r  = ref_preprocess(wt, ids, r2f(rnd));
    fm = new[c * h * w];
    foreach (fm[i]) begin
      fm[i] = r2f(real'($urandom_range(1000)) / 1000.0 + 0.0005);
    end
    // load kernel and map
    @(negedge clk) w_clear = 1'b1;
    @(negedge clk) w_clear = 1'b0;
    foreach (wt[i]) begin
      w_valid = 1'b1; w_value = wt[i]; w_loc = id2loc(ids[i]);
      @(negedge clk);
    end
    w_valid = 1'b0;
    foreach (fm[i]) begin
      fm_we = 1'b1; fm_addr = AW'(i); fm_wdata = fm[i];
      @(negedge clk);
    end
    fm_we = 1'b0;
    cfg_in_h = 6'(h); cfg_in_w = 6'(w); cfg_k = 3'd5; rounding = r2f(rnd);
    s0 = cnt_sub; m0 = cnt_mul; a0 = cnt_add;
    terms = r.n_comb / 2 + (wt.size() - r.n_comb);
    start = 1'b1;
    @(negedge clk) start = 1'b0;
    nout = 0; cyc = 1; err = 0.0;
    while (!done && cyc < 2000000) begin
      if (out_valid) begin
        int oy, ox;
        logic [31:0] e;
        oy = nout / (w - 4);
        ox = nout % (w - 4);
        e  = ref_conv_point(r.lst, r.n_comb, fm, h, w, oy, ox);
        chk(out_oy == 6'(oy) && out_ox == 6'(ox) && out_data == e,
            $sformatf("%s out(%0d,%0d) = %h expected %h", name, oy, ox, out_data, e));
        err += (f2r(out_data) - exact_conv_point(wt, ids, fm, h, w, oy, ox)) ** 2;
        nout++;
      end
      @(negedge clk);
      cyc++;
    end
    if (out_valid) begin
      logic [31:0] e;
      e = ref_conv_point(r.lst, r.n_comb, fm, h, w, h - 5, w - 5);
      chk(out_data == e, $sformatf("%s last output %h expected %h", name, out_data, e));
      err += (f2r(out_data) - exact_conv_point(wt, ids, fm, h, w, h - 5, w - 5)) ** 2;
      nout++;
    end
    // run time in clock edges, from the one taking start to the one raising
    // done: 1 (start) + (count - pairs) walk steps + 1 (preprocessing done)
    // + 1 (convolution start) + (terms + 1) per output.
    exp_cyc = (wt.size() - r.n_comb / 2 + 3) + nout * (terms + 1);
    chk(cyc == exp_cyc, $sformatf("%s run time %0d edges, expected %0d", name, cyc, exp_cyc));
    chk(nout == (h - 4) * (w - 4), $sformatf("%s: %0d outputs", name, nout));
    chk(int'(n_comb) == r.n_comb, $sformatf("%s: %0d combined entries, expected %0d", name,
                                            n_comb, r.n_comb));
    chk(cnt_sub - s0 == 32'(nout * r.n_comb / 2) && cnt_mul - m0 == 32'(nout * terms) &&
        cnt_add - a0 == 32'(nout * terms), $sformatf("%s operation counters", name));
    if (n_comb != '0)          ev_comb++;
    if (stat_neg_small != '0)  ev_neg_small++;
    if (stat_pos_small != '0)  ev_pos_small++;
    if (stat_leftover != '0)   ev_leftover++;
    if (rnd == 0.0 && n_comb == '0) ev_plain++;
    $display("%s rounding %0.4f: %0d weights, %0d pairs; per output %0d sub %0d mul %0d add (plain: %0d mul %0d add); rms error %g",
             name, rnd, wt.size(), r.n_comb / 2, r.n_comb / 2, terms, terms, wt.size(), wt.size(),
             $sqrt(err / real'(nout)));
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_layer("conv1", 1, 32, 32, 0.05);
    run_layer("conv2", 6, 14, 14, 0.05);
    run_layer("conv3", 16, 5, 5, 0.05);
    run_layer("conv2", 6, 14, 14, 0.0);
    run_layer("conv3", 16, 5, 5, 0.3);
    run_layer("conv3", 16, 5, 5, 0.0001);
    chk(ev_comb > 0, "no pair was ever combined");
    chk(ev_neg_small > 0, "no negative weight was ever rejected");
    chk(ev_pos_small > 0, "no positive weight was ever rejected");
    chk(ev_leftover > 0, "no weight was ever left over");
    chk(ev_plain > 0, "rounding 0 never ran as a plain convolution");
    $display("mechanisms: combined %0d, neg rejected %0d, pos rejected %0d, leftover %0d, plain %0d",
             ev_comb, ev_neg_small, ev_pos_small, ev_leftover, ev_plain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
