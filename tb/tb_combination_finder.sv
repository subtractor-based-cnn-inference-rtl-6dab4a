// tb_combination_finder: drives the finder with sorted kernels built by the
// testbench and checks the modified weight list (values, locations, flags),
// n_comb, n_total, the outcome counters and the run time
// (count - pairs + 1 cycles from the edge taking start to done) against the reference
// preprocessing. Rounding sizes 0, 0.0001, 0.05 and 0.3 are used, plus
// kernels with only positive or only negative weights.
module tb_combination_finder;
  import subconv_pkg::*;
  import fp_ref_pkg::*;
  import ref_model_pkg::*;

  localparam int unsigned N  = 60;
  localparam int unsigned CW = $clog2(N + 1);

  logic          clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  fp32_t         rounding = '0;
  wentry_t       sorted [N];
  logic [CW-1:0] count = '0, neg_count = '0;
  wentry_t       list [N];
  logic [CW-1:0] n_comb, n_total, stat_neg_small, stat_pos_small, stat_leftover;
  logic          busy, done;
  int checks = 0, failures = 0;

  combination_finder #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // mode 0: mixed signs, 1: positive only, 2: negative only
  task automatic run_kernel(int n, logic [31:0] rnd, int mode);
    logic [31:0] w[$];
    int          ids[$];
    int          order[$];
    int          nneg, cyc;
    rres_t       r;
    nneg = 0;
    for (int i = 0; i < n; i++) begin
      logic [31:0] v;
      v = rand_f(118, 126);
      if (mode == 1) v[31] = 1'b0;
      if (mode == 2) v[31] = 1'b1;
      w.push_back(v);
      ids.push_back(i);
    end
    foreach (w[i]) begin
      int j;
      j = order.size();
      while (j > 0 && f2r(w[order[j - 1]]) > f2r(w[i])) j--;
      order.insert(j, i);
    end
    for (int k = 0; k < int'(N); k++) sorted[k] = '0;
    for (int k = 0; k < n; k++) begin
      sorted[k] = '{value: w[order[k]], loc: loc_t'(order[k]), flag: FLAG_U};
      if (w[order[k]][31]) nneg++;
    end
    count     = CW'(n);
    neg_count = CW'(nneg);
    rounding  = rnd;
    r = ref_preprocess(w, ids, rnd);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done && cyc < 10 * int'(N)) begin
      @(negedge clk);
      cyc++;
    end
    // cyc counts clock edges from the one that takes start to the one that
    // raises done, both included: count - pairs + 1 cycles apart.
    chk(cyc == n - r.n_comb / 2 + 2, $sformatf("run time %0d edges, expected %0d", cyc,
                                               n - r.n_comb / 2 + 2));
    chk(n_comb == CW'(r.n_comb), $sformatf("n_comb %0d expected %0d", n_comb, r.n_comb));
    chk(n_total == CW'(n), "n_total");
    chk(stat_neg_small == CW'(r.neg_small) && stat_pos_small == CW'(r.pos_small) &&
        stat_leftover == CW'(r.leftover), "outcome counters");
    for (int k = 0; k < n; k++) begin
      chk(list[k].value == r.lst[k].v && list[k].loc == loc_t'(r.lst[k].id) &&
          list[k].flag == ((r.lst[k].flag == 1) ? FLAG_C : FLAG_N),
          $sformatf("list[%0d] = %h/%0d/%0d expected %h/%0d/%0d", k, list[k].value,
                    list[k].loc, list[k].flag, r.lst[k].v, r.lst[k].id, r.lst[k].flag));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rs [4];
    rs = '{32'h0, r2f(0.0001), r2f(0.05), r2f(0.3)};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_kernel(25, rs[2], 0);
    run_kernel(N, rs[0], 0);
    run_kernel(10, rs[2], 1);
    run_kernel(10, rs[2], 2);
    run_kernel(0, rs[2], 0);
    for (int t = 0; t < 40; t++)
      run_kernel(1 + int'($urandom_range(N - 1)), rs[t % 4], 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
