// tb_weight_preprocessor: loads LeNet-sized kernels (5x5 with 1, 6 or 16
// input channels in the default size test, scaled down here) through the
// weight port, runs the preprocessing with several rounding sizes and checks
// the modified weight list, n_comb and the run time against the reference.
// It also checks that rounding size 0 never combines a pair.
module tb_weight_preprocessor;
  import subconv_pkg::*;
  import fp_ref_pkg::*;
  import ref_model_pkg::*;

  localparam int unsigned N  = 75;   // 3 channels of 5x5
  localparam int unsigned CW = $clog2(N + 1);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          clear = 1'b0, w_valid = 1'b0, start = 1'b0;
  fp32_t         w_value = '0, rounding = '0;
  loc_t          w_loc = '0;
  wentry_t       list [N];
  logic [CW-1:0] n_comb, n_total, stat_neg_small, stat_pos_small, stat_leftover;
  logic          busy, done;
  int checks = 0, failures = 0;

  weight_preprocessor #(.N(N)) dut (.*);

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

  task automatic run_kernel(int n, logic [31:0] rnd);
    logic [31:0] w[$];
    int          ids[$];
    int          cyc;
    rres_t       r;
    for (int i = 0; i < n; i++) begin
      w.push_back(rand_f(117, 126));
      ids.push_back(i);
    end
    r = ref_preprocess(w, ids, rnd);
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    for (int i = 0; i < n; i++) begin
      w_valid = 1'b1;
      w_value = w[i];
      w_loc   = id2loc(i);
      @(negedge clk);
    end
    w_valid  = 1'b0;
    rounding = rnd;
    start    = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done && cyc < 10 * int'(N)) begin
      @(negedge clk);
      cyc++;
    end
    chk(cyc == n - r.n_comb / 2 + 2, $sformatf("run time %0d edges, expected %0d", cyc,
                                               n - r.n_comb / 2 + 2));
    chk(n_comb == CW'(r.n_comb) && n_total == CW'(n),
        $sformatf("n_comb %0d expected %0d", n_comb, r.n_comb));
    if (rnd == 32'h0) chk(n_comb == '0, "rounding 0 combined a pair");
    for (int k = 0; k < n; k++)
      chk(list[k].value == r.lst[k].v && list[k].loc == id2loc(r.lst[k].id) &&
          list[k].flag == ((r.lst[k].flag == 1) ? FLAG_C : FLAG_N),
          $sformatf("list[%0d] = %h expected %h", k, list[k].value, r.lst[k].v));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_kernel(25, r2f(0.05));
    run_kernel(75, r2f(0.05));
    run_kernel(75, 32'h0);
    run_kernel(50, r2f(0.01));
    run_kernel(75, r2f(0.3));
    for (int t = 0; t < 10; t++) run_kernel(1 + int'($urandom_range(N - 1)), r2f(0.025));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
