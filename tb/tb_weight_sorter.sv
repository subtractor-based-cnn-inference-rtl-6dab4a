// tb_weight_sorter: loads random kernels (with repeated values) into the
// sorter one weight per cycle and checks, against a stable reference sort,
// the order of values and locations, the U flags, the count and the split
// point between negative and positive weights. A second kernel is loaded
// after clear to check that the array restarts.
module tb_weight_sorter;
  import subconv_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned N  = 40;
  localparam int unsigned CW = $clog2(N + 1);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          clear = 1'b0, in_valid = 1'b0;
  fp32_t         in_value = '0;
  loc_t          in_loc = '0;
  wentry_t       sorted [N];
  logic [CW-1:0] count, neg_count;
  int checks = 0, failures = 0;

  weight_sorter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic run_kernel(int n);
    logic [31:0] w[$];
    int          order[$];
    int          nneg;
    nneg = 0;
    for (int i = 0; i < n; i++) begin
      logic [31:0] v;
      if (i > 0 && $urandom_range(4) == 0) v = w[$urandom_range(i - 1)];  // duplicate
      else                                 v = rand_f(115, 127);
      w.push_back(v);
      if (v[31]) nneg++;
    end
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    for (int i = 0; i < n; i++) begin
      in_valid = 1'b1;
      in_value = w[i];
      in_loc   = loc_t'(i);
      @(negedge clk);
    end
    in_valid = 1'b0;
    foreach (w[i]) begin
      int j;
      j = order.size();
      while (j > 0 && f2r(w[order[j - 1]]) > f2r(w[i])) j--;
      order.insert(j, i);
    end
    chk(count == CW'(n), $sformatf("count %0d expected %0d", count, n));
    chk(neg_count == CW'(nneg), $sformatf("neg_count %0d expected %0d", neg_count, nneg));
    for (int k = 0; k < n; k++) begin
      chk(sorted[k].value == w[order[k]] && sorted[k].loc == loc_t'(order[k]) &&
          sorted[k].flag == FLAG_U,
          $sformatf("entry %0d: %h/%0d expected %h/%0d", k, sorted[k].value, sorted[k].loc,
                    w[order[k]], order[k]));
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_kernel(25);
    run_kernel(N);
    run_kernel(7);
    for (int t = 0; t < 20; t++) run_kernel(1 + int'($urandom_range(N - 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
