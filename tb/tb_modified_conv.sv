// tb_modified_conv: loads an input map and a modified weight list (built by
// the reference preprocessing) into the convolution unit, runs it and
// checks every output value and position bit for bit against the reference
// (same operation order, binary32 rounding after every operation), the
// number of cycles per output (pairs + uncombined + 1) and the subtraction,
// multiplication and addition counters. Shapes: 2 channels of 8x8 with a
// 3x3 kernel, 1 channel of 6x6 with a 5x5 kernel, an empty weight list.
module tb_modified_conv;
  import subconv_pkg::*;
  import fp_ref_pkg::*;
  import ref_model_pkg::*;

  localparam int unsigned N     = 50;
  localparam int unsigned WORDS = 256;
  localparam int unsigned CW    = $clog2(N + 1);
  localparam int unsigned AW    = $clog2(WORDS);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          fm_we = 1'b0;
  logic [AW-1:0] fm_addr = '0;
  fp32_t         fm_wdata = '0;
  logic [5:0]    cfg_in_h = '0, cfg_in_w = '0;
  logic [2:0]    cfg_k = '0;
  wentry_t       list [N];
  logic [CW-1:0] n_comb = '0, n_total = '0;
  logic          start = 1'b0, busy, done, out_valid;
  fp32_t         out_data;
  logic [5:0]    out_oy, out_ox;
  logic [31:0]   cnt_sub, cnt_mul, cnt_add;
  int checks = 0, failures = 0;

  modified_conv #(.N(N), .WORDS(WORDS)) dut (.*);

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

  task automatic run(int c, int h, int w, int k, logic [31:0] rnd, bit empty);
    logic [31:0] wt[$];
    int          ids[$];
    logic [31:0] fm[];
    rres_t       r;
    int          nout, cyc, last_cyc, terms, got;
    logic [31:0] s0, m0, a0;
    for (int ch = 0; ch < c; ch++)
      for (int ky = 0; ky < k; ky++)
        for (int kx = 0; kx < k; kx++) begin
          wt.push_back(rand_f(118, 126));
          ids.push_back(ch * 25 + ky * 5 + kx);
        end
    if (empty) begin
      wt.delete();
      ids.delete();
    end
    r  = ref_preprocess(wt, ids, rnd);
    fm = new[c * h * w];
    foreach (fm[i]) begin
      fm[i] = rand_f(120, 127);
      fm[i][31] = 1'b0;           // post-activation inputs are non-negative
      @(negedge clk);
      fm_we = 1'b1; fm_addr = AW'(i); fm_wdata = fm[i];
    end
    @(negedge clk) fm_we = 1'b0;
    foreach (r.lst[i])
      list[i] = '{value: r.lst[i].v, loc: id2loc(r.lst[i].id),
                  flag: (r.lst[i].flag == 1) ? FLAG_C : FLAG_N};
    n_comb  = CW'(r.n_comb);
    n_total = CW'(r.lst.size());
    cfg_in_h = 6'(h); cfg_in_w = 6'(w); cfg_k = 3'(k);
    s0 = cnt_sub; m0 = cnt_mul; a0 = cnt_add;
    terms = r.n_comb / 2 + (r.lst.size() - r.n_comb);
    start = 1'b1;
    @(negedge clk) start = 1'b0;
    nout = 0; cyc = 1; last_cyc = 0; got = 0;
    while (!done && cyc < 100000) begin
      if (out_valid) begin
        int oy, ox;
        oy = nout / (w - k + 1);
        ox = nout % (w - k + 1);
        chk(out_oy == 6'(oy) && out_ox == 6'(ox), "output position");
        chk(out_data == ref_conv_point(r.lst, r.n_comb, fm, h, w, oy, ox),
            $sformatf("out(%0d,%0d) = %h expected %h", oy, ox, out_data,
                      ref_conv_point(r.lst, r.n_comb, fm, h, w, oy, ox)));
        if (nout > 0)
          chk(cyc - last_cyc == ((terms == 0) ? 2 : terms + 1),
              $sformatf("output spacing %0d expected %0d", cyc - last_cyc, terms + 1));
        last_cyc = cyc;
        nout++;
      end
      @(negedge clk);
      cyc++;
    end
    // the last output comes with done
    if (out_valid) begin
      chk(out_data == ref_conv_point(r.lst, r.n_comb, fm, h, w, h - k, w - k), "last output");
      nout++;
    end
    chk(nout == (h - k + 1) * (w - k + 1), $sformatf("%0d outputs", nout));
    chk(cnt_sub - s0 == 32'(nout * r.n_comb / 2), "subtraction count");
    chk(cnt_mul - m0 == 32'(nout * terms), "multiplication count");
    chk(cnt_add - a0 == 32'(nout * terms), "addition count");
    $display("shape %0dx%0dx%0d k=%0d: %0d weights, %0d pairs, %0d outputs", c, h, w, k,
             r.lst.size(), r.n_comb / 2, nout);
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(2, 8, 8, 3, r2f(0.05), 1'b0);
    run(1, 6, 6, 5, r2f(0.1), 1'b0);
    run(2, 5, 7, 3, 32'h0, 1'b0);
    run(1, 4, 4, 2, r2f(0.05), 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
