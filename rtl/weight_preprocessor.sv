// weight_preprocessor: turns the weights of one kernel into the modified
// weight list used by modified_conv.
//
// It chains the two preprocessing steps: weight_sorter (sort in ascending
// order, keep locations, split at zero) and combination_finder (pair
// positive and negative weights whose magnitudes lie within the rounding
// size, flag every weight, place the pairs on top of the list and the
// uncombined weights below).
//
// Interface: clear empties the sorter; w_valid/w_value/w_loc load one
// weight per cycle; start (with rounding, a binary32 value) runs the
// combination step on the loaded kernel; done pulses when list, n_comb and
// n_total are valid. They stay valid until the next start.
//
// Timing: loading takes one cycle per weight; the combination step takes
// count - pairs + 1 cycles after start.
//
// The two steps and their order follow the paper; the paper runs them once,
// offline, before inference; here they are hardware that can be rerun for
// every kernel.
module weight_preprocessor
  import subconv_pkg::*;
#(
  parameter int unsigned N = N_MAX
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   w_valid,
  input  fp32_t                  w_value,
  input  loc_t                   w_loc,
  input  logic                   start,
  input  fp32_t                  rounding,
  output wentry_t                list [N],
  output logic [$clog2(N+1)-1:0] n_comb,
  output logic [$clog2(N+1)-1:0] n_total,
  output logic                   busy,
  output logic                   done,
  output logic [$clog2(N+1)-1:0] stat_neg_small,
  output logic [$clog2(N+1)-1:0] stat_pos_small,
  output logic [$clog2(N+1)-1:0] stat_leftover
);

  localparam int unsigned CW = $clog2(N + 1);

  wentry_t       sorted [N];
  logic [CW-1:0] count, neg_count;

  weight_sorter #(.N(N)) u_sort (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (clear),
    .in_valid  (w_valid),
    .in_value  (w_value),
    .in_loc    (w_loc),
    .sorted    (sorted),
    .count     (count),
    .neg_count (neg_count)
  );

  combination_finder #(.N(N)) u_comb (
    .clk            (clk),
    .rst_n          (rst_n),
    .start          (start),
    .rounding       (rounding),
    .sorted         (sorted),
    .count          (count),
    .neg_count      (neg_count),
    .list           (list),
    .n_comb         (n_comb),
    .n_total        (n_total),
    .busy           (busy),
    .done           (done),
    .stat_neg_small (stat_neg_small),
    .stat_pos_small (stat_pos_small),
    .stat_leftover  (stat_leftover)
  );

  // The kernel must not change while it is being combined.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !w_valid && !clear)
    else $error("weight_preprocessor: weights changed during combination");

endmodule
