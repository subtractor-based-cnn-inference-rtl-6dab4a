// combination_finder: pairs positive and negative weights of nearly equal
// magnitude (Algorithm "find combinations") and writes the modified weight
// list.
//
// Input is the sorted kernel from weight_sorter: entries [0, neg_count) are
// the negative weights (most negative first), [neg_count, count) the
// positive ones (smallest first). Two pointers walk the lists in ascending
// magnitude: PP from the smallest positive weight upwards, PN from the
// negative weight closest to zero downwards. One step per cycle:
//   PP >= |PN| + rounding : the negative weight is too small, PN gets N,
//                           PN advances;
//   PP <= |PN| - rounding : the positive weight is too small, PP gets N,
//                           PP advances;
//   otherwise             : PP and PN get C and are stored as a pair,
//                           both advance.
// When one list is exhausted the rest of the other gets N, one per cycle.
// |PN| +/- rounding and the comparisons are done in binary32.
//
// The three lists of the paper (combined, positive-uncombined,
// negative-uncombined) are merged and spliced while they are produced:
// combined pairs are written from the top of the output list downwards
// (positive weight first, then its negative partner) and uncombined weights
// from the bottom upwards. When done pulses, list[0 .. n_comb-1] holds the
// n_comb/2 pairs and list[n_comb .. n_total-1] the uncombined weights, each
// with its original location and flag.
//
// Timing: start is taken in IDLE; the walk takes one cycle per step, i.e.
// count - pairs cycles, and done pulses one cycle after the last step
// (count - pairs + 1 cycles after start). The stat_* outputs count the
// outcomes of the last run.
//
// The walk, the comparisons, the flags and the final order (combined on
// top, uncombined at the bottom) follow the paper. Writing both ends of one
// array in a single pass, instead of building three lists and copying them,
// is this design's choice.
module combination_finder
  import subconv_pkg::*;
#(
  parameter int unsigned N = N_MAX
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  fp32_t                  rounding,
  input  wentry_t                sorted [N],
  input  logic [$clog2(N+1)-1:0] count,
  input  logic [$clog2(N+1)-1:0] neg_count,
  output wentry_t                list [N],
  output logic [$clog2(N+1)-1:0] n_comb,
  output logic [$clog2(N+1)-1:0] n_total,
  output logic                   busy,
  output logic                   done,
  output logic [$clog2(N+1)-1:0] stat_neg_small,  // PN rejected (line 5)
  output logic [$clog2(N+1)-1:0] stat_pos_small,  // PP rejected (line 8)
  output logic [$clog2(N+1)-1:0] stat_leftover    // left when a list ran out
);

  localparam int unsigned CW = $clog2(N + 1);

  typedef enum logic {S_IDLE, S_RUN} state_e;
  state_e state;

  logic [CW-1:0] pp;        // index of PP in sorted[]
  logic [CW-1:0] pn_left;   // negatives not yet visited; PN = sorted[pn_left-1]
  logic [CW-1:0] top;       // next free place for a combined pair
  logic [CW-1:0] bot;       // uncombined weights occupy [bot, n_total)
  fp32_t         rnd_r;

  logic    have_p, have_n;
  wentry_t e_p, e_n;
  fp32_t   hi, lo;
  logic    neg_small, pos_small;

  assign have_p = pp < n_total;
  assign have_n = pn_left != '0;
  assign e_p    = sorted[(pp < CW'(N)) ? pp : '0];
  assign e_n    = sorted[have_n ? pn_left - 1'b1 : '0];

  fp_addsub u_hi (.a(fp_abs(e_n.value)), .b(rnd_r), .sub(1'b0), .y(hi));
  fp_addsub u_lo (.a(fp_abs(e_n.value)), .b(rnd_r), .sub(1'b1), .y(lo));

  assign neg_small = fp_ge(e_p.value, hi);   // PP.val >= |PN.val| + rounding
  assign pos_small = fp_ge(lo, e_p.value);   // PP.val <= |PN.val| - rounding

  assign busy   = (state == S_RUN);
  assign n_comb = top;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      pp             <= '0;
      pn_left        <= '0;
      top            <= '0;
      bot            <= '0;
      rnd_r          <= '0;
      n_total        <= '0;
      done           <= 1'b0;
      stat_neg_small <= '0;
      stat_pos_small <= '0;
      stat_leftover  <= '0;
      for (int i = 0; i < N; i++) list[i] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start) begin
            state          <= S_RUN;
            pp             <= neg_count;
            pn_left        <= neg_count;
            top            <= '0;
            bot            <= count;
            n_total        <= count;
            rnd_r          <= rounding;
            stat_neg_small <= '0;
            stat_pos_small <= '0;
            stat_leftover  <= '0;
          end
        end
        S_RUN: begin
          if (have_p && have_n) begin
            if (neg_small) begin
              list[bot - 1'b1] <= '{value: e_n.value, loc: e_n.loc, flag: FLAG_N};
              bot              <= bot - 1'b1;
              pn_left          <= pn_left - 1'b1;
              stat_neg_small   <= stat_neg_small + 1'b1;
            end else if (pos_small) begin
              list[bot - 1'b1] <= '{value: e_p.value, loc: e_p.loc, flag: FLAG_N};
              bot              <= bot - 1'b1;
              pp               <= pp + 1'b1;
              stat_pos_small   <= stat_pos_small + 1'b1;
            end else begin
              list[top]        <= '{value: e_p.value, loc: e_p.loc, flag: FLAG_C};
              list[top + 1'b1] <= '{value: e_n.value, loc: e_n.loc, flag: FLAG_C};
              top              <= top + CW'(2);
              pp               <= pp + 1'b1;
              pn_left          <= pn_left - 1'b1;
            end
          end else if (have_p) begin
            list[bot - 1'b1] <= '{value: e_p.value, loc: e_p.loc, flag: FLAG_N};
            bot              <= bot - 1'b1;
            pp               <= pp + 1'b1;
            stat_leftover    <= stat_leftover + 1'b1;
          end else if (have_n) begin
            list[bot - 1'b1] <= '{value: e_n.value, loc: e_n.loc, flag: FLAG_N};
            bot              <= bot - 1'b1;
            pn_left          <= pn_left - 1'b1;
            stat_leftover    <= stat_leftover + 1'b1;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The negative list never extends past the end of the kernel.
  assert property (@(posedge clk) disable iff (!rst_n) start && state == S_IDLE |-> neg_count <= count)
    else $error("combination_finder: neg_count exceeds count");
  // Combined and uncombined parts never overlap.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> top <= bot)
    else $error("combination_finder: list overlap");

endmodule
