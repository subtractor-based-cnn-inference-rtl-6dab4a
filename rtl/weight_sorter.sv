// weight_sorter: sorts the weights of one kernel in ascending order and
// splits the sorted list into its negative and non-negative parts.
//
// The weights arrive one per cycle (in_valid) with their location in the
// kernel. The sorter is an insertion array: every stored entry compares its
// key with the new weight in parallel, the entries greater than the new one
// move down by one place and the new entry takes the freed place, so the
// array is sorted after every cycle and one weight is accepted per cycle
// with no stall. Equal values keep their arrival order. Each stored entry
// keeps its original location and gets the flag U (unprocessed).
//
// The split into the two lists is the boundary neg_count: entries
// [0, neg_count) are the negative weights, most negative first, and entries
// [neg_count, count) are the positive weights (zero included), smallest
// first. The combination finder walks the negative list from its end, so
// both lists are read in ascending magnitude.
//
// clear empties the array for the next kernel. Weights offered when the
// array is full are dropped (an assertion flags it).
//
// Sorting in ascending order, keeping locations and splitting into a
// positive and a negative list follow the paper; the insertion array, the
// one-weight-per-cycle rate and the placement of zero in the positive list
// are this design's choices.
module weight_sorter
  import subconv_pkg::*;
#(
  parameter int unsigned N = N_MAX
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid,
  input  fp32_t                  in_value,
  input  loc_t                   in_loc,
  output wentry_t                sorted [N],
  output logic [$clog2(N+1)-1:0] count,
  output logic [$clog2(N+1)-1:0] neg_count
);

  localparam int unsigned CW = $clog2(N + 1);

  logic    [N-1:0] greater;   // stored entry sorts after the new weight
  wentry_t         new_e;
  logic            accept;
  logic            is_neg;

  assign new_e  = '{value: in_value, loc: in_loc, flag: FLAG_U};
  assign accept = in_valid && (count < CW'(N));
  assign is_neg = in_value[31] && (in_value[30:0] != '0);

  always_comb begin
    for (int i = 0; i < N; i++)
      greater[i] = (CW'(i) >= count) || (fp_key(sorted[i].value) > fp_key(in_value));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      neg_count <= '0;
      for (int i = 0; i < N; i++) sorted[i] <= '0;
    end else if (clear) begin
      count     <= '0;
      neg_count <= '0;
    end else if (accept) begin
      count <= count + 1'b1;
      if (is_neg) neg_count <= neg_count + 1'b1;
      for (int i = 0; i < N; i++) begin
        if (greater[i]) begin
          if (i == 0)               sorted[i] <= new_e;
          else if (!greater[i - 1]) sorted[i] <= new_e;
          else                      sorted[i] <= sorted[i - 1];
        end
      end
    end
  end

  // A weight offered to a full array is lost.
  assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && !clear && count == CW'(N)))
    else $error("weight_sorter: weight dropped, array full");

endmodule
