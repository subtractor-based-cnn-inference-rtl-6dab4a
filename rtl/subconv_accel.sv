// subconv_accel: subtractor-based convolution accelerator, top level.
//
// One output channel of a convolution layer is computed as follows. The
// host (which holds the trained network) loads the kernel of that channel
// through w_* (one weight per cycle with its location) and the input feature
// map through fm_*, sets the layer shape and the rounding size, and pulses
// start. The controller then runs the weight preprocessor (sort, split, find
// combinations) and, when it is done, the modified convolution unit, which
// streams the output map on out_* and computes each combined pair with one
// subtraction, one multiplication and one addition. done pulses with the
// last output. The outputs would feed a subsampling stage, which is not part
// of this block.
//
// Rounding size 0 gives an ordinary convolution (no weight pair is ever
// combined); larger rounding sizes combine more pairs and trade accuracy for
// fewer multiplications.
//
// Timing: the clock edge that takes start is followed by count - pairs
// edges of combination search, one edge that raises the preprocessor's
// done, one edge in which the convolution unit takes its start, and then
// pairs + uncombined + 1 edges per output position; done is raised with the
// last output. The weight sorting happens while the kernel is loaded, one
// weight per cycle. The weight and feature-map ports must stay idle
// while busy is high.
//
// The preprocessor feeding the modified convolution follows the paper's
// structure; running the preprocessor in hardware for every kernel, the
// controller and the load ports are this design's choices.
module subconv_accel
  import subconv_pkg::*;
#(
  parameter int unsigned N     = N_MAX,
  parameter int unsigned WORDS = FMAP_WORDS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // kernel load (from the trained model)
  input  logic                     w_clear,
  input  logic                     w_valid,
  input  fp32_t                    w_value,
  input  loc_t                     w_loc,
  // input feature map load
  input  logic                     fm_we,
  input  logic [$clog2(WORDS)-1:0] fm_addr,
  input  fp32_t                    fm_wdata,
  // configuration
  input  logic [5:0]               cfg_in_h,
  input  logic [5:0]               cfg_in_w,
  input  logic [2:0]               cfg_k,
  input  fp32_t                    rounding,
  // control
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // output map stream (to subsampling)
  output logic                     out_valid,
  output fp32_t                    out_data,
  output logic [5:0]               out_oy,
  output logic [5:0]               out_ox,
  // statistics
  output logic [$clog2(N+1)-1:0]   n_comb,
  output logic [$clog2(N+1)-1:0]   n_total,
  output logic [$clog2(N+1)-1:0]   stat_neg_small,
  output logic [$clog2(N+1)-1:0]   stat_pos_small,
  output logic [$clog2(N+1)-1:0]   stat_leftover,
  output logic [31:0]              cnt_sub,
  output logic [31:0]              cnt_mul,
  output logic [31:0]              cnt_add
);

  typedef enum logic [1:0] {T_IDLE, T_PRE, T_CONV} tstate_e;
  tstate_e state;

  wentry_t list [N];
  logic    pre_start, pre_busy, pre_done;
  logic    conv_start, conv_busy, conv_done;

  weight_preprocessor #(.N(N)) u_pre (
    .clk            (clk),
    .rst_n          (rst_n),
    .clear          (w_clear),
    .w_valid        (w_valid),
    .w_value        (w_value),
    .w_loc          (w_loc),
    .start          (pre_start),
    .rounding       (rounding),
    .list           (list),
    .n_comb         (n_comb),
    .n_total        (n_total),
    .busy           (pre_busy),
    .done           (pre_done),
    .stat_neg_small (stat_neg_small),
    .stat_pos_small (stat_pos_small),
    .stat_leftover  (stat_leftover)
  );

  modified_conv #(.N(N), .WORDS(WORDS)) u_conv (
    .clk       (clk),
    .rst_n     (rst_n),
    .fm_we     (fm_we),
    .fm_addr   (fm_addr),
    .fm_wdata  (fm_wdata),
    .cfg_in_h  (cfg_in_h),
    .cfg_in_w  (cfg_in_w),
    .cfg_k     (cfg_k),
    .list      (list),
    .n_comb    (n_comb),
    .n_total   (n_total),
    .start     (conv_start),
    .busy      (conv_busy),
    .done      (conv_done),
    .out_valid (out_valid),
    .out_data  (out_data),
    .out_oy    (out_oy),
    .out_ox    (out_ox),
    .cnt_sub   (cnt_sub),
    .cnt_mul   (cnt_mul),
    .cnt_add   (cnt_add)
  );

  assign pre_start  = (state == T_IDLE) && start;
  assign conv_start = (state == T_PRE) && pre_done;
  assign busy       = (state != T_IDLE);
  assign done       = (state == T_CONV) && conv_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE;
    end else begin
      case (state)
        T_IDLE: if (start)     state <= T_PRE;
        T_PRE:  if (pre_done)  state <= T_CONV;
        T_CONV: if (conv_done) state <= T_IDLE;
        default:               state <= T_IDLE;
      endcase
    end
  end

  // The two units never run at the same time.
  assert property (@(posedge clk) disable iff (!rst_n) !(pre_busy && conv_busy))
    else $error("subconv_accel: preprocessor and convolution overlap");
  // Loading ports must be idle while a run is in progress.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !w_valid && !w_clear && !fm_we)
    else $error("subconv_accel: load during run");

endmodule
