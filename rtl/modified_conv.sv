// modified_conv: convolution unit that replaces one multiplication and one
// addition by a subtraction for every combined weight pair.
//
// For a weight pair (Ka, Kb) with Kb ~ -Ka that the preprocessor combined,
//     I1*Ka + I2*Kb  is computed as  Ka * (I1 - I2),
// where Ka is the positive weight of the pair, I1 the input under Ka and I2
// the input under Kb. An uncombined weight w contributes w * I as usual.
//
// The unit holds one input feature map (channels x rows x columns, written
// through the fm_* port, word address c*H*W + y*W + x) and one modified
// weight list (list[0 .. n_comb-1]: pairs, positive weight first;
// list[n_comb .. n_total-1]: uncombined weights). start computes one output
// channel: a valid convolution with stride 1 over all positions
// (oy, ox), 0 <= oy <= H-K, 0 <= ox <= W-K, in row-major order. The input
// of a weight at location (c, ky, kx) is read from c*H*W + (oy+ky)*W +
// (ox+kx).
//
// Datapath, one list step per cycle: a binary32 subtractor (I1 - I2), a
// multiplexer that passes the difference for a pair or I1 for a single
// weight, a binary32 multiplier and a binary32 accumulator adder. A pair
// takes one cycle (one subtraction, one multiplication, one addition), an
// uncombined weight one cycle (one multiplication, one addition).
//
// Timing: each output takes n_comb/2 + (n_total - n_comb) cycles of
// accumulation plus one cycle in which out_valid pulses with the result and
// its position (two cycles if the list is empty). done pulses with the last output. cfg_* are sampled at
// start. cnt_sub, cnt_mul and cnt_add count the operations performed since
// reset, in the same way as the paper's operation counts (every product is
// followed by one accumulation addition).
//
// Equation (1), the use of the stored locations and plain multiply-add for
// uncombined weights follow the paper; using the positive weight as Ka, the
// one-step-per-cycle schedule, the memory layout, the absence of bias and
// activation and the stride-1 valid convolution are this design's choices.
module modified_conv
  import subconv_pkg::*;
#(
  parameter int unsigned N     = N_MAX,
  parameter int unsigned WORDS = FMAP_WORDS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input feature map write port
  input  logic                     fm_we,
  input  logic [$clog2(WORDS)-1:0] fm_addr,
  input  fp32_t                    fm_wdata,
  // layer shape
  input  logic [5:0]               cfg_in_h,
  input  logic [5:0]               cfg_in_w,
  input  logic [2:0]               cfg_k,
  // modified weight list
  input  wentry_t                  list [N],
  input  logic [$clog2(N+1)-1:0]   n_comb,
  input  logic [$clog2(N+1)-1:0]   n_total,
  // control
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // output stream
  output logic                     out_valid,
  output fp32_t                    out_data,
  output logic [5:0]               out_oy,
  output logic [5:0]               out_ox,
  // operation counters
  output logic [31:0]              cnt_sub,
  output logic [31:0]              cnt_mul,
  output logic [31:0]              cnt_add
);

  localparam int unsigned CW = $clog2(N + 1);
  localparam int unsigned AW = $clog2(WORDS);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_EMIT} state_e;
  state_e state;

  fp32_t fm [WORDS];

  logic [5:0]    h_r, w_r, oy, ox;
  logic [2:0]    k_r;
  logic [11:0]   plane;     // H*W
  logic [CW-1:0] idx;
  fp32_t         acc;

  wentry_t e0, e1;
  logic    is_pair;
  fp32_t   i1, i2, diff, mul_b, prod, sum;

  function automatic logic [AW-1:0] addr_of(loc_t l, logic [5:0] y0, logic [5:0] x0,
                                            logic [5:0] w, logic [11:0] pl);
    logic [16:0] a;
    a = 17'(l.c) * 17'(pl) + (17'(y0) + 17'(l.ky)) * 17'(w) + 17'(x0) + 17'(l.kx);
    return (a < 17'(WORDS)) ? AW'(a) : '0;
  endfunction

  always_ff @(posedge clk) begin
    if (fm_we) fm[fm_addr] <= fm_wdata;
  end

  assign e0      = list[(idx < CW'(N)) ? idx : '0];
  assign e1      = list[(idx + 1'b1 < CW'(N)) ? idx + 1'b1 : '0];
  assign is_pair = idx < n_comb;
  assign i1      = fm[addr_of(e0.loc, oy, ox, w_r, plane)];
  assign i2      = fm[addr_of(e1.loc, oy, ox, w_r, plane)];
  assign mul_b   = is_pair ? diff : i1;

  fp_addsub u_sub (.a(i1),  .b(i2),   .sub(1'b1), .y(diff));
  fp_mul    u_mul (.a(e0.value), .b(mul_b), .y(prod));
  fp_addsub u_acc (.a(acc), .b(prod), .sub(1'b0), .y(sum));

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      h_r       <= '0;
      w_r       <= '0;
      k_r       <= '0;
      plane     <= '0;
      oy        <= '0;
      ox        <= '0;
      idx       <= '0;
      acc       <= '0;
      done      <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_oy    <= '0;
      out_ox    <= '0;
      cnt_sub   <= '0;
      cnt_mul   <= '0;
      cnt_add   <= '0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_ACC;
            h_r   <= cfg_in_h;
            w_r   <= cfg_in_w;
            k_r   <= cfg_k;
            plane <= 12'(cfg_in_h) * 12'(cfg_in_w);
            oy    <= '0;
            ox    <= '0;
            idx   <= '0;
            acc   <= '0;
          end
        end
        S_ACC: begin
          if (idx < n_total) begin
            acc     <= sum;
            idx     <= idx + (is_pair ? CW'(2) : CW'(1));
            cnt_mul <= cnt_mul + 1;
            cnt_add <= cnt_add + 1;
            if (is_pair) cnt_sub <= cnt_sub + 1;
            if (idx + (is_pair ? CW'(2) : CW'(1)) >= n_total) state <= S_EMIT;
          end else begin
            // empty weight list: the output is zero
            state <= S_EMIT;
          end
        end
        S_EMIT: begin
          out_valid <= 1'b1;
          out_data  <= acc;
          out_oy    <= oy;
          out_ox    <= ox;
          acc       <= '0;
          idx       <= '0;
          state     <= S_ACC;
          if (ox == w_r - 6'(k_r)) begin
            ox <= '0;
            if (oy == h_r - 6'(k_r)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              oy <= oy + 1'b1;
            end
          end else begin
            ox <= ox + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Pairs are stored as two entries, so the combined part has even length.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !n_comb[0] && n_comb <= n_total)
    else $error("modified_conv: malformed weight list");
  // The kernel must fit inside the input map.
  assert property (@(posedge clk) disable iff (!rst_n)
                   start |-> cfg_k != 0 && 6'(cfg_k) <= cfg_in_h && 6'(cfg_k) <= cfg_in_w)
    else $error("modified_conv: kernel larger than input map");

endmodule
