// subconv_pkg: types and constants shared by the subtractor-based convolution
// accelerator.
//
// Numbers are IEEE 754 binary32 (the arithmetic of the evaluated design is
// IEEE 754). A weight travels through the preprocessor as a wentry_t: its
// value, its original location inside the kernel (input channel, row,
// column) and a status flag. The flag encodes the three states of the
// preprocessing: U (not yet processed), C (combined with a weight of opposite
// sign) and N (no combination found).
//
// Default sizes cover the three convolution layers of LeNet-5: kernels of
// 5x5, at most 16 input channels (400 weights per output channel) and input
// maps of at most 32x32 (1 channel) or 6x14x14 = 1176 words. The location
// fields allow kernels up to 7x7 (row and column fields of 3 bits).
package subconv_pkg;

  typedef logic [31:0] fp32_t;

  // Largest kernel (weights of one output channel) the preprocessor holds.
  localparam int unsigned N_MAX      = 400;
  // Kernel side (LeNet-5 convolutions are 5x5).
  localparam int unsigned K_MAX      = 5;
  // Input channels of the widest LeNet-5 convolution.
  localparam int unsigned C_MAX      = 16;
  // Words of the input feature map buffer: max(1*32*32, 6*14*14, 16*5*5).
  localparam int unsigned FMAP_WORDS = 1176;


  typedef enum logic [1:0] {
    FLAG_U = 2'd0,   // unprocessed
    FLAG_C = 2'd1,   // combined
    FLAG_N = 2'd2    // no combination
  } flag_e;

  typedef struct packed {
    logic [$clog2(C_MAX)-1:0]   c;    // input channel
    logic [$clog2(K_MAX+1)-1:0] ky;   // kernel row
    logic [$clog2(K_MAX+1)-1:0] kx;   // kernel column
  } loc_t;

  typedef struct packed {
    fp32_t value;
    loc_t  loc;
    flag_e flag;
  } wentry_t;

  // Absolute value of a binary32 number.
  function automatic fp32_t fp_abs(fp32_t x);
    return {1'b0, x[30:0]};
  endfunction

  // Maps a binary32 number to an unsigned key whose integer order is the
  // numeric order (negative numbers are bit-inverted, positive ones get the
  // sign bit set). -0 and +0 are kept apart, -0 sorts just below +0.
  function automatic logic [31:0] fp_key(fp32_t x);
    return x[31] ? ~x : {1'b1, x[30:0]};
  endfunction

  // a >= b for binary32 numbers (no NaN handling). +0 and -0 compare equal.
  function automatic logic fp_ge(fp32_t a, fp32_t b);
    if (a[30:0] == '0 && b[30:0] == '0) return 1'b1;
    return fp_key(a) >= fp_key(b);
  endfunction

endpackage
