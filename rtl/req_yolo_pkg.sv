// req_yolo_pkg: constants and types shared by the block-circulant CONV accelerator.
//
// The accelerator computes each 16x16 circulant block of a CONV layer as
// IFFT( sum FFT(x) .* FFT(w) ), with FFT(w) stored on chip in 6-bit codes.
// A layer uses one of two quantisation modes for its FFT(w):
//   mode 1 (equal-distance)        : a signed integer level, multiplied on a multiplier;
//   mode 2 (mixed powers of two)   : sign, 3-bit primary and 2-bit secondary exponent
//                                    codes, multiplied with two shifts and an add.
// The block size / FFT length (16) and the 6-bit weight format come from the paper;
// the data widths are this design's own choices (the paper does not give them).
package req_yolo_pkg;

  // ---- sizes taken from the paper --------------------------------------------------
  localparam int unsigned LB     = 16;          // block size = FFT length
  localparam int unsigned LOG2LB = 4;           // FFT stages
  localparam int unsigned NBIN   = LB / 2 + 1;  // FFT bins kept for real inputs (N/2+1)
  localparam int unsigned WQ_W   = 6;           // bits per quantised weight component
  localparam int unsigned PRI_W  = 3;           // primary exponent code (mode 2)
  localparam int unsigned SEC_W  = 2;           // secondary exponent code (mode 2)

  // ---- widths chosen by this design ------------------------------------------------
  localparam int unsigned DATA_W = 16;               // feature-map value (signed)
  localparam int unsigned FFT_W  = DATA_W + LOG2LB + 1; // forward-FFT output width
  localparam int unsigned ACC_W  = 40;               // MAC accumulator width
  localparam int unsigned IFFT_W = ACC_W + LOG2LB + 1;  // IFFT internal width
  localparam int unsigned TW_W   = 16;               // twiddle factor, signed Q1.14
  localparam int unsigned TW_FRAC = 14;
  localparam int unsigned BN_W   = 16;               // BN scale and bias width

  // Weight word stored in BRAM for one (output block, input block, kernel position):
  // NBIN complex codes, {re, im} each WQ_W bits. Bin k occupies bits
  // [2*WQ_W*k +: 2*WQ_W], real part in the upper half.
  localparam int unsigned WWORD_W = NBIN * 2 * WQ_W;   // 108 bits

  // Quantisation mode of a layer (paper: "mode 1" / "mode 2").
  typedef enum logic [0:0] {
    MODE_EQ  = 1'b0,   // mode 1: equal-distance, multiplier-based
    MODE_MP2 = 1'b1    // mode 2: mixed powers-of-two, shift-based
  } qmode_e;

  // A decoded weight component. In mode 1 only 'level' is used; in mode 2
  // value = (-1)^neg * ( (p_en ? 2^p_sh : 0) + (s_en ? 2^s_sh : 0) ).
  typedef struct packed {
    logic signed [WQ_W-1:0] level;
    logic                   neg;
    logic                   p_en;
    logic [2:0]             p_sh;
    logic                   s_en;
    logic [1:0]             s_sh;
  } wdec_t;

  // Shift-form twiddle component used by FFT2: value = t1 + t2 where
  // t1 = en1 ? (-1)^neg1 * 2^-sh1 : 0, t2 = en2 ? (-1)^neg2 * 2^-sh2 : 0.
  typedef struct packed {
    logic       en1;
    logic       neg1;
    logic [3:0] sh1;
    logic       en2;
    logic       neg2;
    logic [3:0] sh2;
  } twsh_t;

  // One twiddle factor W^k = cos - j*sin, in both forms.
  typedef struct packed {
    logic signed [TW_W-1:0] cos_q;
    logic signed [TW_W-1:0] sin_q;
    twsh_t                  cos_s;
    twsh_t                  sin_s;
  } twiddle_t;

  // Layer configuration written by the host before a layer starts.
  typedef struct packed {
    logic [9:0]  h;         // input (= pre-pool output) height
    logic [9:0]  w;         // input width
    logic [6:0]  cb;        // input channel blocks C/LB (1..64)
    logic [6:0]  ob;        // output channel blocks C'/LB (1..64)
    logic        k3;        // 1: 3x3 kernel, pad 1; 0: 1x1 kernel
    qmode_e      mode;      // quantisation mode of the layer
    logic        bn_en;     // 1: BN + leaky ReLU path, 0: linear bypass (Mux2)
    logic        pool_en;   // 1: 2x2 stride-2 max pooling on the output
    logic        src_b;     // 0: read buffer A, write B; 1: read B, write A
    logic [15:0] w_base;    // first weight word of the layer in every bank
    logic [7:0]  bn_base;   // first BN entry of the layer in every PE
  } layer_cfg_t;

  // Value of a shift-form twiddle component in Q1.14 units.
  function automatic int twsh_value(twsh_t t);
    int v;
    v = 0;
    if (t.en1) v += t.neg1 ? -(1 << (TW_FRAC - t.sh1)) : (1 << (TW_FRAC - t.sh1));
    if (t.en2) v += t.neg2 ? -(1 << (TW_FRAC - t.sh2)) : (1 << (TW_FRAC - t.sh2));
    return v;
  endfunction

  // Nearest two-term power-of-two approximation of the Q1.14 values cos16_q14(k): the
  // closest +-2^-a +- 2^-b with a, b in 0..14 (found by an offline exhaustive search;
  // the testbench reference repeats that search). 16384 -> 1, 15137 -> 1 - 2^-4,
  // 11585 -> 1 - 2^-2, 6270 -> 2^-1 - 2^-3, and the negatives.
  function automatic twsh_t cos16_sh(int k);
    int m;
    m = k % 16;
    if (m < 0) m += 16;
    case (m)
      0:       return '{1'b1, 1'b0, 4'd0, 1'b0, 1'b0, 4'd0};
      1, 15:   return '{1'b1, 1'b0, 4'd0, 1'b1, 1'b1, 4'd4};
      2, 14:   return '{1'b1, 1'b0, 4'd0, 1'b1, 1'b1, 4'd2};
      3, 13:   return '{1'b1, 1'b0, 4'd1, 1'b1, 1'b1, 4'd3};
      5, 11:   return '{1'b1, 1'b1, 4'd1, 1'b1, 1'b0, 4'd3};
      6, 10:   return '{1'b1, 1'b1, 4'd0, 1'b1, 1'b0, 4'd2};
      7, 9:    return '{1'b1, 1'b1, 4'd0, 1'b1, 1'b0, 4'd4};
      8:       return '{1'b1, 1'b1, 4'd0, 1'b0, 1'b0, 4'd0};
      default: return '0;   // 4, 12: zero
    endcase
  endfunction

  // Q1.14 cos(2*pi*k/16) for k = 0..7 (sin(2*pi*k/16) = cos(2*pi*(k-4)/16)).
  function automatic int cos16_q14(int k);
    int m;
    m = k % 16;
    if (m < 0) m += 16;
    case (m)
      0:  return 16384;   1:  return 15137;   2:  return 11585;   3:  return 6270;
      4:  return 0;       5:  return -6270;   6:  return -11585;  7:  return -15137;
      8:  return -16384;  9:  return -15137;  10: return -11585;  11: return -6270;
      12: return 0;       13: return 6270;    14: return 11585;   default: return 15137;
    endcase
  endfunction

  // Default twiddle factor W^k = cos(2*pi*k/16) - j*sin(2*pi*k/16) in both forms.
  function automatic twiddle_t default_twiddle(int k);
    twiddle_t t;
    t.cos_q = TW_W'(cos16_q14(k));
    t.sin_q = TW_W'(cos16_q14(k - 4));
    t.cos_s = cos16_sh(k);
    t.sin_s = cos16_sh(k - 4);
    return t;
  endfunction

endpackage
