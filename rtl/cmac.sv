// cmac: the PE's element-wise complex multiply-accumulate between FFT(x) and FFT(w).
//
// Each cycle with in_valid it multiplies bins 0..8 of the incoming FFT(x) vector by the
// nine decoded FFT(w) weights and adds the products into nine complex accumulators
// ('first' restarts the sums). With 'last' the finished sums are registered to the
// output one cycle later, together with out_valid, and bins 9..15 are filled in as the
// complex conjugates of bins 7..1: both operands are transforms of real vectors, so
// their product is conjugate-symmetric and only N/2+1 multipliers are needed.
// MODE = MODE_EQ multiplies by the integer level (DSP multiplier); MODE = MODE_MP2
// forms each product as (x << (p-1)) + (x << (s-1)) with the sign applied after, so no
// multiplier is used. Over one output vector it sums r*r*(C/16) terms (Fig. 9: 9
// terms for one 16-channel input block).
// The conjugate-symmetry saving and the two product forms follow the paper; the
// accumulator width and the first/last framing are this design's choices.
module cmac
  import req_yolo_pkg::*;
#(
  parameter qmode_e      MODE  = MODE_EQ,
  parameter int unsigned IN_W  = FFT_W,
  parameter int unsigned OUT_W = ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    first,
  input  logic                    last,
  input  logic signed [IN_W-1:0]  fx_re [LB],
  input  logic signed [IN_W-1:0]  fx_im [LB],
  input  wdec_t                   w_re [NBIN],
  input  wdec_t                   w_im [NBIN],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_re [LB],
  output logic signed [OUT_W-1:0] out_im [LB]
);

  // x * w for one real operand and one decoded weight component
  function automatic logic signed [OUT_W-1:0] wmul(logic signed [IN_W-1:0] x, wdec_t w);
    logic signed [OUT_W-1:0] xe, mag, res;
    xe  = OUT_W'(x);
    // mode 2 without data-dependent branches: masked shifts, then (m ^ -neg) + neg
    mag = ((xe <<< w.p_sh) & {OUT_W{w.p_en}}) + ((xe <<< w.s_sh) & {OUT_W{w.s_en}});
    if (MODE == MODE_EQ) res = xe * OUT_W'(w.level);
    else                 res = (mag ^ {OUT_W{w.neg}}) + OUT_W'(w.neg);
    return res;
  endfunction

  logic signed [OUT_W-1:0] acc_re [NBIN];
  logic signed [OUT_W-1:0] acc_im [NBIN];
  logic signed [OUT_W-1:0] nxt_re [NBIN];
  logic signed [OUT_W-1:0] nxt_im [NBIN];
  logic signed [OUT_W-1:0] sum_re [NBIN];
  logic signed [OUT_W-1:0] sum_im [NBIN];

  always_comb begin
    for (int k = 0; k < int'(NBIN); k++) begin
      // (a + jb)(c + jd) = (ac - bd) + j(ad + bc)
      nxt_re[k] = (first ? '0 : acc_re[k])
                + wmul(fx_re[k], w_re[k]) - wmul(fx_im[k], w_im[k]);
      nxt_im[k] = (first ? '0 : acc_im[k])
                + wmul(fx_re[k], w_im[k]) + wmul(fx_im[k], w_re[k]);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      acc_re <= nxt_re;
      acc_im <= nxt_im;
      if (last) begin
        sum_re <= nxt_re;
        sum_im <= nxt_im;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && last;
  end

  always_comb begin
    for (int k = 0; k < int'(NBIN); k++) begin
      out_re[k] = sum_re[k];
      out_im[k] = sum_im[k];
    end
    for (int k = int'(NBIN); k < int'(LB); k++) begin
      out_re[k] =  sum_re[LB - k];
      out_im[k] = -sum_im[LB - k];
    end
  end

endmodule
