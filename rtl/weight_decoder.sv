// weight_decoder: unpacks one BRAM word of quantised FFT(w) into per-bin decoded weights.
//
// A weight word holds the N/2+1 = 9 complex FFT bins of one circulant block's index
// vector, each component in a 6-bit code. The same code is read two ways:
//   mode 1 (equal-distance): the code is a two's-complement level in -31..31; the
//     layer coefficient alpha is not applied here (it is folded into the BN scale);
//   mode 2 (mixed powers of two): bit 5 is the sign, bits 4:2 the primary code p,
//     bits 1:0 the secondary code s. A non-zero code c stands for 2^(c-1) and a zero
//     code for "no term", so 1_011_01 decodes to -(2^2 + 2^0) and 0_010_10 to
//     +(2^1 + 2^1), as in the paper's 6-bit example. The multiplier then shifts the
//     operand left by p-1 and s-1 and adds.
// The field layout (1 sign, 3 primary, 2 secondary) and the two example codes follow
// the paper; the "zero code = no term" rule and the two's-complement mode-1 levels are
// this design's reading of it. Purely combinational.
//
// Ports: word (WWORD_W bits, bin k at [12k +: 12], real part high), mode;
//        dec_re[k], dec_im[k] for k = 0..NBIN-1.
module weight_decoder
  import req_yolo_pkg::*;
(
  input  logic [WWORD_W-1:0] word,
  input  qmode_e             mode,
  output wdec_t              dec_re [NBIN],
  output wdec_t              dec_im [NBIN]
);

  function automatic wdec_t decode(logic [WQ_W-1:0] c, qmode_e m);
    wdec_t d;
    d = '0;
    if (m == MODE_EQ) begin
      d.level = $signed(c);
    end else begin
      d.neg  = c[5];
      d.p_en = (c[4:2] != 3'd0);
      d.p_sh = c[4:2] - 3'd1;
      d.s_en = (c[1:0] != 2'd0);
      d.s_sh = c[1:0] - 2'd1;
    end
    return d;
  endfunction

  always_comb begin
    for (int k = 0; k < int'(NBIN); k++) begin
      dec_re[k] = decode(word[2*WQ_W*k + WQ_W +: WQ_W], mode);
      dec_im[k] = decode(word[2*WQ_W*k +: WQ_W], mode);
    end
  end

endmodule
