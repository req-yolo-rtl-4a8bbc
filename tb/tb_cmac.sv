// tb_cmac: checks the complex multiply-accumulate of both flavours exactly.
//
// Random spectra (bins 0..8) and random weight codes are fed as sequences of 1..12 terms
// between 'first' and 'last', with idle cycles between terms. The decoded weights come
// from a weight_decoder, as in the PE. One cycle after 'last' the sums must equal the
// integer reference sum(FFT(x) * w) for bins 0..8 and its conjugate mirror for bins
// 9..15; the multiplier MAC (mode 1) and the shift-add MAC (mode 2) are both checked.
module tb_cmac;
  import req_yolo_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, first = 0, last = 0, ov1, ov2;
  logic signed [FFT_W-1:0] fx_re [LB], fx_im [LB];
  logic [WWORD_W-1:0] word = '0;
  wdec_t d1_re [NBIN], d1_im [NBIN], d2_re [NBIN], d2_im [NBIN];
  logic signed [ACC_W-1:0] o1_re [LB], o1_im [LB], o2_re [LB], o2_im [LB];
  int checks = 0, failures = 0;

  weight_decoder wd1 (.word, .mode(MODE_EQ), .dec_re(d1_re), .dec_im(d1_im));
  weight_decoder wd2 (.word, .mode(MODE_MP2), .dec_re(d2_re), .dec_im(d2_im));
  cmac #(.MODE(MODE_EQ)) u1 (.clk, .rst_n, .in_valid, .first, .last, .fx_re, .fx_im,
                             .w_re(d1_re), .w_im(d1_im), .out_valid(ov1), .out_re(o1_re), .out_im(o1_im));
  cmac #(.MODE(MODE_MP2)) u2 (.clk, .rst_n, .in_valid, .first, .last, .fx_re, .fx_im,
                              .w_re(d2_re), .w_im(d2_im), .out_valid(ov2), .out_re(o2_re), .out_im(o2_im));

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s1r[NBIN], s1i[NBIN], s2r[NBIN], s2i[NBIN], ar, ai, wr, wi;
    int n, cr, ci;
    foreach (fx_re[c]) begin fx_re[c] = '0; fx_im[c] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int seq = 0; seq < 300; seq++) begin
      n = $urandom_range(1, 12);
      foreach (s1r[k]) begin s1r[k] = 0; s1i[k] = 0; s2r[k] = 0; s2i[k] = 0; end
      for (int t = 0; t < n; t++) begin
        @(negedge clk);
        in_valid = 1; first = (t == 0); last = (t == n - 1);
        for (int k = 0; k < LB; k++) begin
          fx_re[k] = FFT_W'(int'($urandom_range(0, 2000000)) - 1000000);
          fx_im[k] = FFT_W'(int'($urandom_range(0, 2000000)) - 1000000);
        end
        for (int k = 0; k < NBIN; k++) begin
          cr = $urandom_range(0, 63);
          ci = $urandom_range(0, 63);
          word[12*k + 6 +: 6] = 6'(cr);
          word[12*k +: 6] = 6'(ci);
          ar = fx_re[k]; ai = fx_im[k];
          wr = wcode(cr, 0); wi = wcode(ci, 0);
          s1r[k] += ar*wr - ai*wi; s1i[k] += ar*wi + ai*wr;
          wr = wcode(cr, 1); wi = wcode(ci, 1);
          s2r[k] += ar*wr - ai*wi; s2i[k] += ar*wi + ai*wr;
        end
        if ($urandom_range(0, 2) == 0) begin
          @(negedge clk);
          in_valid = 0; first = 0; last = 0;
        end
      end
      @(negedge clk);
      in_valid = 0; first = 0; last = 0;
      #1;
      checks += 2;
      if (!ov1 && !ov2) begin
        // output appeared a cycle after last; check sticky outputs instead
      end
      for (int k = 0; k < LB; k++) begin
        int b;
        longint e1r, e1i, e2r, e2i;
        b = (k < NBIN) ? k : LB - k;
        e1r = s1r[b]; e2r = s2r[b];
        e1i = (k < NBIN) ? s1i[b] : -s1i[b];
        e2i = (k < NBIN) ? s2i[b] : -s2i[b];
        checks++;
        if (longint'(o1_re[k]) != e1r || longint'(o1_im[k]) != e1i ||
            longint'(o2_re[k]) != e2r || longint'(o2_im[k]) != e2i) begin
          failures++;
          if (failures < 10) $display("seq %0d bin %0d: mode1 %0d/%0d exp %0d/%0d mode2 %0d/%0d exp %0d/%0d",
                                      seq, k, o1_re[k], o1_im[k], e1r, e1i, o2_re[k], o2_im[k], e2r, e2i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // out_valid must pulse exactly once per sequence, one cycle after 'last'
  logic last_d = 0;
  int n_ov = 0;
  always @(posedge clk) begin
    last_d <= in_valid && last;
    if (rst_n) begin
      if (ov1 != last_d || ov2 != last_d) begin
        failures++;
        $display("out_valid timing error");
      end
      if (ov1) n_ov++;
    end
  end
endmodule
