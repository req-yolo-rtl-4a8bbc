// tb_weight_decoder: exhaustive check of the 6-bit weight-code decoder.
//
// Every one of the 64 codes is placed in every bin (real and imaginary) of random
// words, in both modes. The decoded fields are turned back into a number (level in
// mode 1; +-(2^p + 2^s) in mode 2) and compared with the reference code value.
module tb_weight_decoder;
  import req_yolo_pkg::*;
  import tb_ref_pkg::*;

  logic [WWORD_W-1:0] word;
  qmode_e mode;
  wdec_t dec_re [NBIN], dec_im [NBIN];
  int checks = 0, failures = 0;

  weight_decoder dut (.*);

  function automatic int dval(wdec_t d, qmode_e m);
    int v;
    if (m == MODE_EQ) return int'(d.level);
    v = (d.p_en ? (1 << d.p_sh) : 0) + (d.s_en ? (1 << d.s_sh) : 0);
    return d.neg ? -v : v;
  endfunction

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cre[NBIN], cim[NBIN];
    for (int it = 0; it < 400; it++) begin
      mode = (it % 2) ? MODE_MP2 : MODE_EQ;
      for (int b = 0; b < NBIN; b++) begin
        cre[b] = (it < 128) ? (it / 2 + b) % 64 : $urandom_range(0, 63);
        cim[b] = (it < 128) ? (it / 2 + 7 * b) % 64 : $urandom_range(0, 63);
        word[12*b + 6 +: 6] = 6'(cre[b]);
        word[12*b +: 6]     = 6'(cim[b]);
      end
      #1;
      for (int b = 0; b < NBIN; b++) begin
        checks += 2;
        if (dval(dec_re[b], mode) != wcode(cre[b], mode == MODE_MP2)) begin
          failures++;
          $display("re bin %0d code %0d mode %0d: got %0d", b, cre[b], mode, dval(dec_re[b], mode));
        end
        if (dval(dec_im[b], mode) != wcode(cim[b], mode == MODE_MP2)) failures++;
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
