// tb_pe: checks one processing element end to end against the reference model.
//
// Random layers are loaded (mode 1 or mode 2, BN or linear bypass, random BN table
// entry); each layer sends random sequences of 1..18 terms (input vector + FFT(w) word)
// framed by first/last, back to back or with gaps. Every output vector must appear 10
// cycles after its 'last' term and match IFFT(sum FFT(x) * FFT(w)) followed by BN and
// leaky ReLU, or by rounding and saturation in bypass. The tolerance covers the FFT
// rounding of the hardware, which grows with the number of terms summed (10 units
// plus 0.4 % for up to 18 terms).
module tb_pe;
  import req_yolo_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0, cfg_bn_en = 0, in_valid = 0, in_first = 0, in_last = 0;
  qmode_e cfg_mode = MODE_EQ;
  logic signed [DATA_W-1:0] in_x [LB], out_y [LB];
  logic [WWORD_W-1:0] in_wword = '0;
  twiddle_t tw [LB/2];
  logic bn_we = 0, out_valid;
  logic [3:0] bn_waddr = '0, bn_rd_addr = '0;
  logic [2*BN_W*LB-1:0] bn_wdata = '0;
  int checks = 0, failures = 0;
  int sc [16][LB], bi [16][LB];
  real expq [$][LB];
  int tlast [$];
  int cyc = 0;

  for (genvar k = 0; k < LB/2; k++) begin : g_tw
    assign tw[k] = default_twiddle(k);
  end

  pe dut (.*);

  initial begin
    #5000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (in_valid && in_last) tlast.push_back(cyc);
    if (rst_n && out_valid) begin
      checks++;
      if (expq.size() == 0 || tlast.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        if (cyc - tlast[0] != 10) begin
          failures++;
          $display("latency %0d", cyc - tlast[0]);
        end
        for (int c = 0; c < LB; c++) begin
          checks++;
          if (!close(real'(out_y[c]), expq[0][c], 10.0 + 0.004 * (expq[0][c] < 0 ? -expq[0][c] : expq[0][c]))) begin
            failures++;
            if (failures < 10) $display("ch %0d: got %0d exp %f", c, out_y[c], expq[0][c]);
          end
        end
        void'(expq.pop_front());
        void'(tlast.pop_front());
      end
    end
  end

  initial begin
    real sr[LB], si[LB], xr[LB], xi[LB], fr[LB], fi[LB], y[LB], e[LB], wr, wi;
    int n, cr, ci, maxc, ent;
    bit m2, bn;
    foreach (in_x[c]) in_x[c] = '0;
    foreach (xi[c]) xi[c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 16; a++) begin
      for (int c = 0; c < LB; c++) begin
        sc[a][c] = $urandom_range(2, 40);
        bi[a][c] = int'($urandom_range(0, 400)) - 200;
        bn_wdata[32*c + 16 +: 16] = 16'(sc[a][c]);
        bn_wdata[32*c +: 16] = 16'(bi[a][c]);
      end
      @(negedge clk); bn_we = 1; bn_waddr = 4'(a);
      @(negedge clk); bn_we = 0;
    end
    for (int lay = 0; lay < 8; lay++) begin
      m2 = lay[0];
      bn = !lay[1];
      ent = $urandom_range(0, 15);
      maxc = bn ? (m2 ? 7 : 31) : (m2 ? 2 : 3);
      @(negedge clk);
      load = 1; cfg_mode = m2 ? MODE_MP2 : MODE_EQ; cfg_bn_en = bn; bn_rd_addr = 4'(ent);
      @(negedge clk);
      load = 0;
      for (int s = 0; s < 25; s++) begin
        n = $urandom_range(1, 18);
        foreach (sr[f]) begin sr[f] = 0; si[f] = 0; end
        for (int t = 0; t < n; t++) begin
          for (int c = 0; c < LB; c++) begin
            xr[c] = int'($urandom_range(0, 400)) - 200;
            in_x[c] = DATA_W'(int'(xr[c]));
          end
          for (int b = 0; b < NBIN; b++) begin
            if (m2) begin
              cr = ($urandom_range(0, 1) << 5) | ($urandom_range(0, maxc) << 2) | $urandom_range(0, 3);
              ci = ($urandom_range(0, 1) << 5) | ($urandom_range(0, maxc) << 2) | $urandom_range(0, 3);
            end else begin
              cr = (int'($urandom_range(0, 2*maxc)) - maxc) & 63;
              ci = (int'($urandom_range(0, 2*maxc)) - maxc) & 63;
            end
            if (b == 0 || b == 8) ci = 0;
            in_wword[12*b + 6 +: 6] = 6'(cr);
            in_wword[12*b +: 6] = 6'(ci);
          end
          fft(xr, xi, m2, fr, fi);
          for (int f = 0; f < NBIN; f++) begin
            wr = wcode(int'(in_wword[12*f + 6 +: 6]), m2);
            wi = wcode(int'(in_wword[12*f +: 6]), m2);
            sr[f] += fr[f]*wr - fi[f]*wi;
            si[f] += fr[f]*wi + fi[f]*wr;
          end
          in_valid = 1; in_first = (t == 0); in_last = (t == n-1);
          @(negedge clk);
          in_valid = 0; in_first = 0; in_last = 0;
          if ($urandom_range(0, 2) == 0) @(negedge clk);   // optional idle cycle
        end
        for (int f = NBIN; f < LB; f++) begin sr[f] = sr[LB-f]; si[f] = -si[LB-f]; end
        ifft_re(sr, si, m2, y);
        for (int c = 0; c < LB; c++) e[c] = bn ? bn_ref(y[c], sc[ent][c], bi[ent][c]) : sat16($floor(y[c] + 0.5));
        expq.push_back(e);
      end
      repeat (14) @(negedge clk);
    end
    repeat (14) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
