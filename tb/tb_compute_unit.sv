// tb_compute_unit: checks the PE array with its pooling units (2 PEs, reduced size).
//
// Both PEs see the same input vectors but their own weight words and BN tables (each
// written through bn_pe). Layers alternate mode, BN/bypass and pooling. Without
// pooling each sequence of terms gives one output vector per PE; with pooling every
// four sequences give one vector per PE, the channel-wise maximum of the four. The
// outputs are compared with the reference model (tolerance as in the PE test).
module tb_compute_unit;
  import req_yolo_pkg::*;
  import tb_ref_pkg::*;
  localparam int NP = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0, cfg_bn_en = 0, cfg_pool_en = 0, in_valid = 0, in_first = 0, in_last = 0;
  qmode_e cfg_mode = MODE_EQ;
  logic signed [DATA_W-1:0] in_x [LB];
  logic [WWORD_W-1:0] in_wword [NP];
  twiddle_t tw [LB/2];
  logic bn_we = 0, out_valid;
  logic [0:0] bn_pe = '0;
  logic [1:0] bn_waddr = '0, bn_rd_addr = '0;
  logic [2*BN_W*LB-1:0] bn_wdata = '0;
  logic signed [DATA_W-1:0] out_y [NP][LB];
  int checks = 0, failures = 0;
  int sc [NP][4][LB], bi [NP][4][LB];
  real expq [$][NP][LB];

  for (genvar k = 0; k < LB/2; k++) begin : g_tw
    assign tw[k] = default_twiddle(k);
  end

  compute_unit #(.NUM_PE(NP), .BN_DEPTH(4)) dut (.*);

  initial begin
    #5000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        for (int p = 0; p < NP; p++)
          for (int c = 0; c < LB; c++) begin
            checks++;
            if (!close(real'(out_y[p][c]), expq[0][p][c], 10.0 + 0.004 * (expq[0][p][c] < 0 ? -expq[0][p][c] : expq[0][p][c]))) begin
              failures++;
              if (failures < 10) $display("pe %0d ch %0d: got %0d exp %f", p, c, out_y[p][c], expq[0][p][c]);
            end
          end
        void'(expq.pop_front());
      end
    end
  end

  initial begin
    real sr[NP][LB], si[NP][LB], xr[LB], xi[LB], fr[LB], fi[LB], y[LB], e[NP][LB], wr, wi, v;
    int n, cr, ci, maxc, ent, nseq;
    bit m2, bn, pool;
    logic [WWORD_W-1:0] wv;
    foreach (in_x[c]) in_x[c] = '0;
    foreach (xi[c]) xi[c] = 0;
    foreach (in_wword[p]) in_wword[p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++)
      for (int a = 0; a < 4; a++) begin
        for (int c = 0; c < LB; c++) begin
          sc[p][a][c] = $urandom_range(2, 40);
          bi[p][a][c] = int'($urandom_range(0, 400)) - 200;
          bn_wdata[32*c + 16 +: 16] = 16'(sc[p][a][c]);
          bn_wdata[32*c +: 16] = 16'(bi[p][a][c]);
        end
        @(negedge clk); bn_we = 1; bn_pe = 1'(p); bn_waddr = 2'(a);
        @(negedge clk); bn_we = 0;
      end
    for (int lay = 0; lay < 8; lay++) begin
      m2 = lay[0];
      bn = !lay[1];
      pool = lay[2];
      ent = $urandom_range(0, 3);
      maxc = bn ? (m2 ? 7 : 31) : (m2 ? 2 : 3);
      @(negedge clk);
      load = 1; cfg_mode = m2 ? MODE_MP2 : MODE_EQ; cfg_bn_en = bn; cfg_pool_en = pool; bn_rd_addr = 2'(ent);
      @(negedge clk);
      load = 0;
      nseq = 24;
      for (int s = 0; s < nseq; s++) begin
        n = $urandom_range(1, 9);
        foreach (sr[p, f]) begin sr[p][f] = 0; si[p][f] = 0; end
        for (int t = 0; t < n; t++) begin
          for (int c = 0; c < LB; c++) begin
            xr[c] = int'($urandom_range(0, 400)) - 200;
            in_x[c] = DATA_W'(int'(xr[c]));
          end
          fft(xr, xi, m2, fr, fi);
          for (int p = 0; p < NP; p++) begin
            for (int b = 0; b < NBIN; b++) begin
              if (m2) begin
                cr = ($urandom_range(0, 1) << 5) | ($urandom_range(0, maxc) << 2) | $urandom_range(0, 3);
                ci = ($urandom_range(0, 1) << 5) | ($urandom_range(0, maxc) << 2) | $urandom_range(0, 3);
              end else begin
                cr = (int'($urandom_range(0, 2*maxc)) - maxc) & 63;
                ci = (int'($urandom_range(0, 2*maxc)) - maxc) & 63;
              end
              if (b == 0 || b == 8) ci = 0;
              wv[12*b + 6 +: 6] = 6'(cr);
              wv[12*b +: 6] = 6'(ci);
              wr = wcode(cr, m2);
              wi = wcode(ci, m2);
              sr[p][b] += fr[b]*wr - fi[b]*wi;
              si[p][b] += fr[b]*wi + fi[b]*wr;
            end
            in_wword[p] = wv;
          end
          in_valid = 1; in_first = (t == 0); in_last = (t == n-1);
          @(negedge clk);
          in_valid = 0; in_first = 0; in_last = 0;
          if ($urandom_range(0, 2) == 0) @(negedge clk);
        end
        for (int p = 0; p < NP; p++) begin
          for (int f = NBIN; f < LB; f++) begin sr[p][f] = sr[p][LB-f]; si[p][f] = -si[p][LB-f]; end
          ifft_re(sr[p], si[p], m2, y);
          for (int c = 0; c < LB; c++) begin
            v = bn ? bn_ref(y[c], sc[p][ent][c], bi[p][ent][c]) : sat16($floor(y[c] + 0.5));
            if (!pool || s % 4 == 0 || v > e[p][c]) e[p][c] = v;
          end
        end
        if (!pool || s % 4 == 3) expq.push_back(e);
      end
      repeat (16) @(negedge clk);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
