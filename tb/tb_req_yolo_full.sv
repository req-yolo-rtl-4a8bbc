// tb_req_yolo_full: one complete layer on the accelerator at its full size.
//
// The top level is instantiated with its default parameters (32 PEs, 64 Ki-vector
// feature buffers, 4 Ki-word weight banks, 16-entry BN tables). The host loads an
// 8x8 map with two channel blocks (32 channels) into buffer A, random mode-2 weights
// for 40 output blocks (two groups of 32 PEs, the second one partial) and BN tables,
// runs one 3x3 layer with BN, leaky ReLU and 2x2 pooling, reads the 4x4x640 result
// from buffer B and compares every value with the floating-point reference model.
module tb_req_yolo_full;
  import req_yolo_pkg::*;
  import tb_ref_pkg::*;

  localparam int NP = 32;
  localparam int FD = 65536;
  localparam int WD = 4096;
  localparam int BD = 16;
  localparam int PAW = $clog2(NP);
  localparam int FAW = $clog2(FD);
  localparam int WAW = $clog2(WD);
  localparam int BAW = $clog2(BD);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  layer_cfg_t cfg_in = '0;
  logic busy, done;
  logic hw_we = 0; logic [PAW-1:0] hw_bank = '0; logic [WAW-1:0] hw_addr = '0; logic [WWORD_W-1:0] hw_data = '0;
  logic hb_we = 0; logic [PAW-1:0] hb_pe = '0; logic [BAW-1:0] hb_addr = '0; logic [2*BN_W*LB-1:0] hb_data = '0;
  logic ht_we = 0; logic [2:0] ht_addr = '0; twiddle_t ht_data = '0;
  logic hf_we = 0, hf_wbuf = 0, hf_re = 0, hf_rbuf = 0;
  logic [FAW-1:0] hf_waddr = '0, hf_raddr = '0;
  logic [LB*DATA_W-1:0] hf_wdata = '0, hf_rdata;
  logic stall_gap, stall_drain, pad_term, skip_block;

  req_yolo_top dut (.*);

  int checks = 0, failures = 0;
  int n_gap = 0, n_drain = 0, n_pad = 0, n_skip = 0, n_mode1 = 0, n_mode2 = 0;
  int n_bn = 0, n_lin = 0, n_pool = 0, n_a2b = 0, n_b2a = 0;
  int n_live = 0, n_vals = 0;   // outputs that are neither zero nor saturated

  always @(posedge clk) begin
    if (stall_gap) n_gap++;
    if (stall_drain) n_drain++;
    if (pad_term) n_pad++;
    if (skip_block) n_skip++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host model of the maps ----------------------------------------------------------
  int xmap[];      // current layer input: ((jb*h + r)*w + c)*16 + ch
  int ymap[];      // output read back

  task automatic fwrite(bit b, int addr, int v[16]);
    @(negedge clk);
    hf_we = 1; hf_wbuf = b; hf_waddr = FAW'(addr);
    for (int c = 0; c < 16; c++) hf_wdata[c*16 +: 16] = 16'(v[c]);
    @(negedge clk);
    hf_we = 0;
  endtask

  task automatic fread(bit b, int addr, output int v[16]);
    @(negedge clk);
    hf_re = 1; hf_rbuf = b; hf_raddr = FAW'(addr);
    @(negedge clk);
    hf_re = 0;
    for (int c = 0; c < 16; c++) v[c] = int'($signed(hf_rdata[c*16 +: 16]));
  endtask

  // weights: codes[((ob*cb + jb)*K2 + k)*18 + bin*2 + {0:re,1:im}]
  int codes[];
  int scale[], bias[];

  task automatic load_layer(int cb, int ob, int k2, bit mode2, int wbase, int bnbase, int maxc);
    logic [WWORD_W-1:0] word;
    logic [2*BN_W*LB-1:0] bnw;
    int v;
    codes = new[ob*cb*k2*18];
    for (int i = 0; i < ob*cb*k2*18; i++) begin
      v = $urandom_range(0, 63);
      if (mode2) begin
        // keep magnitudes moderate: primary code up to maxc
        v = (v & 32) | ((($urandom_range(0, maxc)) & 7) << 2) | (v & 3);
      end else begin
        v = $urandom_range(0, 2*maxc) - maxc; v = v & 63;
      end
      if (((i % 18) == 1) || ((i % 18) == 17)) v = 0;   // imaginary part of bins 0 and 8
      codes[i] = v;
    end
    for (int o = 0; o < ob; o++)
      for (int jb = 0; jb < cb; jb++)
        for (int k = 0; k < k2; k++) begin
          for (int b = 0; b < 9; b++) begin
            word[24*b/2 + 6 +: 6] = 6'(codes[((o*cb + jb)*k2 + k)*18 + b*2]);
            word[24*b/2 +: 6]     = 6'(codes[((o*cb + jb)*k2 + k)*18 + b*2 + 1]);
          end
          @(negedge clk);
          hw_we = 1; hw_bank = PAW'(o % NP); hw_addr = WAW'(wbase + ((o / NP)*cb + jb)*k2 + k); hw_data = word;
          @(negedge clk);
          hw_we = 0;
        end
    scale = new[ob*16];
    bias  = new[ob*16];
    for (int o = 0; o < ob; o++) begin
      for (int c = 0; c < 16; c++) begin
        scale[o*16+c] = $urandom_range(4, 40);
        bias[o*16+c]  = int'($urandom_range(0, 200)) - 100;
        bnw[32*c + 16 +: 16] = 16'(scale[o*16+c]);
        bnw[32*c +: 16]      = 16'(bias[o*16+c]);
      end
      @(negedge clk);
      hb_we = 1; hb_pe = PAW'(o % NP); hb_addr = BAW'(bnbase + o / NP); hb_data = bnw;
      @(negedge clk);
      hb_we = 0;
    end
  endtask

  // reference output value of block o, pre-pool pixel (r, c), channel ch
  function automatic void ref_pixel(int h, int w, int cb, int k3, bit mode2, bit bn, int o,
                                    int r, int c, output real out[16]);
    real sr[16], si[16], xr[16], xi[16], fr[16], fi[16], y[16], wr, wi;
    int k2, ir, ic, kk;
    k2 = k3 ? 9 : 1;
    for (int f = 0; f < 16; f++) begin sr[f] = 0; si[f] = 0; end
    for (int jb = 0; jb < cb; jb++)
      for (int k = 0; k < k2; k++) begin
        ir = k3 ? r + k / 3 - 1 : r;
        ic = k3 ? c + k % 3 - 1 : c;
        for (int ch = 0; ch < 16; ch++) begin
          xi[ch] = 0;
          xr[ch] = (ir < 0 || ic < 0 || ir >= h || ic >= w) ? 0.0 : real'(xmap[((jb*h + ir)*w + ic)*16 + ch]);
        end
        fft(xr, xi, mode2, fr, fi);
        for (int f = 0; f <= 8; f++) begin
          kk = ((o*cb + jb)*k2 + k)*18 + f*2;
          wr = wcode(codes[kk], mode2);
          wi = wcode(codes[kk+1], mode2);
          sr[f] += fr[f]*wr - fi[f]*wi;
          si[f] += fr[f]*wi + fi[f]*wr;
        end
      end
    for (int f = 9; f < 16; f++) begin sr[f] = sr[16-f]; si[f] = -si[16-f]; end
    ifft_re(sr, si, mode2, y);
    for (int ch = 0; ch < 16; ch++)
      out[ch] = bn ? bn_ref(y[ch], scale[o*16+ch], bias[o*16+ch]) : sat16($floor(y[ch] + 0.5));
  endfunction

  task automatic run_layer(int h, int w, int cb, int ob, int k3, bit mode2, bit bn, bit pool,
                           bit src_b, int wbase, int bnbase);
    int cyc, ho, wo, v[16];
    real rv[16], best[16], tol;
    cfg_in = '0;
    cfg_in.h = 10'(h); cfg_in.w = 10'(w); cfg_in.cb = 7'(cb); cfg_in.ob = 7'(ob);
    cfg_in.k3 = k3[0]; cfg_in.mode = mode2 ? MODE_MP2 : MODE_EQ; cfg_in.bn_en = bn;
    cfg_in.pool_en = pool; cfg_in.src_b = src_b; cfg_in.w_base = 16'(wbase); cfg_in.bn_base = 8'(bnbase);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    $display("layer %0dx%0dx%0d -> %0d blocks: %0d cycles", h, w, cb*16, ob, cyc);
    if (mode2) n_mode2++; else n_mode1++;
    if (bn) n_bn++; else n_lin++;
    if (pool) n_pool++;
    if (src_b) n_b2a++; else n_a2b++;
    ho = pool ? h/2 : h;
    wo = pool ? w/2 : w;
    ymap = new[ob*ho*wo*16];
    for (int o = 0; o < ob; o++)
      for (int r = 0; r < ho; r++)
        for (int c = 0; c < wo; c++) begin
          fread(!src_b, (o*ho + r)*wo + c, v);
          for (int ch = 0; ch < 16; ch++) best[ch] = -1e30;
          for (int q = 0; q < (pool ? 4 : 1); q++) begin
            ref_pixel(h, w, cb, k3, mode2, bn, o, pool ? 2*r + q/2 : r, pool ? 2*c + q%2 : c, rv);
            for (int ch = 0; ch < 16; ch++) if (rv[ch] > best[ch]) best[ch] = rv[ch];
          end
          for (int ch = 0; ch < 16; ch++) begin
            ymap[((o*ho + r)*wo + c)*16 + ch] = v[ch];
            n_vals++;
            if (v[ch] != 0 && v[ch] != 32767 && v[ch] != -32768) n_live++;
            tol = 3.0 + 0.004 * (best[ch] < 0 ? -best[ch] : best[ch]);
            checks++;
            if (!close(real'(v[ch]), best[ch], tol)) begin
              failures++;
              if (failures < 10)
                $display("MISMATCH blk %0d (%0d,%0d) ch %0d: dut %0d ref %f", o, r, c, ch, v[ch], best[ch]);
            end
          end
        end
  endtask

  initial begin
    int v[16];
    repeat (3) @(negedge clk);
    rst_n = 1;
    xmap = new[2*8*8*16];
    for (int i = 0; i < 2*8*8*16; i++) xmap[i] = int'($urandom_range(0, 400)) - 200;
    for (int a = 0; a < 2*8*8; a++) begin
      for (int ch = 0; ch < 16; ch++) v[ch] = xmap[a*16 + ch];
      fwrite(0, a, v);
    end
    load_layer(2, 40, 9, 1, 0, 0, 5);
    run_layer(8, 8, 2, 40, 1, 1, 1, 1, 0, 0, 0);
    $display("events: pad=%0d gap_stall=%0d drain_stall=%0d skipped=%0d", n_pad, n_gap, n_drain, n_skip);
    $display("live outputs: %0d of %0d", n_live, n_vals);
    checks++; if (n_pad == 0 || n_drain == 0 || n_skip == 0) failures++;
    checks++; if (n_live * 4 < n_vals * 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
