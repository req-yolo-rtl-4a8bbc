// tb_global_controller: checks the term sequence and the stall rules of the controller.
//
// For several random layer shapes (1x1 and 3x3, pooling on/off, partial groups) the
// testbench builds the expected term list from the loop order (group, pixel, pool
// window, input block, kernel position) and compares every issued term: source
// and weight addresses (registered, one cycle before the term flags), padding flag,
// first/last and BN address. A store-unit model answers each batch with 'stored' after
// a fixed back-end delay. Checked as well: batch-closing terms are at least NUM_PE
// cycles apart, no term of a new group issues before all batches of the previous group
// are stored, 'done' pulses once after the last batch, and both stalls occur.
module tb_global_controller;
  import req_yolo_pkg::*;
  localparam int NP = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, stored = 0;
  layer_cfg_t cfg_in = '0, cfg;
  logic busy, done, load, rd_en, t_valid, t_first, t_last, t_pad, stall_gap, stall_drain;
  logic [19:0] hw_out;
  logic [15:0] rd_addr;
  logic [11:0] w_addr;
  logic [3:0] bn_addr;
  int checks = 0, failures = 0;

  global_controller #(.NUM_PE(NP)) dut (.*);

  initial begin
    #20000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct packed { logic [15:0] rd; logic pad; logic [11:0] wa; logic f, l; logic [3:0] bn; } term_t;
  term_t exp_q [$];

  // store model: every batch (every 4th 'last' with pooling) is stored 15+NP cycles later
  int issued = 0, nstored = 0, nlast = 0, n_gap = 0, n_drain = 0, n_done = 0;
  int pend [$];
  int cyc = 0, last_close = -1000;
  logic [15:0] rd_d;
  logic [11:0] wa_d;
  always @(posedge clk) begin
    cyc++;
    rd_d <= rd_addr;
    wa_d <= w_addr;
    stored <= 0;
    if (pend.size() > 0 && pend[0] == cyc) begin
      void'(pend.pop_front());
      stored <= 1;
      nstored++;
    end
    if (stall_gap) n_gap++;
    if (stall_drain) n_drain++;
    if (done) n_done++;
    if (t_valid) begin
      term_t e, g;
      g = '{rd_d, t_pad, wa_d, t_first, t_last, bn_addr};
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected term");
      end else begin
        e = exp_q.pop_front();
        if (e.pad != g.pad || (!e.pad && e.rd != g.rd) || e.wa != g.wa || e.f != g.f || e.l != g.l ||
            (e.l && e.bn != g.bn)) begin
          failures++;
          if (failures < 10) $display("term mismatch: got rd=%0d pad=%0d wa=%0d f=%0d l=%0d bn=%0d exp rd=%0d pad=%0d wa=%0d f=%0d l=%0d bn=%0d", g.rd, g.pad, g.wa, g.f, g.l, g.bn, e.rd, e.pad, e.wa, e.f, e.l, e.bn);
        end
      end
      if (t_last) begin
        nlast++;
        if (!cfg.pool_en || nlast % 4 == 0) begin
          checks++;
          if (cyc - last_close < NP) begin
            failures++;
            $display("batches only %0d cycles apart", cyc - last_close);
          end
          last_close = cyc;
          issued++;
          pend.push_back(cyc + 15 + NP);
        end
      end
    end
  end

  // drain rule: a term of group g+1 issues only when all of group g is stored
  int grp_batches, grp_seen;

  task automatic run(int h, int w, int cb, int ob, bit k3, bit pool, int wb, int bb);
    int k, gph, gpw, oh, ow, ih, iw, nq, ng, t0;
    term_t e;
    cfg_in = '0;
    cfg_in.h = 10'(h); cfg_in.w = 10'(w); cfg_in.cb = 7'(cb); cfg_in.ob = 7'(ob); cfg_in.k3 = k3;
    cfg_in.pool_en = pool; cfg_in.w_base = 16'(wb); cfg_in.bn_base = 8'(bb);
    k = k3 ? 3 : 1;
    gph = pool ? h/2 : h; gpw = pool ? w/2 : w; nq = pool ? 4 : 1;
    ng = (ob + NP - 1) / NP;
    for (int g = 0; g < ng; g++)
      for (int ph = 0; ph < gph; ph++)
        for (int pw = 0; pw < gpw; pw++)
          for (int q = 0; q < nq; q++)
            for (int jb = 0; jb < cb; jb++)
              for (int ky = 0; ky < k; ky++)
                for (int kx = 0; kx < k; kx++) begin
                  oh = pool ? 2*ph + q/2 : ph;
                  ow = pool ? 2*pw + q%2 : pw;
                  ih = k3 ? oh + ky - 1 : oh;
                  iw = k3 ? ow + kx - 1 : ow;
                  e.pad = (ih < 0 || iw < 0 || ih >= h || iw >= w);
                  e.rd = 16'(jb*h*w + ih*w + iw);
                  e.wa = 12'(wb + (g*cb + jb)*k*k + ky*k + kx);
                  e.f = (jb == 0 && ky == 0 && kx == 0);
                  e.l = (jb == cb-1 && ky == k-1 && kx == k-1);
                  e.bn = 4'(bb + g);
                  exp_q.push_back(e);
                end
    issued = 0; nstored = 0; nlast = 0; n_done = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    @(negedge clk);
    checks += 4;
    if (exp_q.size() != 0) begin failures++; $display("%0d terms missing", exp_q.size()); exp_q.delete(); end
    if (nstored != ng * gph * gpw || issued != nstored) begin failures++; $display("stored %0d issued %0d", nstored, issued); end
    if (n_done != 1) failures++;
    if (hw_out != 20'(gph * gpw)) failures++;
    $display("layer %0dx%0d cb=%0d ob=%0d k3=%0d pool=%0d: %0d cycles", h, w, cb, ob, k3, pool, cyc - t0);
    repeat (3) @(negedge clk);
  endtask

  // drain-rule monitor: when a first term of a new group appears, all issued batches are stored
  int cur_bn = -1;
  always @(posedge clk) begin
    if (t_valid && t_first) begin
      if (cur_bn != -1 && int'(bn_addr) != cur_bn) begin
        checks++;
        if (nstored != issued) begin
          failures++;
          $display("new group started with %0d batches in flight", issued - nstored);
        end
      end
      cur_bn = bn_addr;
    end
    if (done) cur_bn = -1;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(4, 4, 2, 5, 1, 0, 7, 1);
    run(4, 6, 1, 3, 0, 1, 100, 0);
    run(2, 2, 1, 1, 0, 0, 0, 2);
    run(6, 4, 3, 7, 1, 1, 20, 3);
    for (int i = 0; i < 4; i++)
      run(2 * $urandom_range(1, 3), 2 * $urandom_range(1, 3), $urandom_range(1, 3), $urandom_range(1, 7),
          1'($urandom_range(0, 1)), 1'($urandom_range(0, 1)), $urandom_range(0, 500), $urandom_range(0, 4));
    checks += 2;
    if (n_gap == 0) begin failures++; $display("gap stall never seen"); end
    if (n_drain == 0) begin failures++; $display("drain stall never seen"); end
    $display("gap stall cycles %0d, drain stall cycles %0d", n_gap, n_drain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
