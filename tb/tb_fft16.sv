// tb_fft16: checks both FFT kernels (multiplier form FFT1 and shift form FFT2).
//
// Random real or complex 16-bit vectors (including full-scale ones) are streamed one
// per cycle, with random gaps, into one instance of each flavour fed by the default
// twiddle factors. Each output vector, 4 cycles later, is compared bin by bin with the
// floating-point radix-2 reference using the same twiddle values (Q1.14 values for FFT1, the
// power-of-two approximation for FFT2); the tolerance covers per-stage rounding.
module tb_fft16;
  import req_yolo_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = DATA_W + 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, ov1, ov2;
  logic signed [DATA_W-1:0] in_re [LB], in_im [LB];
  logic signed [W-1:0] o1_re [LB], o1_im [LB], o2_re [LB], o2_im [LB];
  twiddle_t tw [LB/2];
  int checks = 0, failures = 0;
  real qre [$][LB], qim [$][LB];

  for (genvar k = 0; k < LB/2; k++) begin : g_tw
    assign tw[k] = default_twiddle(k);
  end

  fft16 #(.MODE(MODE_EQ)) u1 (.clk, .rst_n, .in_valid, .in_re, .in_im, .tw,
                              .out_valid(ov1), .out_re(o1_re), .out_im(o1_im));
  fft16 #(.MODE(MODE_MP2)) u2 (.clk, .rst_n, .in_valid, .in_re, .in_im, .tw,
                               .out_valid(ov2), .out_re(o2_re), .out_im(o2_im));

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(input logic signed [W-1:0] dre [LB], input logic signed [W-1:0] dim [LB],
                     input real xr [LB], input real xi [LB], input bit approx);
    real rr[LB], ri[LB];
    fft(xr, xi, approx, rr, ri);
    for (int f = 0; f < LB; f++) begin
      checks += 2;
      if (!close(real'(dre[f]), rr[f], 4.0) || !close(real'(dim[f]), ri[f], 4.0)) begin
        failures++;
        if (failures < 10)
          $display("mode%0d bin %0d: got (%0d,%0d) exp (%f,%f)", approx + 1, f, dre[f], dim[f], rr[f], ri[f]);
      end
    end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (ov1 != ov2) failures++;
      if (ov1) begin
        if (qre.size() == 0) failures++;
        else begin
          cmp(o1_re, o1_im, qre[0], qim[0], 0);
          cmp(o2_re, o2_im, qre[0], qim[0], 1);
          void'(qre.pop_front());
          void'(qim.pop_front());
        end
      end
    end
  end

  initial begin
    real xr[LB], xi[LB];
    int kind;
    foreach (in_re[c]) begin in_re[c] = '0; in_im[c] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      @(negedge clk);
      kind = it % 4;
      for (int c = 0; c < LB; c++) begin
        case (kind)
          0: begin xr[c] = int'($urandom_range(0, 400)) - 200; xi[c] = 0; end
          1: begin xr[c] = int'($signed(16'($urandom))); xi[c] = 0; end
          2: begin xr[c] = int'($signed(16'($urandom))); xi[c] = int'($signed(16'($urandom))); end
          default: begin xr[c] = (c == it % 16) ? 32767 : 0; xi[c] = 0; end
        endcase
        in_re[c] = DATA_W'(int'(xr[c]));
        in_im[c] = DATA_W'(int'(xi[c]));
      end
      in_valid = 1'($urandom_range(0, 3) != 0);
      if (in_valid) begin qre.push_back(xr); qim.push_back(xi); end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (qre.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
