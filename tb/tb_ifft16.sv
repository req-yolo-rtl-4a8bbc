// tb_ifft16: checks both IFFT kernels (real part output, divided by 16 with rounding).
//
// Random spectra are built as FFTs of random real vectors scaled up (so the inputs look
// like MAC sums) and also as fully random complex spectra. They are streamed into a
// multiplier-form and a shift-form instance; each real output vector, 4 cycles later,
// is compared with re(FFT(conj X))/16 from the reference with the same twiddles.
module tb_ifft16;
  import req_yolo_pkg::*;
  import tb_ref_pkg::*;
  localparam int IW = ACC_W;
  localparam int OW = ACC_W + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, ov1, ov2;
  logic signed [IW-1:0] in_re [LB], in_im [LB];
  logic signed [OW-1:0] y1 [LB], y2 [LB];
  twiddle_t tw [LB/2];
  int checks = 0, failures = 0;
  real qre [$][LB], qim [$][LB];

  for (genvar k = 0; k < LB/2; k++) begin : g_tw
    assign tw[k] = default_twiddle(k);
  end

  ifft16 #(.MODE(MODE_EQ))  u1 (.clk, .rst_n, .in_valid, .in_re, .in_im, .tw, .out_valid(ov1), .out_y(y1));
  ifft16 #(.MODE(MODE_MP2)) u2 (.clk, .rst_n, .in_valid, .in_re, .in_im, .tw, .out_valid(ov2), .out_y(y2));

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(input logic signed [OW-1:0] d [LB], input real xr [LB], input real xi [LB],
                     input bit approx);
    real y[LB];
    ifft_re(xr, xi, approx, y);
    for (int c = 0; c < LB; c++) begin
      checks++;
      if (!close(real'(d[c]), y[c], 2.0 + (y[c] < 0 ? -y[c] : y[c]) * 1e-9)) begin
        failures++;
        if (failures < 10) $display("mode%0d ch %0d: got %0d exp %f", approx + 1, c, d[c], y[c]);
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
          cmp(y1, qre[0], qim[0], 0);
          cmp(y2, qre[0], qim[0], 1);
          void'(qre.pop_front());
          void'(qim.pop_front());
        end
      end
    end
  end

  initial begin
    real xr[LB], xi[LB], tr[LB], ti[LB], zero[LB];
    foreach (in_re[c]) begin in_re[c] = '0; in_im[c] = '0; zero[c] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      @(negedge clk);
      if (it % 2 == 0) begin
        for (int c = 0; c < LB; c++) tr[c] = int'($urandom_range(0, 2000)) - 1000;
        fft(tr, zero, 0, ti, xi);
        for (int c = 0; c < LB; c++) begin
          xr[c] = $floor(ti[c] * 4096.0);
          xi[c] = $floor(xi[c] * 4096.0);
        end
      end else begin
        for (int c = 0; c < LB; c++) begin
          xr[c] = real'($signed($urandom)) * 64.0;
          xi[c] = real'($signed($urandom)) * 64.0;
        end
      end
      for (int c = 0; c < LB; c++) begin
        in_re[c] = IW'(longint'(xr[c]));
        in_im[c] = IW'(longint'(xi[c]));
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
