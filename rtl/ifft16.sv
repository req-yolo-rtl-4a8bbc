// ifft16: 16-point inverse FFT built from the forward FFT kernel.
//
// Uses IFFT(X) = conj(FFT(conj(X))) / N: the imaginary parts are negated on the way
// in, the same pipelined radix-2 kernel as the forward transform (fft16, MODE selects
// the multiplier or the shift-based butterflies) transforms them, and the result is
// divided by 16 with rounding (an arithmetic shift by 4). Because the circulant
// product of two real vectors is real, only the real part is delivered; the second
// conjugation only flips the sign of the imaginary part, which is dropped, so it costs
// nothing. Latency 4 cycles, one vector per cycle.
// The conjugate-and-divide construction follows the paper; keeping only the real part
// and rounding the division are this design's choices.
module ifft16
  import req_yolo_pkg::*;
#(
  parameter qmode_e      MODE  = MODE_EQ,
  parameter int unsigned IN_W  = ACC_W,
  parameter int unsigned OUT_W = IN_W + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re [LB],
  input  logic signed [IN_W-1:0]  in_im [LB],
  input  twiddle_t                tw [LB/2],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_y [LB]
);

  localparam int unsigned XW = IN_W + 1;           // room for negating the imaginary part
  localparam int unsigned FW = XW + LOG2LB + 1;    // kernel width

  logic signed [XW-1:0] c_re [LB];
  logic signed [XW-1:0] c_im [LB];
  logic signed [FW-1:0] f_re [LB];
  logic signed [FW-1:0] f_im [LB];
  logic signed [FW-1:0] rounded [LB];

  always_comb begin
    for (int i = 0; i < int'(LB); i++) begin
      c_re[i] = XW'(in_re[i]);
      c_im[i] = -XW'(in_im[i]);
    end
  end

  fft16 #(.MODE(MODE), .IN_W(XW), .W(FW)) u_fft (
    .clk, .rst_n, .in_valid, .in_re(c_re), .in_im(c_im), .tw,
    .out_valid, .out_re(f_re), .out_im(f_im)
  );

  always_comb begin
    for (int i = 0; i < int'(LB); i++) begin
      rounded[i] = (f_re[i] + FW'(LB / 2)) >>> LOG2LB;
      out_y[i]   = OUT_W'(rounded[i]);
    end
  end

endmodule
