// mode_decoder: the PE's 1-2 decoder, steering the input vector to one of two datapaths.
//
// In mode 1 (equal-distance layers) the input vector and its valid go to the
// multiplier-based path (FFT1/MAC/IFFT1); in mode 2 (mixed powers-of-two layers) they
// go to the shift-based path (FFT2/MAC/IFFT2). The path not selected sees a zero
// vector and no valid, so its registers do not toggle. Combinational.
// The paper places this decoder at the PE input under the PE controller; zeroing the
// idle path is this design's choice.
module mode_decoder
  import req_yolo_pkg::*;
(
  input  qmode_e                   mode,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_x [LB],
  output logic                     v1,
  output logic signed [DATA_W-1:0] x1 [LB],
  output logic                     v2,
  output logic signed [DATA_W-1:0] x2 [LB]
);

  always_comb begin
    v1 = in_valid && (mode == MODE_EQ);
    v2 = in_valid && (mode == MODE_MP2);
    for (int i = 0; i < int'(LB); i++) begin
      x1[i] = (mode == MODE_EQ)  ? in_x[i] : '0;
      x2[i] = (mode == MODE_MP2) ? in_x[i] : '0;
    end
  end

endmodule
