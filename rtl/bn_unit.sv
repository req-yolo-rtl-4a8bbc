// bn_unit: per-output-channel batch normalisation, bias and leaky ReLU after the IFFT.
//
// For each of the 16 channels of an output vector: y = sat16(((x * scale) >>> BN_SHIFT)
// + bias), then negative results are multiplied by 0.1 (approximated as *205 >>> 11,
// floor). scale and bias are signed 16-bit; the scale also carries the layer's
// quantisation coefficient alpha, which the weight codes leave out. The parameters of
// several output blocks are kept in a small table, written by the host (one block of
// 16 channels per write) and selected by rd_addr, which must be stable while a vector
// is processed. One register stage: out_valid follows in_valid by one cycle.
// The paper says only that each output channel has its own batch normalisation and
// bias and that a Mux selects the BN path by layer; the arithmetic, the formats and the
// leaky slope of 0.1 (from the network's leaky ReLU) are this design's choices.
module bn_unit
  import req_yolo_pkg::*;
#(
  parameter int unsigned IN_W     = ACC_W + 1,
  parameter int unsigned DEPTH    = 16,
  parameter int unsigned BN_SHIFT = 8,
  localparam int unsigned AW      = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [AW-1:0]            waddr,
  input  logic [2*BN_W*LB-1:0]     wdata,     // channel c: {scale, bias} at [32c +: 32]
  input  logic [AW-1:0]            rd_addr,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_x [LB],
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_y [LB]
);

  localparam int unsigned MW = IN_W + BN_W;
  localparam logic signed [DATA_W-1:0] YMAX = {1'b0, {(DATA_W-1){1'b1}}};
  localparam logic signed [DATA_W-1:0] YMIN = {1'b1, {(DATA_W-1){1'b0}}};

  logic [2*BN_W*LB-1:0] params [DEPTH];
  logic [2*BN_W*LB-1:0] cur;

  always_ff @(posedge clk) begin
    if (we) params[waddr] <= wdata;
  end
  assign cur = params[rd_addr];

  function automatic logic signed [DATA_W-1:0] bn1(logic signed [IN_W-1:0] x,
                                                    logic signed [BN_W-1:0] sc,
                                                    logic signed [BN_W-1:0] bi);
    logic signed [MW-1:0] p, lk;
    logic signed [DATA_W-1:0] y;
    p = ((MW'(x) * MW'(sc)) >>> BN_SHIFT) + MW'(bi);
    if (p > MW'(YMAX))      y = YMAX;
    else if (p < MW'(YMIN)) y = YMIN;
    else                    y = DATA_W'(p);
    // leaky slope 205/2048, 205 = 128 + 64 + 8 + 4 + 1 (constant shifts, no multiplier)
    lk = MW'(y);
    lk = ((lk <<< 7) + (lk <<< 6) + (lk <<< 3) + (lk <<< 2) + lk) >>> 11;
    if (y < 0) y = DATA_W'(lk);
    return y;
  endfunction

  always_ff @(posedge clk) begin
    for (int c = 0; c < int'(LB); c++)
      out_y[c] <= bn1(in_x[c], cur[2*BN_W*c + BN_W +: BN_W], cur[2*BN_W*c +: BN_W]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
