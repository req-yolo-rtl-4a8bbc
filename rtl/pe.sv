// pe: processing element computing one 16x16 block-circulant CONV output vector.
//
// Datapath (one term per cycle, each term = one 16-channel input vector and the
// FFT(w) word of one circulant block at one kernel position):
//   1-2 decoder -> FFT1 -> MAC1 -> IFFT1 --\
//              \-> FFT2 -> MAC2 -> IFFT2 ---> Mux1 -> BN -> Mux2 -> out
//                                                  \--------/
// Path 1 (mode 1, equal-distance weights) uses multiplier butterflies and a multiplier
// MAC; path 2 (mode 2, mixed powers-of-two weights) uses shift-add butterflies and a
// shift-add MAC. The weight decoder turns the BRAM word into levels or shift amounts.
// Mux2 takes the BN/leaky-ReLU result or, for a linear layer, the IFFT result
// saturated to 16 bits. The MAC sums all terms from 'first' to 'last' and the output
// vector (16 output channels of one pixel) appears 10 cycles after the 'last' term
// (FFT 4 + MAC 1 + IFFT 4 + BN 1).
// Interface: in_x/in_wword/in_first/in_last with in_valid; the twiddle factors come
// from the shared register bank; the BN table is written through bn_we/bn_waddr/
// bn_wdata and selected with bn_rd_addr.
// The structure (decoder, two FFT/MAC/IFFT paths, Mux1, BN, Mux2, controller, weight
// decoder, register bank outside) follows the paper's PE figure; widths, latencies and
// the bypass saturation are this design's.
module pe
  import req_yolo_pkg::*;
#(
  parameter int unsigned BN_DEPTH = 16,
  localparam int unsigned BAW     = $clog2(BN_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  qmode_e                   cfg_mode,
  input  logic                     cfg_bn_en,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic signed [DATA_W-1:0] in_x [LB],
  input  logic [WWORD_W-1:0]       in_wword,
  input  twiddle_t                 tw [LB/2],
  input  logic                     bn_we,
  input  logic [BAW-1:0]           bn_waddr,
  input  logic [2*BN_W*LB-1:0]     bn_wdata,
  input  logic [BAW-1:0]           bn_rd_addr,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_y [LB]
);

  localparam int unsigned YW = ACC_W + 1;   // IFFT output width
  localparam logic signed [DATA_W-1:0] YMAX = {1'b0, {(DATA_W-1){1'b1}}};
  localparam logic signed [DATA_W-1:0] YMIN = {1'b1, {(DATA_W-1){1'b0}}};

  qmode_e             mode;
  logic               bn_sel;
  logic               mac_valid, mac_first, mac_last;
  logic [WWORD_W-1:0] mac_wword;

  pe_controller u_ctrl (
    .clk, .rst_n, .load, .cfg_mode, .cfg_bn_en,
    .in_valid, .in_first, .in_last, .in_wword,
    .mode, .bn_sel, .mac_valid, .mac_first, .mac_last, .mac_wword
  );

  // ---- 1-2 decoder -----------------------------------------------------------------
  logic                     v1, v2;
  logic signed [DATA_W-1:0] x1 [LB];
  logic signed [DATA_W-1:0] x2 [LB];
  logic signed [DATA_W-1:0] zero_im [LB];
  assign zero_im = '{default: '0};

  mode_decoder u_dec (.mode, .in_valid, .in_x, .v1, .x1, .v2, .x2);

  // ---- weight decoder ---------------------------------------------------------------
  wdec_t w_re [NBIN];
  wdec_t w_im [NBIN];
  weight_decoder u_wdec (.word(mac_wword), .mode, .dec_re(w_re), .dec_im(w_im));

  // ---- path 1: multiplier-based -------------------------------------------------------
  logic                    f1_v, m1_v, i1_v;
  logic signed [FFT_W-1:0] f1_re [LB];
  logic signed [FFT_W-1:0] f1_im [LB];
  logic signed [ACC_W-1:0] m1_re [LB];
  logic signed [ACC_W-1:0] m1_im [LB];
  logic signed [YW-1:0]    y1 [LB];

  fft16 #(.MODE(MODE_EQ), .IN_W(DATA_W), .W(FFT_W)) u_fft1 (
    .clk, .rst_n, .in_valid(v1), .in_re(x1), .in_im(zero_im), .tw,
    .out_valid(f1_v), .out_re(f1_re), .out_im(f1_im));
  cmac #(.MODE(MODE_EQ)) u_mac1 (
    .clk, .rst_n, .in_valid(mac_valid && mode == MODE_EQ), .first(mac_first), .last(mac_last),
    .fx_re(f1_re), .fx_im(f1_im), .w_re, .w_im,
    .out_valid(m1_v), .out_re(m1_re), .out_im(m1_im));
  ifft16 #(.MODE(MODE_EQ), .IN_W(ACC_W), .OUT_W(YW)) u_ifft1 (
    .clk, .rst_n, .in_valid(m1_v), .in_re(m1_re), .in_im(m1_im), .tw,
    .out_valid(i1_v), .out_y(y1));

  // ---- path 2: shift-based ------------------------------------------------------------
  logic                    f2_v, m2_v, i2_v;
  logic signed [FFT_W-1:0] f2_re [LB];
  logic signed [FFT_W-1:0] f2_im [LB];
  logic signed [ACC_W-1:0] m2_re [LB];
  logic signed [ACC_W-1:0] m2_im [LB];
  logic signed [YW-1:0]    y2 [LB];

  fft16 #(.MODE(MODE_MP2), .IN_W(DATA_W), .W(FFT_W)) u_fft2 (
    .clk, .rst_n, .in_valid(v2), .in_re(x2), .in_im(zero_im), .tw,
    .out_valid(f2_v), .out_re(f2_re), .out_im(f2_im));
  cmac #(.MODE(MODE_MP2)) u_mac2 (
    .clk, .rst_n, .in_valid(mac_valid && mode == MODE_MP2), .first(mac_first), .last(mac_last),
    .fx_re(f2_re), .fx_im(f2_im), .w_re, .w_im,
    .out_valid(m2_v), .out_re(m2_re), .out_im(m2_im));
  ifft16 #(.MODE(MODE_MP2), .IN_W(ACC_W), .OUT_W(YW)) u_ifft2 (
    .clk, .rst_n, .in_valid(m2_v), .in_re(m2_re), .in_im(m2_im), .tw,
    .out_valid(i2_v), .out_y(y2));

  // ---- Mux1: select the active mode's result -----------------------------------------
  logic                 y_v;
  logic signed [YW-1:0] y_sel [LB];
  always_comb begin
    y_v   = (mode == MODE_EQ) ? i1_v : i2_v;
    y_sel = (mode == MODE_EQ) ? y1 : y2;
  end

  // ---- BN and the linear bypass -------------------------------------------------------
  logic                     bn_v;
  logic signed [DATA_W-1:0] bn_y [LB];
  logic signed [DATA_W-1:0] lin_y [LB];

  bn_unit #(.IN_W(YW), .DEPTH(BN_DEPTH)) u_bn (
    .clk, .rst_n, .we(bn_we), .waddr(bn_waddr), .wdata(bn_wdata), .rd_addr(bn_rd_addr),
    .in_valid(y_v), .in_x(y_sel), .out_valid(bn_v), .out_y(bn_y));

  always_ff @(posedge clk) begin
    for (int c = 0; c < int'(LB); c++) begin
      if (y_sel[c] > YW'(YMAX))      lin_y[c] <= YMAX;
      else if (y_sel[c] < YW'(YMIN)) lin_y[c] <= YMIN;
      else                           lin_y[c] <= DATA_W'(y_sel[c]);
    end
  end

  // ---- Mux2 ----------------------------------------------------------------------------
  assign out_valid = bn_v;
  assign out_y     = bn_sel ? bn_y : lin_y;

endmodule
