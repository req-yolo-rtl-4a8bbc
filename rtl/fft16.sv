// fft16: 16-point fully pipelined radix-2 FFT kernel (the paper's FFT1 / FFT2).
//
// Decimation-in-time: the inputs are taken in bit-reversed order and pass through
// log2(16) = 4 butterfly stages of 16/2 = 8 butterflies each, one register per stage,
// so a new 16-point complex vector is accepted every cycle and its transform appears
// 4 cycles later in natural order (out_valid follows in_valid by 4 cycles). Values
// are not scaled: the width grows from IN_W to W = IN_W + 5 at the input and stays W.
//
// Twiddle products (stage with span m, butterfly j: W^(j*16/m)):
//   * W^0 = 1 needs no multiplier and W^4 = -j is a swap and a negation; neither uses
//     the twiddle bank (the paper's DSP-saving rule for twiddles 1, -1, j, -j);
//   * other twiddles, MODE = MODE_EQ (FFT1): four multiplications by the Q1.14
//     cos/sin values, rounded back to integer;
//   * MODE = MODE_MP2 (FFT2): each multiplication becomes at most two arithmetic
//     shifts and an add, using the power-of-two form of the twiddle.
// The stage count, butterflies per stage, one-vector-per-cycle rate and the two
// butterfly flavours follow the paper; the fixed-point format and rounding are this
// design's choices.
module fft16
  import req_yolo_pkg::*;
#(
  parameter qmode_e      MODE = MODE_EQ,
  parameter int unsigned IN_W = DATA_W,
  parameter int unsigned W    = IN_W + LOG2LB + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [IN_W-1:0] in_re [LB],
  input  logic signed [IN_W-1:0] in_im [LB],
  input  twiddle_t            tw [LB/2],
  output logic                out_valid,
  output logic signed [W-1:0] out_re [LB],
  output logic signed [W-1:0] out_im [LB]
);

  localparam int unsigned PW = W + TW_W;   // product width

  function automatic int unsigned bitrev4(int unsigned i);
    return int'({i[0], i[1], i[2], i[3]});
  endfunction

  // Multiply a value by a shift-form twiddle component, result in Q1.14 units.
  // Written without data-dependent branches: each term is masked by its enable and
  // negated as (t ^ -neg) + neg, so the only operators are one shifter per term and adds.
  function automatic logic signed [PW-1:0] shterm(logic signed [PW-1:0] xe, logic en,
                                                  logic neg, logic [3:0] sh);
    logic signed [PW-1:0] t;
    t = (xe <<< (TW_FRAC - sh)) & {PW{en}};
    return (t ^ {PW{neg}}) + PW'(neg);
  endfunction

  function automatic logic signed [PW-1:0] shmul(logic signed [W-1:0] x, twsh_t t);
    return shterm(PW'(x), t.en1, t.neg1, t.sh1) + shterm(PW'(x), t.en2, t.neg2, t.sh2);
  endfunction

  function automatic logic signed [W-1:0] rnd(logic signed [PW-1:0] p);
    logic signed [PW-1:0] r;
    r = (p + (PW'(1) <<< (TW_FRAC - 1))) >>> TW_FRAC;
    return r[W-1:0];
  endfunction

  logic [LOG2LB:1] vld;

  for (genvar s = 0; s < int'(LOG2LB); s++) begin : g_stage
    localparam int unsigned HALF = 1 << s;
    localparam int unsigned M    = HALF * 2;
    logic signed [W-1:0] i_re [LB];   // stage input
    logic signed [W-1:0] i_im [LB];
    logic signed [W-1:0] o_re [LB];   // stage output register
    logic signed [W-1:0] o_im [LB];
    if (s == 0) begin : g_in
      for (genvar i = 0; i < int'(LB); i++) begin : g_br
        assign i_re[i] = W'(in_re[bitrev4(i)]);
        assign i_im[i] = W'(in_im[bitrev4(i)]);
      end
    end else begin : g_chain
      assign i_re = g_stage[s-1].o_re;
      assign i_im = g_stage[s-1].o_im;
    end
    for (genvar b = 0; b < int'(LB / 2); b++) begin : g_bfly
      localparam int unsigned J   = b % HALF;
      localparam int unsigned TOP = (b / HALF) * M + J;
      localparam int unsigned BOT = TOP + HALF;
      localparam int unsigned K   = J * (LB / M);
      logic signed [W-1:0] t_re, t_im;   // twiddled bottom input
      if (K == 0) begin : g_w0
        assign t_re = i_re[BOT];
        assign t_im = i_im[BOT];
      end else if (K == LB / 4) begin : g_wmj
        // (a + jb) * (-j) = b - ja
        assign t_re = i_im[BOT];
        assign t_im = -i_re[BOT];
      end else if (MODE == MODE_EQ) begin : g_wmul
        // (a + jb)(c - js) = (ac + bs) + j(bc - as)
        logic signed [PW-1:0] p_re, p_im;
        assign p_re = PW'(i_re[BOT]) * PW'(tw[K].cos_q) + PW'(i_im[BOT]) * PW'(tw[K].sin_q);
        assign p_im = PW'(i_im[BOT]) * PW'(tw[K].cos_q) - PW'(i_re[BOT]) * PW'(tw[K].sin_q);
        assign t_re = rnd(p_re);
        assign t_im = rnd(p_im);
      end else begin : g_wshift
        logic signed [PW-1:0] p_re, p_im;
        assign p_re = shmul(i_re[BOT], tw[K].cos_s) + shmul(i_im[BOT], tw[K].sin_s);
        assign p_im = shmul(i_im[BOT], tw[K].cos_s) - shmul(i_re[BOT], tw[K].sin_s);
        assign t_re = rnd(p_re);
        assign t_im = rnd(p_im);
      end
      always_ff @(posedge clk) begin
        o_re[TOP] <= i_re[TOP] + t_re;
        o_im[TOP] <= i_im[TOP] + t_im;
        o_re[BOT] <= i_re[TOP] - t_re;
        o_im[BOT] <= i_im[TOP] - t_im;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LOG2LB-1:1], in_valid};
  end

  assign out_valid = vld[LOG2LB];
  assign out_re    = g_stage[LOG2LB-1].o_re;
  assign out_im    = g_stage[LOG2LB-1].o_im;

endmodule
