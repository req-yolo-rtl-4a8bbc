// req_yolo_top: block-circulant CONV accelerator for tiny YOLO, FPGA fabric side.
//
// Runs one CONV layer at a time entirely from on-chip memory. The compressed model,
// FFT(w) in 6-bit codes, sits in NUM_PE weight banks (bank p holds the blocks of the
// output channels computed by PE p); two feature buffers A and B hold the input map and
// receive the output map, swapping roles from one layer to the next (cfg.src_b). The
// global controller walks the layer, the computation unit (NUM_PE PEs, each
// FFT -> MAC -> IFFT -> BN, plus 2x2 max pooling) computes NUM_PE output blocks of one
// pixel at a time, and the store unit writes them back.
//
// Host side (stands in for the PCIe link of the host CPU, which is not part of this
// RTL): while the accelerator is idle the host may write weight words, BN tables,
// twiddle factors and feature vectors, and read feature vectors (one cycle latency).
// It then presents a layer_cfg_t on cfg_in with a one-cycle 'start'; 'busy' stays high
// until 'done' pulses. Host buffer accesses during 'busy' are ignored.
// The split into buffers, computation unit, BRAM and global controller follows the
// paper's architecture figure; the host port protocol is this design's.
module req_yolo_top
  import req_yolo_pkg::*;
#(
  parameter int unsigned NUM_PE      = 32,
  parameter int unsigned FMAP_DEPTH  = 65536,
  parameter int unsigned WBANK_DEPTH = 4096,
  parameter int unsigned BN_DEPTH    = 16,
  localparam int unsigned PAW        = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int unsigned FAW        = $clog2(FMAP_DEPTH),
  localparam int unsigned WAW        = $clog2(WBANK_DEPTH),
  localparam int unsigned BAW        = $clog2(BN_DEPTH),
  localparam int unsigned VW         = LB * DATA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // layer control
  input  logic                 start,
  input  layer_cfg_t           cfg_in,
  output logic                 busy,
  output logic                 done,
  // host: weights
  input  logic                 hw_we,
  input  logic [PAW-1:0]       hw_bank,
  input  logic [WAW-1:0]       hw_addr,
  input  logic [WWORD_W-1:0]   hw_data,
  // host: BN tables
  input  logic                 hb_we,
  input  logic [PAW-1:0]       hb_pe,
  input  logic [BAW-1:0]       hb_addr,
  input  logic [2*BN_W*LB-1:0] hb_data,
  // host: twiddle register bank
  input  logic                 ht_we,
  input  logic [2:0]           ht_addr,
  input  twiddle_t             ht_data,
  // host: feature buffers (buf 0 = A, 1 = B)
  input  logic                 hf_we,
  input  logic                 hf_wbuf,
  input  logic [FAW-1:0]       hf_waddr,
  input  logic [VW-1:0]        hf_wdata,
  input  logic                 hf_re,
  input  logic                 hf_rbuf,
  input  logic [FAW-1:0]       hf_raddr,
  output logic [VW-1:0]        hf_rdata,
  // activity, for monitoring
  output logic                 stall_gap,
  output logic                 stall_drain,
  output logic                 pad_term,     // a term of the zero padding was issued
  output logic                 skip_block    // an idle PE's output vector was dropped
);

  layer_cfg_t cfg;
  logic       load, rd_en, t_valid, t_first, t_last, t_pad, stored;
  logic [19:0]    hw_out;
  logic [FAW-1:0] rd_addr;
  logic [WAW-1:0] w_addr;
  logic [BAW-1:0] bn_addr;

  global_controller #(.NUM_PE(NUM_PE), .FAW(FAW), .WAW(WAW), .BAW(BAW)) u_ctrl (
    .clk, .rst_n, .start(start && !busy), .cfg_in, .stored, .cfg, .busy, .done, .load,
    .hw_out, .rd_en, .rd_addr, .w_addr, .bn_addr, .t_valid, .t_first, .t_last, .t_pad,
    .stall_gap, .stall_drain);

  // ---- twiddle register bank ------------------------------------------------------------
  twiddle_t tw [LB/2];
  twiddle_regbank u_tw (.clk, .rst_n, .we(ht_we), .waddr(ht_addr), .wdata(ht_data), .tw);

  // ---- weight banks ----------------------------------------------------------------------
  logic [WWORD_W-1:0] wword [NUM_PE];
  for (genvar p = 0; p < int'(NUM_PE); p++) begin : g_bank
    weight_bram #(.DEPTH(WBANK_DEPTH)) u_wb (
      .clk, .we(hw_we && hw_bank == PAW'(p)), .waddr(hw_addr), .wdata(hw_data),
      .re(busy), .raddr(w_addr), .rdata(wword[p]));
  end

  // ---- feature buffers (ping-pong) -------------------------------------------------------
  logic           st_we;
  logic [FAW-1:0] st_addr;
  logic [VW-1:0]  st_data;
  logic           a_we, b_we, a_re, b_re;
  logic [FAW-1:0] a_waddr, b_waddr, a_raddr, b_raddr;
  logic [VW-1:0]  a_wdata, b_wdata, a_rdata, b_rdata;
  logic           rsel_b;   // which buffer the last read came from

  always_comb begin
    if (busy) begin
      // source buffer read by the controller, destination written by the store unit
      a_re    = rd_en && !cfg.src_b;
      b_re    = rd_en &&  cfg.src_b;
      a_raddr = rd_addr;
      b_raddr = rd_addr;
      a_we    = st_we &&  cfg.src_b;
      b_we    = st_we && !cfg.src_b;
      a_waddr = st_addr;
      b_waddr = st_addr;
      a_wdata = st_data;
      b_wdata = st_data;
    end else begin
      a_re    = hf_re && !hf_rbuf;
      b_re    = hf_re &&  hf_rbuf;
      a_raddr = hf_raddr;
      b_raddr = hf_raddr;
      a_we    = hf_we && !hf_wbuf;
      b_we    = hf_we &&  hf_wbuf;
      a_waddr = hf_waddr;
      b_waddr = hf_waddr;
      a_wdata = hf_wdata;
      b_wdata = hf_wdata;
    end
  end

  fmap_buffer #(.DEPTH(FMAP_DEPTH)) u_buf_a (
    .clk, .we(a_we), .waddr(a_waddr), .wdata(a_wdata), .re(a_re), .raddr(a_raddr), .rdata(a_rdata));
  fmap_buffer #(.DEPTH(FMAP_DEPTH)) u_buf_b (
    .clk, .we(b_we), .waddr(b_waddr), .wdata(b_wdata), .re(b_re), .raddr(b_raddr), .rdata(b_rdata));

  always_ff @(posedge clk) begin
    if (a_re)      rsel_b <= 1'b0;
    else if (b_re) rsel_b <= 1'b1;
  end
  assign hf_rdata = rsel_b ? b_rdata : a_rdata;

  // ---- load stage: input vector of the current term (zero in the padding) ---------------
  logic signed [DATA_W-1:0] x [LB];
  always_comb begin
    for (int c = 0; c < int'(LB); c++)
      x[c] = t_pad ? '0 : $signed(hf_rdata[c*DATA_W +: DATA_W]);
  end

  // ---- computation unit ------------------------------------------------------------------
  logic                     cu_valid;
  logic signed [DATA_W-1:0] cu_y [NUM_PE][LB];

  compute_unit #(.NUM_PE(NUM_PE), .BN_DEPTH(BN_DEPTH)) u_cu (
    .clk, .rst_n, .load, .cfg_mode(cfg.mode), .cfg_bn_en(cfg.bn_en), .cfg_pool_en(cfg.pool_en),
    .in_valid(t_valid), .in_first(t_first), .in_last(t_last), .in_x(x), .in_wword(wword), .tw,
    .bn_we(hb_we), .bn_pe(hb_pe), .bn_waddr(hb_addr), .bn_wdata(hb_data), .bn_rd_addr(bn_addr),
    .out_valid(cu_valid), .out_y(cu_y));

  // ---- store stage -----------------------------------------------------------------------
  store_unit #(.NUM_PE(NUM_PE), .AW(FAW)) u_store (
    .clk, .rst_n, .start(load), .ob(cfg.ob), .hw(hw_out), .in_valid(cu_valid), .in_y(cu_y),
    .we(st_we), .waddr(st_addr), .wdata(st_data), .stored, .skip(skip_block));

  assign pad_term = t_valid && t_pad;

endmodule
