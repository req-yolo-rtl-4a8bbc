// compute_unit: the computation unit, NUM_PE processing elements working side by side.
//
// All PEs receive the same input vector and framing each cycle; each PE has its own
// weight word (read from its own weight bank) and its own BN table, so PE p computes
// output block g*NUM_PE + p of the current group g. Behind every PE sits a 2x2 max-
// pooling unit. All outputs of a batch leave in the same cycle (out_valid), 11 cycles
// after the term that closed the batch (PE 10 + pooling 1).
// The paper shows the unit as sets of PEs next to the on-chip BRAM; the broadcast of
// the input vector and the per-PE output blocks are this design's. NUM_PE = 32 is
// derived, not printed: about 32 PEs are needed to reach the reported latency of the
// largest layers at 200 MHz with one term per PE per cycle.
module compute_unit
  import req_yolo_pkg::*;
#(
  parameter int unsigned NUM_PE   = 32,
  parameter int unsigned BN_DEPTH = 16,
  localparam int unsigned PAW     = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int unsigned BAW     = $clog2(BN_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  qmode_e                   cfg_mode,
  input  logic                     cfg_bn_en,
  input  logic                     cfg_pool_en,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic signed [DATA_W-1:0] in_x [LB],
  input  logic [WWORD_W-1:0]       in_wword [NUM_PE],
  input  twiddle_t                 tw [LB/2],
  input  logic                     bn_we,
  input  logic [PAW-1:0]           bn_pe,
  input  logic [BAW-1:0]           bn_waddr,
  input  logic [2*BN_W*LB-1:0]     bn_wdata,
  input  logic [BAW-1:0]           bn_rd_addr,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_y [NUM_PE][LB]
);

  logic pool_en;
  logic pe_v   [NUM_PE];
  logic pool_v [NUM_PE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    pool_en <= 1'b0;
    else if (load) pool_en <= cfg_pool_en;
  end

  for (genvar p = 0; p < int'(NUM_PE); p++) begin : g_pe
    logic signed [DATA_W-1:0] y [LB];
    pe #(.BN_DEPTH(BN_DEPTH)) u_pe (
      .clk, .rst_n, .load, .cfg_mode, .cfg_bn_en,
      .in_valid, .in_first, .in_last, .in_x, .in_wword(in_wword[p]), .tw,
      .bn_we(bn_we && bn_pe == PAW'(p)), .bn_waddr, .bn_wdata, .bn_rd_addr,
      .out_valid(pe_v[p]), .out_y(y));
    maxpool2x2 u_pool (
      .clk, .rst_n, .clear(load), .pool_en, .in_valid(pe_v[p]), .in_y(y),
      .out_valid(pool_v[p]), .out_y(out_y[p]));
  end

  // every PE sees the same framing, so PE 0 speaks for all
  assign out_valid = pool_v[0];

endmodule
