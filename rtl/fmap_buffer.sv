// fmap_buffer: feature-map data buffer (input or output side of a layer).
//
// Simple dual-port RAM of 16-channel vectors (16 x 16 bits): one write and one read per
// cycle, read data one cycle after the address. Vector (block j, row r, column c) of an
// H x W map lives at address j*H*W + r*W + c. Two buffers are used in ping-pong: one is
// read as the input of a layer while the other receives its output, and the roles swap
// for the next layer, so intermediate maps never leave the chip.
// The paper says only that data buffers cache input images, intermediate results and
// layer outputs; the ping-pong use, the layout and DEPTH (65536 vectors, enough for a
// 208 x 208 x 16 map) are this design's.
module fmap_buffer
  import req_yolo_pkg::*;
#(
  parameter int unsigned DEPTH = 65536,
  localparam int unsigned WIDTH = LB * DATA_W,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
