// weight_bram: on-chip weight memory holding quantised FFT(w) words of one PE.
//
// Simple dual-port RAM: the host writes words (one per cycle) before inference, and the
// global controller reads one word per cycle with one cycle of latency. A word holds
// the 9 complex 6-bit codes of one circulant block at one kernel position (108 bits).
// Only N/2+1 of the 16 bins are stored because FFT(w) of a real vector is conjugate-
// symmetric. The whole compressed model stays on chip, so no off-chip memory is read
// during inference.
// The paper gives the contents (quantised FFT(w), N/2+1 bins, all on chip); the port
// arrangement and depth are this design's: DEPTH = 4096 words per PE holds every layer
// of tiny YOLO when the 32 PEs each keep the blocks of their own output channels.
module weight_bram
  import req_yolo_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = WWORD_W,
  localparam int unsigned AW   = $clog2(DEPTH)
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
