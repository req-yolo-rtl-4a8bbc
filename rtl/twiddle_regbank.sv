// twiddle_regbank: the register bank that feeds FFT twiddle factors to the FFT/IFFT kernels.
//
// Holds W^k = cos(2*pi*k/16) - j*sin(2*pi*k/16) for k = 0..7, each in two forms: a
// signed Q1.14 pair used by the multiplier-based FFT1, and a two-term power-of-two
// code used by the shift-based FFT2 (value = +-2^-a +- 2^-b, the nearest such value to
// the Q1.14 number). On reset every entry takes these default values; the host may
// overwrite an entry through the write port (one entry per cycle), which takes effect
// on the next cycle. All entries are read in parallel.
// The paper says the register bank stores the twiddle factors loaded into the FFT
// operators; the reset values, the shift form and the write port are this design's.
module twiddle_regbank
  import req_yolo_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     we,
  input  logic [2:0] waddr,
  input  twiddle_t wdata,
  output twiddle_t tw [LB/2]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(LB/2); k++) tw[k] <= default_twiddle(k);
    end else if (we) begin
      tw[waddr] <= wdata;
    end
  end

endmodule
