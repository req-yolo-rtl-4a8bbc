// pe_controller: the PE's local controller.
//
// At the start of a layer (load) it latches the layer's quantisation mode, which drives
// the 1-2 decoder at the PE input and Mux1 after the two IFFTs, and the BN enable,
// which drives Mux2. While the layer runs it delays the weight word and the
// valid/first/last framing of each incoming term by the FFT latency (FFT_LAT cycles),
// so that the weights of a term reach the MAC in the same cycle as the transform of
// its input vector.
// The paper gives the controller's role (mode selection under its control); the delay
// line and the latching on 'load' are this design's.
module pe_controller
  import req_yolo_pkg::*;
#(
  parameter int unsigned FFT_LAT = LOG2LB
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  qmode_e             cfg_mode,
  input  logic               cfg_bn_en,
  input  logic               in_valid,
  input  logic               in_first,
  input  logic               in_last,
  input  logic [WWORD_W-1:0] in_wword,
  output qmode_e             mode,
  output logic               bn_sel,
  output logic               mac_valid,
  output logic               mac_first,
  output logic               mac_last,
  output logic [WWORD_W-1:0] mac_wword
);

  logic [FFT_LAT-1:0] v_d, f_d, l_d;
  logic [WWORD_W-1:0] w_d [FFT_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode   <= MODE_EQ;
      bn_sel <= 1'b0;
      v_d    <= '0;
    end else begin
      if (load) begin
        mode   <= cfg_mode;
        bn_sel <= cfg_bn_en;
      end
      v_d <= {v_d[FFT_LAT-2:0], in_valid};
    end
  end

  always_ff @(posedge clk) begin
    f_d    <= {f_d[FFT_LAT-2:0], in_first};
    l_d    <= {l_d[FFT_LAT-2:0], in_last};
    w_d[0] <= in_wword;
    for (int i = 1; i < int'(FFT_LAT); i++) w_d[i] <= w_d[i-1];
  end

  assign mac_valid = v_d[FFT_LAT-1];
  assign mac_first = f_d[FFT_LAT-1];
  assign mac_last  = l_d[FFT_LAT-1];
  assign mac_wword = w_d[FFT_LAT-1];

endmodule
