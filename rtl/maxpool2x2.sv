// maxpool2x2: 2x2, stride-2 max pooling on the stream of output vectors of one PE.
//
// The global controller visits the four output pixels of each pooling window one after
// the other, so pooling needs no line buffer: the unit keeps a running element-wise
// maximum of 16-channel vectors and emits it on every fourth valid input. With
// pool_en low every valid input is passed on. Both cases take one register stage.
// 'clear' (asserted at the start of a layer) restarts the window count.
// The paper gives the layer's function (2x2 max window, stride 2, after each 3x3 CONV);
// the window-ordered traversal that makes it a streaming unit is this design's.
module maxpool2x2
  import req_yolo_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     pool_en,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_y [LB],
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_y [LB]
);

  logic [1:0]               cnt;
  logic signed [DATA_W-1:0] run [LB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && (!pool_en || cnt == 2'd3);
      if (clear)         cnt <= '0;
      else if (in_valid) cnt <= pool_en ? cnt + 2'd1 : 2'd0;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int c = 0; c < int'(LB); c++) begin
        if (!pool_en) begin
          out_y[c] <= in_y[c];
        end else if (cnt == 2'd0) begin
          run[c] <= in_y[c];
        end else if (cnt == 2'd3) begin
          out_y[c] <= (in_y[c] > run[c]) ? in_y[c] : run[c];
        end else if (in_y[c] > run[c]) begin
          run[c] <= in_y[c];
        end
      end
    end
  end

endmodule
