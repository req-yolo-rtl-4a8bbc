// store_unit: the "store" stage, writing each batch of PE outputs to the output buffer.
//
// A batch is the NUM_PE output vectors (one output pixel of NUM_PE output blocks)
// delivered together by the computation unit. The unit latches the batch and writes one
// vector per cycle, vector p to address (g*NUM_PE + p)*HW + pix, skipping blocks at or
// beyond the layer's block count OB, where g is the current group and pix the pixel
// index within the (pooled) output map of HW pixels. It counts pixels and groups itself
// in the order the global controller visits them and pulses 'stored' when a batch is
// done; 'skip' marks each cycle in which a vector is dropped. A new batch must not
// arrive while one is being written (the controller spaces
// batches at least NUM_PE cycles apart; an assertion checks it).
// The load/compute/store split follows the paper; the serial write and the counters are
// this design's.
module store_unit
  import req_yolo_pkg::*;
#(
  parameter int unsigned NUM_PE = 32,
  parameter int unsigned AW     = 16,
  localparam int unsigned PAW   = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [6:0]               ob,
  input  logic [19:0]              hw,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_y [NUM_PE][LB],
  output logic                     we,
  output logic [AW-1:0]            waddr,
  output logic [LB*DATA_W-1:0]     wdata,
  output logic                     stored,
  output logic                     skip       // a vector of an idle PE was dropped
);

  logic                     busy;
  logic [PAW-1:0]           slot;
  logic [19:0]              pix;
  logic [6:0]               grp;
  logic signed [DATA_W-1:0] hold [NUM_PE][LB];
  logic [13:0]              blk;

  assign blk = 14'(grp) * 14'(NUM_PE) + 14'(slot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      slot   <= '0;
      pix    <= '0;
      grp    <= '0;
      stored <= 1'b0;
    end else begin
      stored <= 1'b0;
      if (start) begin
        busy <= 1'b0;
        slot <= '0;
        pix  <= '0;
        grp  <= '0;
      end else if (in_valid) begin
        busy <= 1'b1;
        slot <= '0;
      end else if (busy) begin
        if (slot == PAW'(NUM_PE - 1)) begin
          busy   <= 1'b0;
          stored <= 1'b1;
          if (pix == hw - 20'd1) begin
            pix <= '0;
            grp <= grp + 7'd1;
          end else begin
            pix <= pix + 20'd1;
          end
        end else begin
          slot <= slot + PAW'(1);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) hold <= in_y;
  end

  always_comb begin
    we    = busy && (blk < 14'(ob));
    skip  = busy && !(blk < 14'(ob));
    waddr = AW'(34'(blk) * 34'(hw) + 34'(pix));
    for (int c = 0; c < int'(LB); c++) wdata[c*DATA_W +: DATA_W] = hold[slot][c];
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !busy)
    else $error("store_unit: batch arrived while the previous one was being written");

endmodule
