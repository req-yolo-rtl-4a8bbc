// tb_bn_unit: checks batch normalisation with leaky ReLU against the reference.
//
// Random per-channel scale/bias tables are written to all entries; then random inputs
// (spanning small values, large values and saturation) are applied with random table
// addresses. Each output, one cycle later, must equal
// leaky(sat16(floor(x*scale/256) + bias)) with leaky slope 205/2048, exactly.
module tb_bn_unit;
  import req_yolo_pkg::*;
  import tb_ref_pkg::*;
  localparam int IW = ACC_W + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0, in_valid = 0, out_valid;
  logic [3:0] waddr = '0, rd_addr = '0;
  logic [2*BN_W*LB-1:0] wdata = '0;
  logic signed [IW-1:0] in_x [LB];
  logic signed [DATA_W-1:0] out_y [LB];
  int sc [16][LB], bi [16][LB];
  int checks = 0, failures = 0;

  bn_unit dut (.*);

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint xv [LB];
    int a;
    real r;
    foreach (in_x[c]) in_x[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 16; e++) begin
      for (int c = 0; c < LB; c++) begin
        sc[e][c] = int'($urandom_range(0, 2000)) - 300;
        bi[e][c] = int'($urandom_range(0, 8000)) - 4000;
        wdata[32*c + 16 +: 16] = 16'(sc[e][c]);
        wdata[32*c +: 16] = 16'(bi[e][c]);
      end
      @(negedge clk); we = 1; waddr = 4'(e);
      @(negedge clk); we = 0;
    end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      a = $urandom_range(0, 15);
      rd_addr = 4'(a);
      in_valid = 1;
      for (int c = 0; c < LB; c++) begin
        case (it % 3)
          0: xv[c] = longint'($urandom_range(0, 2000)) - 1000;
          1: xv[c] = longint'($urandom_range(0, 200000)) - 100000;
          default: xv[c] = (longint'($signed($urandom)) <<< 4);
        endcase
        in_x[c] = IW'(xv[c]);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int c = 0; c < LB; c++) begin
        r = bn_ref(real'(xv[c]), sc[a][c], bi[a][c]);
        checks++;
        if (real'(out_y[c]) != r) begin
          failures++;
          if (failures < 10) $display("x=%0d sc=%0d bi=%0d: got %0d exp %f", xv[c], sc[a][c], bi[a][c], out_y[c], r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
