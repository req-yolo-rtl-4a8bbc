// tb_weight_bram: random write/read traffic against a shadow copy of the weight bank.
//
// Writes fill the whole (reduced) depth first, then random reads and writes run
// together; each read must return, one cycle later, the last word written to that
// address, including when the read and write address collide (old data is read).
module tb_weight_bram;
  import req_yolo_pkg::*;
  localparam int D = 64;

  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [WWORD_W-1:0] wdata = '0, rdata;
  logic [WWORD_W-1:0] shadow [D];
  int checks = 0, failures = 0;

  weight_bram #(.DEPTH(D)) dut (.*);

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WWORD_W-1:0] exp;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = {$urandom, $urandom, $urandom, $urandom};
      shadow[a] = wdata;
    end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      we = 1'($urandom_range(0, 1)); waddr = 6'($urandom_range(0, D-1));
      wdata = {$urandom, $urandom, $urandom, $urandom};
      re = 1; raddr = (it % 5 == 0) ? waddr : 6'($urandom_range(0, D-1));
      exp = shadow[raddr];
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata !== exp) begin
        failures++;
        $display("addr %0d: got %h exp %h", raddr, rdata, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
