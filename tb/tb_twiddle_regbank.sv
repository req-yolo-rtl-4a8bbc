// tb_twiddle_regbank: checks reset values and host writes of the twiddle register bank.
//
// After reset entry k must hold round(2^14 cos(2 pi k/16)) and round(2^14 sin(2 pi k/16))
// and shift codes whose value equals the nearest two-term power-of-two approximation
// computed independently by the reference model. Random writes must then update one
// entry each, visible on the next cycle, and leave the others alone.
module tb_twiddle_regbank;
  import req_yolo_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [2:0] waddr = '0;
  twiddle_t wdata = '0;
  twiddle_t tw [LB/2];
  twiddle_t shadow [LB/2];
  int checks = 0, failures = 0;

  twiddle_regbank dut (.*);

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real c, s;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 8; k++) begin
      c = $cos(2.0 * PI * k / 16);
      s = $sin(2.0 * PI * k / 16);
      checks += 4;
      if (int'(tw[k].cos_q) != int'($floor(c * 16384.0 + 0.5))) failures++;
      if (int'(tw[k].sin_q) != int'($floor(s * 16384.0 + 0.5))) failures++;
      if (twsh_value(tw[k].cos_s) != int'(pow2_approx(q14(c)) * 16384.0)) begin
        failures++;
        $display("k=%0d cos shift form %0d", k, twsh_value(tw[k].cos_s));
      end
      if (twsh_value(tw[k].sin_s) != int'(pow2_approx(q14(s)) * 16384.0)) begin
        failures++;
        $display("k=%0d sin shift form %0d", k, twsh_value(tw[k].sin_s));
      end
      shadow[k] = tw[k];
    end
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      we = 1'($urandom_range(0, 1));
      waddr = 3'($urandom_range(0, 7));
      wdata = twiddle_t'({$urandom, $urandom, $urandom});
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
      we = 0;
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (tw[k] != shadow[k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
