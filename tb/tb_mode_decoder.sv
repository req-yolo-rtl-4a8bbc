// tb_mode_decoder: checks the 1-2 mode decoder that steers input vectors to FFT1 or FFT2.
//
// For random vectors, valid values and modes, the selected output must carry the input
// with the input's valid, and the other output must be idle (valid 0, data 0).
module tb_mode_decoder;
  import req_yolo_pkg::*;

  qmode_e mode;
  logic in_valid, v1, v2;
  logic signed [DATA_W-1:0] in_x [LB], x1 [LB], x2 [LB];
  int checks = 0, failures = 0;

  mode_decoder dut (.*);

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      mode = qmode_e'($urandom_range(0, 1));
      in_valid = 1'($urandom_range(0, 1));
      for (int c = 0; c < LB; c++) in_x[c] = DATA_W'($urandom);
      #1;
      checks++;
      if (mode == MODE_EQ) begin
        if (v1 != in_valid || v2 != 1'b0 || x1 != in_x) failures++;
        foreach (x2[c]) if (x2[c] != 0) failures++;
      end else begin
        if (v2 != in_valid || v1 != 1'b0 || x2 != in_x) failures++;
        foreach (x1[c]) if (x1[c] != 0) failures++;
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
