// tb_maxpool2x2: checks 2x2 max pooling and the pass-through mode.
//
// With pooling on, random vectors arrive in groups of four (with random idle cycles in
// between); one output vector per group must appear, equal to the channel-wise maximum
// of the group. With pooling off every input must come out unchanged one cycle later.
// A 'clear' in the middle of a group restarts the window count.
module tb_maxpool2x2;
  import req_yolo_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, pool_en = 0, in_valid = 0, out_valid;
  logic signed [DATA_W-1:0] in_y [LB], out_y [LB];
  int checks = 0, failures = 0;
  logic signed [DATA_W-1:0] expq [$][LB];
  int n_out = 0;

  maxpool2x2 dut (.*);

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      n_out++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        if (out_y != expq[0]) begin
          failures++;
          $display("mismatch at output %0d: got %0d exp %0d", n_out, out_y[0], expq[0][0]);
        end
        void'(expq.pop_front());
      end
    end
  end

  task automatic send(logic signed [DATA_W-1:0] v [LB]);
    @(negedge clk);
    in_valid = 1; in_y = v;
    @(negedge clk);
    in_valid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  initial begin
    logic signed [DATA_W-1:0] v [LB], m [LB];
    foreach (in_y[c]) in_y[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 4; ph++) begin
      pool_en = ph[0];
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      if (ph == 3) begin
        // partial group, then clear: must not produce an output
        for (int q = 0; q < 2; q++) begin
          foreach (v[c]) v[c] = DATA_W'($urandom);
          send(v);
        end
        @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      end
      for (int g = 0; g < 200; g++) begin
        if (pool_en) begin
          for (int q = 0; q < 4; q++) begin
            foreach (v[c]) v[c] = DATA_W'($urandom);
            foreach (v[c]) if (q == 0 || v[c] > m[c]) m[c] = v[c];
            if (q == 3) expq.push_back(m);
            send(v);
          end
        end else begin
          foreach (v[c]) v[c] = DATA_W'($urandom);
          expq.push_back(v);
          send(v);
        end
      end
    end
    repeat (4) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("%0d outputs missing", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
