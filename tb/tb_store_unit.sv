// tb_store_unit: checks how batches of PE outputs are written to the output buffer.
//
// With NUM_PE = 3, each batch of three output vectors must be written one vector per
// cycle to address (block*HW + pixel), pixels counting up and groups advancing after
// HW batches; blocks at or beyond 'ob' (the idle PEs of a partial last group) must not
// be written, and 'skip' must flag each of them. 'stored' must pulse once per batch. Batches arrive with random gaps of
// at least NUM_PE cycles, and 'start' must reset the counters for a new layer.
module tb_store_unit;
  import req_yolo_pkg::*;
  localparam int NP = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, in_valid = 0, we, stored, skip;
  logic [6:0] ob = '0;
  logic [19:0] hw = '0;
  logic signed [DATA_W-1:0] in_y [NP][LB];
  logic [15:0] waddr;
  logic [LB*DATA_W-1:0] wdata;
  int checks = 0, failures = 0;
  logic [LB*DATA_W-1:0] mem [int];
  int n_we = 0, n_st = 0, n_sk = 0;

  store_unit #(.NUM_PE(NP)) dut (.*);

  initial begin
    #5000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (we) begin
      n_we++;
      if (mem.exists(int'(waddr))) begin
        failures++;
        $display("address %0d written twice", waddr);
      end
      mem[int'(waddr)] = wdata;
    end
    if (stored) n_st++;
    if (skip) n_sk++;
    if (skip && we) begin failures++; $display("skip and write together"); end
  end

  task automatic layer(int nob, int nhw);
    logic [LB*DATA_W-1:0] expv [int];
    int ng;
    mem.delete();
    n_we = 0; n_st = 0; n_sk = 0;
    ob = 7'(nob); hw = 20'(nhw);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    ng = (nob + NP - 1) / NP;
    for (int g = 0; g < ng; g++)
      for (int p = 0; p < nhw; p++) begin
        @(negedge clk);
        in_valid = 1;
        for (int s = 0; s < NP; s++) begin
          for (int c = 0; c < LB; c++) in_y[s][c] = DATA_W'($urandom);
          if (g*NP + s < nob)
            for (int c = 0; c < LB; c++) expv[(g*NP + s)*nhw + p][c*DATA_W +: DATA_W] = in_y[s][c];
        end
        @(negedge clk);
        in_valid = 0;
        repeat (NP - 1 + $urandom_range(0, 3)) @(negedge clk);
      end
    repeat (NP + 2) @(negedge clk);
    checks += 3;
    if (n_sk != (ng*NP - nob) * nhw) begin failures++; $display("skips %0d", n_sk); end
    if (n_st != ng * nhw) begin failures++; $display("stored pulses %0d, expected %0d", n_st, ng*nhw); end
    if (n_we != nob * nhw) begin failures++; $display("writes %0d, expected %0d", n_we, nob*nhw); end
    foreach (expv[a]) begin
      checks++;
      if (!mem.exists(a) || mem[a] != expv[a]) begin
        failures++;
        if (failures < 10) $display("address %0d wrong or missing", a);
      end
    end
  endtask

  initial begin
    foreach (in_y[s, c]) in_y[s][c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    layer(5, 4);
    layer(3, 1);
    layer(1, 7);
    layer(7, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
