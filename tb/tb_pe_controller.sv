// tb_pe_controller: checks the PE's local controller.
//
// The controller must latch mode and BN select on 'load' only, and deliver each term's
// valid/first/last flags and weight word exactly FFT_LAT (4) cycles after they enter,
// which is when the matching FFT output reaches the MAC. A random stream of terms is
// driven and compared with a delayed copy kept by the testbench.
module tb_pe_controller;
  import req_yolo_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0, cfg_bn_en = 0, in_valid = 0, in_first = 0, in_last = 0;
  qmode_e cfg_mode = MODE_EQ, mode;
  logic [WWORD_W-1:0] in_wword = '0, mac_wword;
  logic bn_sel, mac_valid, mac_first, mac_last;
  int checks = 0, failures = 0;

  pe_controller dut (.*);

  typedef struct packed { logic v, f, l; logic [WWORD_W-1:0] w; } term_t;
  term_t hist [$];

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    qmode_e  em;
    logic    eb;
    term_t   t;
    repeat (2) @(negedge clk);
    rst_n = 1;
    em = MODE_EQ; eb = 0;
    for (int i = 0; i < 4; i++) hist.push_back('0);
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // check outputs of the previous edge
      t = hist.pop_front();
      checks++;
      if (mac_valid != t.v || (t.v && (mac_first != t.f || mac_last != t.l || mac_wword != t.w))) begin
        failures++;
        if (failures < 10) $display("cycle %0d: term mismatch", cyc);
      end
      checks++;
      if (mode != em || bn_sel != eb) failures++;
      // drive new inputs
      load = ($urandom_range(0, 99) < 3);
      cfg_mode = qmode_e'($urandom_range(0, 1));
      cfg_bn_en = 1'($urandom_range(0, 1));
      in_valid = 1'($urandom_range(0, 1));
      in_first = 1'($urandom_range(0, 1));
      in_last = 1'($urandom_range(0, 1));
      in_wword = {$urandom, $urandom, $urandom, $urandom};
      hist.push_back('{in_valid, in_first, in_last, in_wword});
      if (load) begin em = cfg_mode; eb = cfg_bn_en; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
