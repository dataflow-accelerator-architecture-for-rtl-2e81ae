// tb_daa_clock_gate -- self-checking test of the lane clock gate.
//
// Drives the enable with random values that change only while the clock is high
// (as a flop on the ungated clock would), and counts gated-clock rising edges
// against the enable sampled at each clock rising edge. Also checks that the
// gated clock never rises while the clock is low, that an enable pulse during
// the high phase does not cut the pulse, and that test_en forces the clock on.
module tb_daa_clock_gate;
  logic clk = 1'b0, en = 1'b0, test_en = 1'b0, gclk;

  daa_clock_gate dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int gedges = 0;
  always @(posedge gclk) begin
    gedges++;
    check("gclk rises only with clk", clk);
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_edges;
    exp_edges = 0;
    for (int i = 0; i < 2000; i++) begin
      logic e, t;
      // low phase: set enable (it must be stable before the rising edge)
      e = $urandom_range(0, 1);
      t = ($urandom_range(0, 15) == 0);
      #2 en = e; test_en = t;
      #3 clk = 1'b1;
      if (e || t) exp_edges++;
      #1;
      check("gclk level in high phase", gclk == (e || t));
      // enable toggled during the high phase must not change gclk
      #1 en = ~en;
      #1 check("gclk glitch-free", gclk == (e || t));
      #2 clk = 1'b0;
      #1 check("gclk low with clk low", !gclk);
    end
    #1;
    check("edge count", gedges == exp_edges);
    $display("gated edges %0d of 2000", gedges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
