// tb_daa_timebase -- self-checking test of the firing timebase.
//
// With CLK_HZ = 1000 and TICK_HZ = 100 the divider is 10: the test checks that
// the first tick comes 10 cycles after reset, that every tick is exactly one
// cycle wide and 10 cycles after the previous one, and that `now` counts them.
module tb_daa_timebase;
  import daa_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        tick;
  logic [31:0] now;

  daa_timebase #(.CLK_HZ(1000), .TICK_HZ(100)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, last, n;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    cyc = 0; last = 0; n = 0;
    repeat (1000) begin
      @(posedge clk); #1;
      cyc++;
      if (tick) begin
        n++;
        check("tick spacing", cyc - last == 10);
        last = cyc;
      end
      check("now counts ticks", now == 32'(n));
    end
    check("tick count", n == 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
