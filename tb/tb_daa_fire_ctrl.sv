// tb_daa_fire_ctrl -- self-checking test of the node firing rule.
//
// A three-input controller with a period of 5 ticks (a tick every 4 cycles) is
// driven with random fresh/ever/busy inputs. A model here keeps its own
// elapsed-tick count and predicts fire, cause, consume and the three counters
// every cycle. Directed phases check the exact cycle a timer firing comes
// (PERIOD ticks after the last firing) and that a node busy at its firing time
// records one miss.
module tb_daa_fire_ctrl;
  import daa_pkg::*;

  localparam int unsigned N_IN = 3, PERIOD = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic tick, busy;
  logic [N_IN-1:0] in_fresh, in_ever, consume;
  logic fire;
  fire_cause_e cause;
  cnt_t fire_cnt, timer_fire_cnt, miss_cnt;

  daa_fire_ctrl #(.N_IN(N_IN), .PERIOD(PERIOD)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int m_el, m_fires, m_tfires, m_miss, cyc;
  logic m_fw, m_due;
  int n_data = 0, n_timer = 0, n_miss = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic step(logic tk, logic [N_IN-1:0] fr, logic [N_IN-1:0] ev, logic bz);
    logic boundary, tdue, e_fire, e_timer;
    @(negedge clk);
    tick = tk; in_fresh = fr; in_ever = ev; busy = bz;
    #1;
    boundary = tk && (m_el == PERIOD - 1);
    tdue     = m_due || (boundary && !m_fw);
    e_fire   = !bz && ((&fr) || (tdue && (&ev)));
    e_timer  = !(&fr);
    check("fire", fire == e_fire);
    check("consume", consume == {N_IN{e_fire}});
    if (e_fire) check("cause", cause == (e_timer ? FIRE_TIMER : FIRE_DATA));
    check("fire_cnt", int'(fire_cnt) == m_fires);
    check("timer_fire_cnt", int'(timer_fire_cnt) == m_tfires);
    check("miss_cnt", int'(miss_cnt) == m_miss);
    if (boundary && !m_fw && m_due && !e_fire) begin m_miss++; n_miss++; end
    if (boundary) m_el = 0; else if (tk) m_el++;
    m_fw  = !boundary && (m_fw || e_fire);
    m_due = tdue && !e_fire;
    if (e_fire) begin
      m_fires++;
      if (e_timer) begin m_tfires++; n_timer++; end else n_data++;
    end
    cyc++;
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int first_fire;
    tick = 0; busy = 0; in_fresh = '0; in_ever = '0;
    m_el = 0; m_fires = 0; m_tfires = 0; m_miss = 0; m_fw = 0; m_due = 0; cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // all inputs fresh -> data firing at once
    step(1'b0, 3'b111, 3'b111, 1'b0);
    @(posedge clk); #1;
    check("data fire first cycle", fire_cnt == 16'd1 && timer_fire_cnt == 16'd0);
    // inputs stale but valid: the window of the data firing ends at the 5th tick
    // (i = 19); the next window has no firing and ends at i = 39 -> timer firing
    first_fire = -1;
    for (int i = 0; i < 40; i++) begin
      step((i % 4) == 3, 3'b001, 3'b111, 1'b0);
      if (first_fire < 0 && int'(fire_cnt) == 1 && fire) first_fire = i;
    end
    check("timer fire cycle", first_fire == 39);
    // busy for more than a whole window after the timer firing is due -> a miss
    for (int i = 0; i < 80; i++) step((i % 4) == 3, 3'b000, 3'b111, i < 60);
    check("miss recorded", miss_cnt >= 16'd1);
    // random
    for (int i = 0; i < 6000; i++)
      step(($urandom_range(0, 3) == 0), 3'($urandom_range(0, 7)) | 3'($urandom_range(0, 7)),
           ($urandom_range(0, 9) == 0) ? 3'($urandom_range(0, 7)) : 3'b111,
           ($urandom_range(0, 9) < 3));
    check("data fires", n_data > 0);
    check("timer fires", n_timer > 0);
    check("misses", n_miss > 0);
    $display("data=%0d timer=%0d miss=%0d", n_data, n_timer, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
