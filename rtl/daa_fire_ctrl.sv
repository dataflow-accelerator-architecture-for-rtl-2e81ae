// daa_fire_ctrl -- firing rule of one node of the dataflow graph.
//
// A node fires on its own, with no CPU involved, as soon as one of two things
// holds while it is idle:
//   * data-driven: every operand buffer holds a fresh token;
//   * timer-driven: a whole firing period has passed without a firing. The
//     node then fires with the latest token of every input, fresh or not, so it
//     never blocks on a late producer. An input that has never received a token
//     holds it back.
// Time is cut into fixed windows of PERIOD timebase ticks, which data firings
// do not restart. The timer firing is due at the end of a window that had no
// firing, and stays due until the node fires. So a node whose inputs come at its
// own frequency fires on data alone, and a node whose inputs are slower (control
// at 100 Hz behind 10 Hz planning) fills every empty window with a timer firing.
// If a further window passes while the timer firing is still due, the node has
// missed its firing frequency; that counts once per window in miss_cnt.
//
// The data-driven rule and the non-blocking firing at the firing time follow the
// source. The fixed windows, the tie rule (data beats timer) and the miss counter
// are this design's own.
//
// Timing: fire is combinational from in_fresh/in_ever/busy and the timer state,
// so a timer firing can come in the very cycle of the window's last tick.
// consume pulses with fire on every input (a buffer with nothing fresh ignores
// it). The counters update on the clock edge that ends the fire cycle.
module daa_fire_ctrl
  import daa_pkg::*;
#(
  parameter int unsigned N_IN   = 1,
  parameter int unsigned PERIOD = 100   // firing period in timebase ticks
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            tick,           // one-cycle timebase pulse
  input  logic [N_IN-1:0] in_fresh,
  input  logic [N_IN-1:0] in_ever,
  input  logic            busy,           // node still executing or emitting
  output logic            fire,
  output fire_cause_e     cause,
  output logic [N_IN-1:0] consume,
  output cnt_t            fire_cnt,
  output cnt_t            timer_fire_cnt,
  output cnt_t            miss_cnt
);
  localparam int unsigned EW = (PERIOD > 1) ? $clog2(PERIOD) : 1;

  logic [EW-1:0] elapsed;     // ticks into the current window
  logic          fired_win;   // the node fired in the current window
  logic          due;         // a timer firing is owed from an earlier window
  logic          boundary, timer_due, all_fresh, all_ever;

  assign boundary  = tick && (elapsed == EW'(PERIOD - 1));
  assign timer_due = due || (boundary && !fired_win);
  assign all_fresh = &in_fresh;
  assign all_ever  = &in_ever;
  assign fire      = !busy && (all_fresh || (timer_due && all_ever));
  assign cause     = all_fresh ? FIRE_DATA : FIRE_TIMER;
  assign consume   = {N_IN{fire}};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      elapsed        <= '0;
      fired_win      <= 1'b0;
      due            <= 1'b0;
      fire_cnt       <= '0;
      timer_fire_cnt <= '0;
      miss_cnt       <= '0;
    end else begin
      if (boundary)  elapsed <= '0;
      else if (tick) elapsed <= elapsed + 1'b1;
      // a firing in the boundary cycle belongs to the window that ends
      fired_win <= !boundary && (fired_win || fire);
      due       <= timer_due && !fire;
      if (boundary && !fired_win && due && !fire) miss_cnt <= miss_cnt + 1'b1;
      if (fire) begin
        fire_cnt <= fire_cnt + 1'b1;
        if (cause == FIRE_TIMER) timer_fire_cnt <= timer_fire_cnt + 1'b1;
      end
    end
  end

  // A node never fires while busy.
  a_not_busy: assert property (@(posedge clk) disable iff (!rst_n) fire |-> !busy);

endmodule
