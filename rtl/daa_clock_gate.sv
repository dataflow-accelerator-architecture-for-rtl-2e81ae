// daa_clock_gate -- glitch-free clock gate for one accelerator lane.
//
// The enable is captured by a latch that is open while the clock is low, and the
// gated clock is the clock ANDed with the latched enable. An enable change
// therefore takes effect only from the next rising edge, and no gated-clock pulse
// is ever cut short. test_en forces the clock on for scan test. This is the usual
// integrated clock-gating cell. The source names clock gating only as the light
// way to scale hardware; the cell is this design's own.
//
// The latch is intended: it is what makes the gate glitch-free. In a real flow
// the library's clock-gating cell replaces this module.
//
// Timing: en sampled while clk is low; gclk follows clk for every high phase that
// starts with the latch holding 1.
module daa_clock_gate (
  input  logic clk,
  input  logic en,
  input  logic test_en,
  output logic gclk
);
  logic en_lat;

  always_latch
    if (!clk) en_lat = en || test_en;

  assign gclk = clk & en_lat;

endmodule
