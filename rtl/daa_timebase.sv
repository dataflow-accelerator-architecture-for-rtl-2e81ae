// daa_timebase -- firing timebase shared by all nodes.
//
// Divides the core clock down to a tick of TICK_HZ: tick is high for one cycle
// every CLK_HZ / TICK_HZ cycles. The firing controllers count these ticks to
// enforce each node's prescribed firing frequency, so a 10 Hz node has a period
// of TICK_HZ / 10 ticks. A free-running tick count is also given out, as a
// time stamp. The clock frequency and the tick rate are this design's own
// choices; the source gives only the firing frequencies themselves.
//
// Timing: the first tick comes DIV cycles after reset is released, then every
// DIV cycles.
module daa_timebase
  import daa_pkg::*;
#(
  parameter int unsigned CLK_HZ  = 100_000_000,
  parameter int unsigned TICK_HZ = 10_000
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        tick,
  output logic [31:0] now        // ticks since reset
);
  localparam int unsigned DIV = (CLK_HZ / TICK_HZ > 0) ? CLK_HZ / TICK_HZ : 1;
  localparam int unsigned DW  = (DIV > 1) ? $clog2(DIV) : 1;

  logic [DW-1:0] div_cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      div_cnt <= '0;
      tick    <= 1'b0;
      now     <= '0;
    end else begin
      tick <= 1'b0;
      if (div_cnt == DW'(DIV - 1)) begin
        div_cnt <= '0;
        tick    <= 1'b1;
        now     <= now + 1'b1;
      end else begin
        div_cnt <= div_cnt + 1'b1;
      end
    end
  end

endmodule
