// daa_scaler -- run-time scaling of an accelerator's hardware to its workload.
//
// The accelerator is built for the average case. The run-time side watches a
// workload measure and enables more or fewer of its LANES parallel lanes through
// clock gating. For the localization accelerator the measure is the number of
// visual feature points in the current frame, with which its latency grows.
// Every feat_valid pulse brings a new count. The lane count the frame needs is
// ceil(feat / FEAT_PER_LANE), clamped to 1..LANES. If that is more than is
// enabled, the scaler scales up at once. If it is less for HOLD frames in a row,
// the scaler scales down by one lane. lane_en is a thermometer code: lanes
// 0..level-1 run. With auto_en low the scaler pins every lane on, which is the
// over-provisioned static design.
//
// Detecting the workload through the feature count, and scaling up/down by
// clock gating, follow the source. The lane count, the thresholds, the
// hysteresis and the one-lane step down are this design's own.
//
// Timing: lane_en changes on the clock edge after the feat_valid cycle that
// decides it.
module daa_scaler
  import daa_pkg::*;
#(
  parameter int unsigned LANES         = 4,
  parameter int unsigned FEAT_PER_LANE = 53,
  parameter int unsigned HOLD          = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             auto_en,
  input  logic             feat_valid,
  input  logic [15:0]      feat,
  output logic [LANES-1:0] lane_en,
  output logic [$clog2(LANES+1)-1:0] level,
  output cnt_t             up_cnt,
  output cnt_t             down_cnt
);
  localparam int unsigned LW = $clog2(LANES + 1);
  localparam int unsigned HW = $clog2(HOLD + 1);

  logic [LW-1:0] need;
  logic [HW-1:0] low_run;
  logic [16:0]   lanes_raw;

  always_comb begin
    lanes_raw = (17'(feat) + 17'(FEAT_PER_LANE) - 17'd1) / 17'(FEAT_PER_LANE);
    if (lanes_raw == '0)              need = LW'(1);
    else if (lanes_raw > 17'(LANES))  need = LW'(LANES);
    else                              need = LW'(lanes_raw);
  end

  always_comb
    for (int i = 0; i < int'(LANES); i++) lane_en[i] = (LW'(i) < level);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      level    <= LW'(LANES);
      low_run  <= '0;
      up_cnt   <= '0;
      down_cnt <= '0;
    end else if (!auto_en) begin
      level   <= LW'(LANES);
      low_run <= '0;
    end else if (feat_valid) begin
      if (need > level) begin
        level   <= need;
        low_run <= '0;
        up_cnt  <= up_cnt + 1'b1;
      end else if (need < level) begin
        if (low_run == HW'(HOLD - 1)) begin
          level    <= level - 1'b1;
          low_run  <= '0;
          down_cnt <= down_cnt + 1'b1;
        end else begin
          low_run <= low_run + 1'b1;
        end
      end else begin
        low_run <= '0;
      end
    end
  end

  a_level_range: assert property (@(posedge clk) disable iff (!rst_n)
      level >= LW'(1) && level <= LW'(LANES));

endmodule
