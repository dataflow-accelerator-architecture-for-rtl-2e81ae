// daa_drop_policy -- decides at run time when a buffer drops frames.
//
// The host asks for a mode per buffer (drop_req: 1 latest-data, 0 in-order). In
// in-order mode a full buffer stalls its producer. With auto_en set, this block
// watches each in-order buffer and counts the cycles in which its producer is
// refused (stall). Once STALL_LIMIT such cycles build up before the buffer
// drains, it forces the buffer into latest-data mode. That drops the backlog and
// frees the producer before the stall becomes a timing violation. When the
// buffer has drained (nothing fresh), the force is lifted and the buffer
// returns to in-order delivery. drop_en is the mode in effect.
//
// Letting the run-time side decide when to drop frames, so as to avoid
// excessive stalls, follows the source. The stall-cycle count, the limit, and
// the return to in-order at the first empty buffer are this design's own. A
// refused sensor frame counts as one stall cycle.
//
// Timing: the force takes effect on the clock edge after the stall cycle that
// reaches the limit, and is lifted on the edge after the buffer is seen empty.
module daa_drop_policy
  import daa_pkg::*;
#(
  parameter int unsigned N           = 12,
  parameter int unsigned STALL_LIMIT = 100_000   // 1 ms at 100 MHz
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         auto_en,
  input  logic [N-1:0] drop_req,   // host's requested mode per buffer
  input  logic [N-1:0] stall,      // producer refused this cycle
  input  logic [N-1:0] fresh,      // buffer holds an unconsumed token
  output logic [N-1:0] drop_en,    // mode in effect
  output logic [N-1:0] forced,     // forced into latest-data by this block
  output cnt_t         fallback_cnt
);
  localparam int unsigned SW = $clog2(STALL_LIMIT + 1);

  logic [SW-1:0] acc [N];
  logic [N-1:0]  trip;

  assign drop_en = drop_req | forced;

  always_comb
    for (int k = 0; k < int'(N); k++)
      trip[k] = auto_en && !drop_req[k] && !forced[k] && stall[k] && (acc[k] == SW'(STALL_LIMIT - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      forced       <= '0;
      fallback_cnt <= '0;
      for (int k = 0; k < int'(N); k++) acc[k] <= '0;
    end else begin
      if (|trip) fallback_cnt <= fallback_cnt + CNT_W'($countones(trip));
      for (int k = 0; k < int'(N); k++) begin
        if (!auto_en || drop_req[k]) begin
          forced[k] <= 1'b0;
          acc[k]    <= '0;
        end else if (forced[k]) begin
          if (!fresh[k]) forced[k] <= 1'b0;
          acc[k] <= '0;
        end else if (trip[k]) begin
          forced[k] <= 1'b1;
          acc[k]    <= '0;
        end else if (stall[k]) begin
          acc[k] <= acc[k] + 1'b1;
        end else if (!fresh[k]) begin
          acc[k] <= '0;     // drained on its own: start counting afresh
        end
      end
    end
  end

  // A buffer is only ever forced while the policy is switched on.
  a_force_needs_auto: assert property (@(posedge clk) disable iff (!rst_n)
      $rose(|forced) |-> $past(auto_en));

endmodule
