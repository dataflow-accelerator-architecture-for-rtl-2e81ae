// daa_node -- dataflow wrapper that lets one accelerator take part in the graph
// without a CPU.
//
// The node owns the firing rule of its accelerator (daa_fire_ctrl). When it
// fires, it latches the token of every operand buffer into operand registers and
// consumes those buffers. Then it pulses acc_start to the accelerator and waits
// for acc_done with the result. It then offers the result to its output
// buffer(s) with a valid/ready handshake and holds it until accepted; a full
// in-order buffer downstream therefore stalls the node. The node is busy, and
// cannot fire again, from the firing until the result is accepted. The
// accelerator itself is outside this module: its internals are not part of the
// architecture.
//
// Firing without the CPU, and direct hand-over through the buffers, follow the
// source. The three-state sequence, the start/done protocol and the hold-until-
// ready output are this design's own.
//
// Timing: fire (cycle 0) -> acc_start high in cycle 1, with acc_op valid from
// cycle 1 until the next firing. acc_done is taken in any cycle after acc_start
// (not in the acc_start cycle itself); out_valid rises the cycle after acc_done
// and stays high until out_ready. With out_ready high the node is idle again one
// cycle after out_valid rises, so an accelerator of latency L (acc_done L cycles
// after acc_start, L >= 1) gives a node turn-around of L + 3 cycles.
module daa_node
  import daa_pkg::*;
#(
  parameter int unsigned N_IN   = 1,
  parameter int unsigned PERIOD = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  // operand buffers
  input  logic [N_IN-1:0] in_fresh,
  input  logic [N_IN-1:0] in_ever,
  input  token_t      in_tok  [N_IN],
  output logic [N_IN-1:0] consume,
  // accelerator
  output logic        acc_start,
  output token_t      acc_op  [N_IN],
  output fire_cause_e acc_cause,
  input  logic        acc_done,
  input  data_t       acc_result,
  // output buffer(s)
  output logic        out_valid,
  output data_t       out_data,
  input  logic        out_ready,
  // status
  output logic        busy,
  output cnt_t        fire_cnt,
  output cnt_t        timer_fire_cnt,
  output cnt_t        miss_cnt,
  output cnt_t        out_stall_cnt
);
  typedef enum logic [1:0] {IDLE, RUN, EMIT} state_e;
  state_e      state;
  logic        fire;
  fire_cause_e cause;

  assign busy = (state != IDLE);

  daa_fire_ctrl #(.N_IN(N_IN), .PERIOD(PERIOD)) u_fire (
    .clk, .rst_n, .tick, .in_fresh, .in_ever, .busy,
    .fire, .cause, .consume, .fire_cnt, .timer_fire_cnt, .miss_cnt
  );

  assign out_valid = (state == EMIT);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= IDLE;
      acc_start     <= 1'b0;
      acc_cause     <= FIRE_DATA;
      out_data      <= '0;
      out_stall_cnt <= '0;
      for (int i = 0; i < int'(N_IN); i++) acc_op[i] <= '0;
    end else begin
      acc_start <= 1'b0;
      unique case (state)
        IDLE: if (fire) begin
          for (int i = 0; i < int'(N_IN); i++) acc_op[i] <= in_tok[i];
          acc_cause <= cause;
          acc_start <= 1'b1;
          state     <= RUN;
        end
        RUN: if (acc_done && !acc_start) begin
          out_data <= acc_result;
          state    <= EMIT;
        end
        EMIT: begin
          if (out_ready) state <= IDLE;
          else           out_stall_cnt <= out_stall_cnt + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // The output holds steady while it waits for the buffer.
  a_hold_out: assert property (@(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data)));

endmodule
