// tb_daa_node -- self-checking test of the node wrapper.
//
// A two-input node (period 3 ticks, a tick every 2 cycles) is attached to an
// accelerator stand-in here that answers acc_start after a random latency with
// result = op0.data * 3 + op1.data + op1.seq. The test records the operand
// tokens offered in the firing cycle and checks that the accelerator sees those
// operands, that acc_start comes exactly one cycle after the firing, that the
// output carries the expected result and holds while out_ready is low, and that
// with out_ready high the turn-around is latency + 3 cycles.
module tb_daa_node;
  import daa_pkg::*;

  localparam int unsigned N_IN = 2, PERIOD = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic tick;
  logic [N_IN-1:0] in_fresh, in_ever, consume;
  token_t in_tok [N_IN];
  logic acc_start, acc_done;
  token_t acc_op [N_IN];
  fire_cause_e acc_cause;
  data_t acc_result;
  logic out_valid, out_ready, busy;
  data_t out_data;
  cnt_t fire_cnt, timer_fire_cnt, miss_cnt, out_stall_cnt;

  daa_node #(.N_IN(N_IN), .PERIOD(PERIOD)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic data_t acc_fn(token_t a, token_t b);
    return a.data * 3 + b.data + data_t'(b.seq);
  endfunction

  // stimulus and the accelerator stand-in, all on the clock
  int     cyc = 0;
  int     lat, acc_cnt;
  logic   acc_busy;
  token_t fire_op [N_IN];
  int     fire_cyc, start_cyc, done_cyc;
  logic   was_fire, exp_start;
  int     n_fire = 0, n_timer = 0, n_ostall = 0, n_turn = 0;
  logic   hold_mode;
  data_t  exp_out;

  always_ff @(posedge clk) cyc <= cyc + 1;
  assign tick = cyc[0];

  always @(negedge clk) if (rst_n) begin
    // new operand buffer state for the next cycle
    in_ever  <= 2'b11;
    in_fresh <= 2'($urandom_range(0, 3));
    for (int i = 0; i < int'(N_IN); i++) in_tok[i] <= '{seq: 16'($urandom), data: {$urandom, $urandom}};
    out_ready <= hold_mode ? ($urandom_range(0, 3) == 0) : 1'b1;
  end

  always @(posedge clk) if (rst_n) begin
    // accelerator stand-in
    acc_done <= 1'b0;
    if (acc_start) begin
      check("operands", acc_op[0] == fire_op[0] && acc_op[1] == fire_op[1]);
      check("start one cycle after fire", exp_start);
      start_cyc <= cyc;
      acc_busy  <= 1'b1;
      acc_cnt   <= lat;
      exp_out   <= acc_fn(acc_op[0], acc_op[1]);
    end else if (acc_busy) begin
      if (acc_cnt == 1) begin
        acc_done   <= 1'b1;
        acc_result <= exp_out;
        acc_busy   <= 1'b0;
        done_cyc   <= cyc;
      end
      acc_cnt <= acc_cnt - 1;
    end else if (!acc_start && acc_done == 1'b0) begin
      acc_result <= {$urandom, $urandom};  // garbage while idle
    end
    exp_start <= 1'b0;
    // firing observed
    if (consume[0]) begin
      check("consume only when idle", !busy);
      check("consume on all inputs", consume == 2'b11);
      fire_op   <= in_tok;
      fire_cyc  <= cyc;
      exp_start <= 1'b1;
      n_fire++;
      if (!(&in_fresh)) n_timer++;
      lat <= $urandom_range(1, 6);
    end
    if (out_valid) begin
      check("result", out_data == exp_out);
      if (out_ready) begin
        if (!hold_mode) begin
          check("turn-around L+3", cyc - fire_cyc == lat + 3);
          n_turn++;
        end
      end else n_ostall++;
    end
  end

  // outputs hold while not accepted
  data_t prev_out;
  logic  prev_wait;
  always @(posedge clk) begin
    if (rst_n && prev_wait) check("hold while not ready", out_valid && out_data == prev_out);
    prev_wait <= out_valid && !out_ready;
    prev_out  <= out_data;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_fresh = '0; in_ever = '0; out_ready = 1'b1; acc_done = 1'b0; acc_result = '0;
    acc_busy = 1'b0; acc_cnt = 0; lat = 1; exp_start = 1'b0; hold_mode = 1'b0; prev_wait = 1'b0;
    for (int i = 0; i < int'(N_IN); i++) begin in_tok[i] = '0; fire_op[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3000) @(posedge clk);
    hold_mode = 1'b1;
    repeat (3000) @(posedge clk);
    #1;
    check("fire count", int'(fire_cnt) == n_fire);
    check("timer fire count", int'(timer_fire_cnt) == n_timer);
    check("out stall count", int'(out_stall_cnt) == n_ostall);
    check("fires", n_fire > 100);
    check("timer fires", n_timer > 0);
    check("output stalls", n_ostall > 0);
    check("turn-arounds", n_turn > 50);
    $display("fires=%0d timer=%0d ostall=%0d turn=%0d", n_fire, n_timer, n_ostall, n_turn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
