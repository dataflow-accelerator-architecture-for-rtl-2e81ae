// tb_daa_top -- end-to-end test of the whole dataflow accelerator architecture at
// its default parameters (100 MHz clock, 10 kHz firing timebase, 4-token buffers,
// 4 localization lanes).
//
// Sensors produce frames at their nominal rates (camera 30 Hz, LiDAR 10 Hz,
// radar 10 Hz, GNSS/IMU 100 Hz). Each of the eight nodes is attached to a
// behavioural accelerator (daa_accel_model) whose result word names the operands
// it used. The test runs about 1.05 s of chip time in four phases:
//   A   0-600 ms  every buffer in latest-data mode, fast accelerators: the firing
//                 rate of every node over 100-600 ms is checked against the
//                 prescribed frequency, and the spacing of control's timer
//                 firings against its 10 ms period;
//   B 600-800 ms  the 2D perception -> fusion and GNSS/IMU -> localization
//                 buffers switched to in-order mode: the producer stalls and
//                 sensor frames are refused;
//   C 800-900 ms  control made slower than two of its 10 ms periods: misses;
//                 the drop policy is switched on and must force the stalling
//                 in-order buffer into latest-data mode, which must cut 2D
//                 perception's stall time from about a third of the time to under
//                 20 ms in 100 ms;
//   D 900-1050 ms back to latest-data mode.
// Throughout, every operand handed to an accelerator is checked against a
// history of everything its producer wrote into that buffer: its data must be
// the one with its sequence number, sequence numbers never go back, in-order
// buffers never skip, and latest-data buffers hand over one of the newest
// tokens. Every command reaching the chassis must be the next result of the
// control accelerator. The localization model reports feature counts that rise
// and fall, and the lane enables and gated clocks are checked. Each mechanism
// (data firing, timer firing, drop, producer stall, refused sensor frame,
// firing miss, mode switch, forced fallback, scale up, scale down, gated lane)
// is counted, and a mechanism that never happened is a failure.
module tb_daa_top;
  import daa_pkg::*;

  // the test's own copy of the default sizes
  localparam longint CLK_HZ = 100_000_000;
  localparam longint TICK_HZ = 10_000;
  localparam longint DIV     = CLK_HZ / TICK_HZ;
  localparam longint MS      = CLK_HZ / 1000;          // cycles per millisecond
  localparam int     LANES   = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N_EDGES-1:0] drop_req, edge_drop_mode, edge_forced;
  logic auto_drop_en;
  cnt_t drop_fallback_cnt;
  logic scale_auto_en, test_en;
  logic [N_SENS-1:0] sens_valid;
  data_t sens_data [N_SENS];
  logic [N_NODES-1:0] acc_start, acc_done;
  token_t acc_op [N_NODES][MAX_IN];
  fire_cause_e acc_cause [N_NODES];
  data_t acc_result [N_NODES];
  logic feat_valid;
  logic [15:0] feat;
  logic [LANES-1:0] loc_lane_en, loc_gclk;
  logic cmd_valid, cmd_ready;
  data_t cmd_data;
  logic [31:0] now;
  cnt_t edge_drop_cnt [N_EDGES], edge_stall_cnt [N_EDGES];
  cnt_t node_fire_cnt [N_NODES], node_timer_cnt [N_NODES], node_miss_cnt [N_NODES], node_ostall_cnt [N_NODES];
  cnt_t scale_up_cnt, scale_down_cnt;
  logic [2:0] loc_level;
  logic [2:0] edge_occupancy [N_EDGES];
  logic [N_NODES-1:0] node_busy;

  daa_top dut (.*);

  always #5 clk = ~clk;   // 10 ns: 100 MHz

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // cycles in which 2D perception holds a result that a buffer refuses
  longint stall2d = 0;
  always @(posedge clk) if (rst_n && dut.n_out_valid[N_PERC2D] && !dut.n_out_ready[N_PERC2D]) stall2d++;

  // ------------------------------------------------------------ accelerators
  int lat [N_NODES];
  for (genvar n = 0; n < N_NODES; n++) begin : g_acc
    daa_accel_model #(.NODE(n)) u_acc (
      .clk, .rst_n, .lat(lat[n]), .start(acc_start[n]), .op(acc_op[n]),
      .done(acc_done[n]), .result(acc_result[n])
    );
  end

  // ------------------------------------------------- producer history per edge
  data_t hist [N_EDGES][$];
  data_t ctrl_results [$];
  int    last_seq [N_EDGES];
  // mode_q holds each buffer's mode in effect one cycle back, which at an
  // acc_start edge is the mode of the firing cycle. resync marks a buffer whose
  // mode changed since its last new operand.
  logic [N_EDGES-1:0] mode_q;
  logic  resync [N_EDGES];
  always @(posedge clk) begin
    mode_q <= edge_drop_mode;
    for (int k = 0; k < int'(N_EDGES); k++)
      if (rst_n && edge_drop_mode[k] != mode_q[k]) resync[k] <= 1'b1;
  end

  // sensor frames: value = {sensor, frame number}
  longint sens_period [N_SENS];
  longint sens_phase  [N_SENS];
  int     sens_frame  [N_SENS];
  logic [N_SENS-1:0] sens_pulse_q;
  cnt_t   stall_before [N_EDGES];

  // node results go into every buffer the node feeds, in order
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < int'(N_NODES); n++) if (acc_done[n]) begin
      for (int k = 0; k < int'(N_EDGES); k++)
        if (!EDGES[k].from_sensor && EDGES[k].src == 3'(n)) hist[k].push_back(acc_result[n]);
      if (n == int'(N_CONTROL)) ctrl_results.push_back(acc_result[n]);
    end
  end

  // sensors drive on the falling edge; a frame is kept in the history of a
  // buffer unless that buffer's stall count shows it was refused
  int n_refused = 0;
  longint sens_next [N_SENS];
  always @(negedge clk) begin
    if (rst_n) begin
      if (sens_pulse_q != '0) begin
        for (int s = 0; s < int'(N_SENS); s++) if (sens_pulse_q[s])
          for (int k = 0; k < int'(N_EDGES); k++)
            if (EDGES[k].from_sensor && EDGES[k].src == 3'(s)) begin
              if (edge_stall_cnt[k] == stall_before[k]) hist[k].push_back(sens_data[s]);
              else n_refused++;
            end
        sens_pulse_q = '0;
        sens_valid  <= '0;
      end
      for (int s = 0; s < int'(N_SENS); s++) if (cyc == sens_next[s]) begin
        sens_valid[s]   <= 1'b1;
        sens_pulse_q[s]  = 1'b1;
        sens_data[s]    <= {8'(s), 24'd0, 32'(sens_frame[s])};
        sens_frame[s]++;
        sens_next[s]     = sens_phase[s] + longint'(sens_frame[s]) * sens_period[s];
        for (int k = 0; k < int'(N_EDGES); k++) stall_before[k] = edge_stall_cnt[k];
      end
    end
  end

  // --------------------------------------------------- operand provenance
  int n_data_fire = 0, n_timer_fire = 0;
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < int'(N_NODES); n++) if (acc_start[n]) begin
      if (acc_cause[n] == FIRE_DATA) n_data_fire++; else n_timer_fire++;
      for (int s = 0; s < int'(NODE_NIN[n]); s++) begin
        int k, sq, sz;
        k  = int'(edge_of(n, s));
        sq = int'(acc_op[n][s].seq);
        sz = hist[k].size();
        check("operand seq was written", sq < sz);
        if (sq < sz) check("operand data matches producer", acc_op[n][s].data == hist[k][sq]);
        check("operand seq never goes back", sq >= last_seq[k]);
        if (resync[k] && sq != last_seq[k])
          resync[k] = 1'b0;  // the first new token after a switch may skip older ones
        else if (!mode_q[k])
          check("in-order buffer does not skip", sq <= last_seq[k] + 1);
        else if (acc_cause[n] == FIRE_DATA)
          check("latest-data buffer gives a newest token",
                sq >= sz - (EDGES[k].from_sensor ? 2 : 3));
        last_seq[k] = sq;
      end
    end
  end

  // ------------------------------------------------------------- chassis
  int n_cmd = 0;
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    check("command is next control result", ctrl_results.size() > 0 && cmd_data == ctrl_results[0]);
    if (ctrl_results.size() > 0) void'(ctrl_results.pop_front());
    n_cmd++;
  end

  // ------------------------------------------------------ control timing
  // Timer firings of an idle node land on window boundaries, so two of them are
  // a whole number of 10 ms periods (100 ticks) apart.
  longint last_ctrl_timer = -1;
  int     n_period_checked = 0;
  logic   timing_phase;
  always @(posedge clk) if (rst_n && acc_start[N_CONTROL] && acc_cause[N_CONTROL] == FIRE_TIMER) begin
    if (timing_phase && last_ctrl_timer >= 0) begin
      longint gap, r;
      gap = cyc - last_ctrl_timer;
      r   = gap % (100 * DIV);
      check("control timer period", gap >= 100 * DIV && (r <= 2 || r >= 100 * DIV - 2));
      n_period_checked++;
    end
    last_ctrl_timer = cyc;
  end

  // ------------------------------------- localization features and lanes
  int loc_frames = 0;
  always @(posedge clk) begin
    feat_valid <= 1'b0;
    if (rst_n && acc_done[N_LOCAL]) begin
      // 6 frames with few features, then 6 with many, and so on
      feat_valid <= 1'b1;
      feat       <= ((loc_frames / 6) % 2 == 0) ? 16'd20 : 16'd200;
      loc_frames++;
    end
  end

  int gclk_edges [LANES];
  int en_cycles  [LANES];
  logic [LANES-1:0] en_at_low;
  always @(negedge clk) en_at_low <= loc_lane_en;
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always @(posedge loc_gclk[l]) if (rst_n) gclk_edges[l]++;
    always @(posedge clk) if (rst_n && en_at_low[l]) en_cycles[l]++;
  end

  // ---------------------------------------------------------------- run
  initial begin
    #12_000_000_000;   // 1.2 s of chip time
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_ms(longint ms);
    repeat (ms * MS) @(posedge clk);
  endtask

  function automatic logic near(int got, int want, int tol);
    return (got >= want - tol) && (got <= want + tol);
  endfunction

  initial begin
    int f0 [N_NODES], f1 [N_NODES];
    int n_switch;
    int n_drop, n_ostall, n_miss, n_gated;
    longint stall2d_0, stall2d_1, stall2d_b;
    drop_req = '1; auto_drop_en = 1'b0; scale_auto_en = 1'b1; test_en = 1'b0; cmd_ready = 1'b1;
    sens_valid = '0; sens_pulse_q = '0; feat_valid = 1'b0; feat = '0; timing_phase = 1'b0;
    for (int s = 0; s < int'(N_SENS); s++) begin
      sens_data[s]   = '0;
      sens_frame[s]  = 0;
      sens_period[s] = CLK_HZ / longint'(SENSOR_HZ[s]);
      sens_phase[s]  = 1000 + s * 123_457;   // sensors are not in phase
      sens_next[s]   = sens_phase[s];
    end
    for (int k = 0; k < int'(N_EDGES); k++) begin last_seq[k] = 0; resync[k] = 1'b0; end
    mode_q = '1;
    for (int l = 0; l < LANES; l++) begin gclk_edges[l] = 0; en_cycles[l] = 0; end
    for (int n = 0; n < int'(N_NODES); n++) lat[n] = 200 + 37 * n;  // a few microseconds
    n_switch = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // phase A: rates
    wait_ms(100);
    timing_phase = 1'b1;
    #1 for (int n = 0; n < int'(N_NODES); n++) f0[n] = int'(node_fire_cnt[n]);
    wait_ms(500);
    #1 for (int n = 0; n < int'(N_NODES); n++) f1[n] = int'(node_fire_cnt[n]);
    timing_phase = 1'b0;
    for (int n = 0; n < int'(N_NODES); n++) begin
      int got, want;
      got  = f1[n] - f0[n];
      want = int'(NODE_HZ[n]) / 2;                  // 0.5 s window
      if (n == int'(N_CONTROL))
        check("control rate 100 Hz", near(got, want, 1));
      else
        check("node rate", near(got, want, 1));
      $display("node %0d fired %0d times in 0.5 s (prescribed %0d Hz)", n, got, NODE_HZ[n]);
    end

    // phase B: in-order buffers
    @(negedge clk);
    drop_req[2] = 1'b0;
    drop_req[9] = 1'b0;
    n_switch += 2;
    stall2d_b = stall2d;
    wait_ms(200);
    $display("2D perception stall cycles in 200 ms without the drop policy: %0d", stall2d - stall2d_b);
    check("stalls without the drop policy", stall2d - stall2d_b > 40 * longint'(MS) && node_ostall_cnt[N_PERC2D] > 0 && edge_forced == '0);

    // phase C: control slower than two periods; the drop policy switched on
    @(negedge clk);
    lat[N_CONTROL] = 25 * int'(MS);
    auto_drop_en = 1'b1;
    stall2d_0 = stall2d;
    wait_ms(100);
    stall2d_1 = stall2d;
    @(negedge clk);
    lat[N_CONTROL] = 250;
    auto_drop_en = 1'b0;
    drop_req = '1;
    n_switch += 2;
    check("drop policy fell back", drop_fallback_cnt > 0);
    // without the policy, 2D perception stalls about a third of the time; with it,
    // a stall lasts at most STALL_LIMIT cycles before the backlog is dropped
    check("drop policy bounds the stall", stall2d_1 - stall2d_0 < 20 * longint'(MS));
    $display("2D perception stall cycles in 100 ms with the drop policy: %0d", stall2d_1 - stall2d_0);

    // phase D
    wait_ms(150);
    #1;

    n_drop = 0; n_ostall = 0; n_miss = 0; n_gated = 0;
    for (int k = 0; k < int'(N_EDGES); k++) n_drop += int'(edge_drop_cnt[k]);
    for (int n = 0; n < int'(N_NODES); n++) begin
      n_ostall += int'(node_ostall_cnt[n]);
      n_miss   += int'(node_miss_cnt[n]);
    end
    for (int l = 0; l < LANES; l++) begin
      check("gated clock edges match enables", gclk_edges[l] == en_cycles[l]);
      if (en_cycles[l] < int'(cyc) - 100) n_gated++;
      $display("lane %0d: %0d gated-clock edges, %0d enabled cycles", l, gclk_edges[l], en_cycles[l]);
    end
    check("commands reached the chassis", n_cmd > 90);
    check("mechanism: data firing",  n_data_fire > 0);
    check("mechanism: timer firing", n_timer_fire > 0);
    check("mechanism: token drop",   n_drop > 0);
    check("mechanism: producer stall", n_ostall > 0);
    check("mechanism: refused sensor frame", n_refused > 0);
    check("mechanism: firing miss",  n_miss > 0 && node_miss_cnt[N_CONTROL] > 0);
    check("mechanism: mode switch",  n_switch > 0);
    check("mechanism: forced drop fallback", drop_fallback_cnt > 0);
    check("mechanism: scale up",     scale_up_cnt > 0);
    check("mechanism: scale down",   scale_down_cnt > 0);
    check("mechanism: lane gated",   n_gated > 0);
    check("control periods checked", n_period_checked > 20);
    $display("data fires=%0d timer fires=%0d drops=%0d node stalls=%0d refused frames=%0d misses=%0d",
             n_data_fire, n_timer_fire, n_drop, n_ostall, n_refused, n_miss);
    $display("mode switches=%0d fallbacks=%0d scale up=%0d down=%0d gated lanes=%0d commands=%0d",
             n_switch, drop_fallback_cnt, scale_up_cnt, scale_down_cnt, n_gated, n_cmd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
