// daa_top -- dataflow accelerator architecture for the level-4 vehicle pipeline.
//
// Eight accelerator nodes (2D perception, 3D perception, perception fusion,
// tracking, prediction, localization, planning, control) are tied into the
// macro dataflow graph of daa_pkg::EDGES. Every arrow of the graph has its own
// daa_buffer, and every node has a daa_node wrapper that fires its accelerator
// when its inputs are ready or its firing period runs out. No CPU relays a task
// from producer to consumer: a producer writes the consumer's buffer directly,
// and the consumer fires by itself. A shared daa_timebase gives the firing
// periods. A daa_drop_policy switches an in-order buffer whose producer stalls
// too long to latest-data until it drains. A daa_scaler with one daa_clock_gate
// per lane lets the run-time side scale the localization accelerator to the
// number of feature points it reports.
//
// The accelerators' datapaths are not part of this RTL. Each node brings out a
// start/operands/done/result port (acc_*), and an accelerator of any latency
// can be attached there. The sensors write through sens_valid/sens_data; a sensor
// frame is written into every buffer of that sensor at once (the LiDAR feeds
// two). Control's result leaves through cmd_valid/cmd_data to the vehicle
// chassis.
//
// The graph, the dedicated buffers, the self-timed firing, the latest-data
// dropping and the feature-driven scaling follow the source. Token format,
// buffer depth, clock and tick rates, lane count and handshakes are this
// design's own; see the modules below.
//
// Timing: a node's output is written into all of its output buffers in one
// cycle, once every one of them is ready. A sensor frame that an in-order buffer
// cannot take is lost and counted in that buffer's stall count.
module daa_top
  import daa_pkg::*;
#(
  parameter int unsigned CLK_HZ        = 100_000_000,
  parameter int unsigned TICK_HZ       = 10_000,
  parameter int unsigned DEPTH         = 4,
  parameter int unsigned LANES         = 4,
  parameter int unsigned FEAT_PER_LANE = 53,
  parameter int unsigned HOLD          = 4,
  parameter int unsigned STALL_LIMIT   = 100_000
) (
  input  logic        clk,
  input  logic        rst_n,
  // run-time configuration
  input  logic [N_EDGES-1:0] drop_req,    // per buffer: 1 latest-data, 0 in-order
  input  logic        auto_drop_en,        // let stalls force latest-data
  input  logic        scale_auto_en,
  input  logic        test_en,
  // sensors
  input  logic [N_SENS-1:0] sens_valid,
  input  data_t       sens_data  [N_SENS],
  // accelerators
  output logic [N_NODES-1:0] acc_start,
  output token_t      acc_op     [N_NODES][MAX_IN],
  output fire_cause_e acc_cause  [N_NODES],
  input  logic [N_NODES-1:0] acc_done,
  input  data_t       acc_result [N_NODES],
  // workload measure from the localization accelerator
  input  logic        feat_valid,
  input  logic [15:0] feat,
  output logic [LANES-1:0] loc_lane_en,
  output logic [LANES-1:0] loc_gclk,
  // vehicle chassis
  output logic        cmd_valid,
  output data_t       cmd_data,
  input  logic        cmd_ready,
  // status
  output logic [31:0] now,
  output cnt_t        edge_drop_cnt  [N_EDGES],
  output cnt_t        edge_stall_cnt [N_EDGES],
  output cnt_t        node_fire_cnt  [N_NODES],
  output cnt_t        node_timer_cnt [N_NODES],
  output cnt_t        node_miss_cnt  [N_NODES],
  output cnt_t        node_ostall_cnt[N_NODES],
  output cnt_t        scale_up_cnt,
  output cnt_t        scale_down_cnt,
  output logic [$clog2(LANES+1)-1:0] loc_level,        // localization lanes on
  output logic [$clog2(DEPTH+1)-1:0] edge_occupancy [N_EDGES],
  output logic [N_NODES-1:0] node_busy,
  output logic [N_EDGES-1:0] edge_drop_mode,  // mode in effect per buffer
  output logic [N_EDGES-1:0] edge_forced,     // forced to latest-data by stalls
  output cnt_t        drop_fallback_cnt
);
  logic tick;

  daa_timebase #(.CLK_HZ(CLK_HZ), .TICK_HZ(TICK_HZ)) u_timebase (
    .clk, .rst_n, .tick, .now
  );

  // ------------------------------------------------------------- buffers
  logic [N_EDGES-1:0] b_fresh, b_ever, b_consume, b_wr_valid, b_wr_ready;
  data_t              b_wr_data [N_EDGES];
  token_t             b_tok     [N_EDGES];

  logic [N_NODES-1:0]             n_out_valid, n_out_ready;
  data_t                          n_out_data [N_NODES];
  logic [N_NODES-1:0][MAX_IN-1:0] n_consume;

  logic [N_EDGES-1:0] drop_en;
  logic [N_EDGES-1:0] b_offer;     // producer has a token for this buffer

  always_comb
    for (int k = 0; k < int'(N_EDGES); k++)
      b_offer[k] = EDGES[k].from_sensor ? sens_valid[EDGES[k].src[1:0]] : n_out_valid[EDGES[k].src];

  daa_drop_policy #(.N(N_EDGES), .STALL_LIMIT(STALL_LIMIT)) u_drop (
    .clk, .rst_n,
    .auto_en     (auto_drop_en),
    .drop_req,
    .stall       (b_offer & ~b_wr_ready),
    .fresh       (b_fresh),
    .drop_en,
    .forced      (edge_forced),
    .fallback_cnt(drop_fallback_cnt)
  );
  assign edge_drop_mode = drop_en;

  for (genvar k = 0; k < N_EDGES; k++) begin : g_buf
    daa_buffer #(.DEPTH(DEPTH)) u_buf (
      .clk, .rst_n,
      .drop_en  (drop_en[k]),
      .wr_valid (b_wr_valid[k]),
      .wr_data  (b_wr_data[k]),
      .wr_ready (b_wr_ready[k]),
      .fresh    (b_fresh[k]),
      .ever     (b_ever[k]),
      .rd_tok   (b_tok[k]),
      .consume  (b_consume[k]),
      .occupancy(edge_occupancy[k]),
      .drop_cnt (edge_drop_cnt[k]),
      .stall_cnt(edge_stall_cnt[k])
    );
  end

  // Producer side of every buffer, consumer side back to the nodes.
  always_comb begin
    for (int k = 0; k < int'(N_EDGES); k++) begin
      if (EDGES[k].from_sensor) begin
        b_wr_valid[k] = sens_valid[EDGES[k].src[1:0]];
        b_wr_data[k]  = sens_data[EDGES[k].src[1:0]];
      end else begin
        b_wr_valid[k] = n_out_valid[EDGES[k].src] && n_out_ready[EDGES[k].src];
        b_wr_data[k]  = n_out_data[EDGES[k].src];
      end
      b_consume[k] = n_consume[EDGES[k].dst][EDGES[k].slot];
    end
  end

  // A node's result goes out once every one of its output buffers can take it.
  always_comb begin
    for (int n = 0; n < int'(N_NODES); n++) begin
      n_out_ready[n] = 1'b1;
      for (int k = 0; k < int'(N_EDGES); k++)
        if (!EDGES[k].from_sensor && EDGES[k].src == 3'(n))
          n_out_ready[n] = n_out_ready[n] && b_wr_ready[k];
    end
    n_out_ready[N_CONTROL] = cmd_ready;
  end

  assign cmd_valid = n_out_valid[N_CONTROL];
  assign cmd_data  = n_out_data[N_CONTROL];

  // --------------------------------------------------------------- nodes
  for (genvar n = 0; n < N_NODES; n++) begin : g_node
    localparam int unsigned NIN = NODE_NIN[n];
    logic [NIN-1:0] in_fresh, in_ever, consume;
    token_t         in_tok [NIN];
    token_t         op     [NIN];

    for (genvar s = 0; s < MAX_IN; s++) begin : g_slot
      if (s < NIN) begin : g_used
        localparam int unsigned E = edge_of(n, s);
        assign in_fresh[s]   = b_fresh[E];
        assign in_ever[s]    = b_ever[E];
        assign in_tok[s]     = b_tok[E];
        assign acc_op[n][s]  = op[s];
        assign n_consume[n][s] = consume[s];
      end else begin : g_unused
        assign acc_op[n][s]  = '0;
        assign n_consume[n][s] = 1'b0;
      end
    end

    daa_node #(.N_IN(NIN), .PERIOD(period_ticks(TICK_HZ, NODE_HZ[n]))) u_node (
      .clk, .rst_n, .tick,
      .in_fresh, .in_ever, .in_tok, .consume,
      .acc_start     (acc_start[n]),
      .acc_op        (op),
      .acc_cause     (acc_cause[n]),
      .acc_done      (acc_done[n]),
      .acc_result    (acc_result[n]),
      .out_valid     (n_out_valid[n]),
      .out_data      (n_out_data[n]),
      .out_ready     (n_out_ready[n]),
      .busy          (node_busy[n]),
      .fire_cnt      (node_fire_cnt[n]),
      .timer_fire_cnt(node_timer_cnt[n]),
      .miss_cnt      (node_miss_cnt[n]),
      .out_stall_cnt (node_ostall_cnt[n])
    );
  end

  // ------------------------------------------- localization run-time scaling
  daa_scaler #(.LANES(LANES), .FEAT_PER_LANE(FEAT_PER_LANE), .HOLD(HOLD)) u_scaler (
    .clk, .rst_n,
    .auto_en (scale_auto_en),
    .feat_valid, .feat,
    .lane_en (loc_lane_en),
    .level   (loc_level),
    .up_cnt  (scale_up_cnt),
    .down_cnt(scale_down_cnt)
  );

  for (genvar l = 0; l < LANES; l++) begin : g_gate
    daa_clock_gate u_cg (.clk, .en(loc_lane_en[l]), .test_en, .gclk(loc_gclk[l]));
  end

endmodule
