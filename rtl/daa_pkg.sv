// daa_pkg -- shared types and the macro dataflow graph (M-DFG) of the level-4
// vehicle pipeline.
//
// The graph has eight accelerator nodes and four sensors. Every producer ->
// consumer arrow of the pipeline gets its own dedicated on-chip buffer, listed in
// EDGES below. The node set, the arrows and the firing frequencies follow the
// vehicle pipeline of the source figure (camera 30 Hz, LiDAR 10 Hz, radar 10 Hz,
// GNSS/IMU 100 Hz, 2D perception 30 Hz, everything downstream of perception
// 10 Hz, control 100 Hz). The token width, the buffer depth, the clock and the
// timebase rate are this design's own choices.
package daa_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned DATA_W  = 64;   // one token (frame descriptor / result word)
  parameter int unsigned SEQ_W   = 16;   // per-buffer sequence number of a token
  parameter int unsigned CNT_W   = 16;   // width of all event counters
  parameter int unsigned N_NODES = 8;
  parameter int unsigned N_SENS  = 4;
  parameter int unsigned N_EDGES = 12;
  parameter int unsigned MAX_IN  = 3;    // most inputs any node has (fusion)

  typedef logic [DATA_W-1:0] data_t;
  typedef logic [SEQ_W-1:0]  seq_t;
  typedef logic [CNT_W-1:0]  cnt_t;

  // A token as it sits in a buffer and as it is handed to a consumer.
  typedef struct packed {
    seq_t  seq;    // order of arrival at this buffer, wraps
    data_t data;
  } token_t;

  // ---------------------------------------------------------------- graph
  typedef enum logic [2:0] {
    N_PERC2D  = 3'd0,
    N_PERC3D  = 3'd1,
    N_FUSION  = 3'd2,
    N_TRACK   = 3'd3,
    N_PREDICT = 3'd4,
    N_LOCAL   = 3'd5,
    N_PLAN    = 3'd6,
    N_CONTROL = 3'd7
  } node_e;

  typedef enum logic [1:0] {
    S_CAMERA = 2'd0,
    S_LIDAR  = 2'd1,
    S_RADAR  = 2'd2,
    S_GNSS   = 2'd3     // GNSS/IMU
  } sensor_e;

  // Producer of an edge: a sensor or the output of a node.
  typedef struct packed {
    logic       from_sensor;  // 1: src is a sensor_e, 0: src is a node_e
    logic [2:0] src;
    logic [2:0] dst;          // consuming node
    logic [1:0] slot;         // operand slot of the consuming node
  } edge_t;

  function automatic edge_t mk_edge(logic s, logic [2:0] src, logic [2:0] dst, logic [1:0] slot);
    edge_t e;
    e.from_sensor = s;
    e.src  = src;
    e.dst  = dst;
    e.slot = slot;
    return e;
  endfunction

  // Edge k is buffer k of the top.
  localparam edge_t EDGES [N_EDGES] = '{
    mk_edge(1'b1, 3'(S_CAMERA), 3'(N_PERC2D),  2'd0),  //  0 camera      -> 2D perception
    mk_edge(1'b1, 3'(S_LIDAR),  3'(N_PERC3D),  2'd0),  //  1 LiDAR       -> 3D perception
    mk_edge(1'b0, 3'(N_PERC2D), 3'(N_FUSION),  2'd0),  //  2 2D percept. -> fusion
    mk_edge(1'b0, 3'(N_PERC3D), 3'(N_FUSION),  2'd1),  //  3 3D percept. -> fusion
    mk_edge(1'b1, 3'(S_RADAR),  3'(N_FUSION),  2'd2),  //  4 radar       -> fusion
    mk_edge(1'b0, 3'(N_FUSION), 3'(N_TRACK),   2'd0),  //  5 fusion      -> tracking
    mk_edge(1'b0, 3'(N_TRACK),  3'(N_PREDICT), 2'd0),  //  6 tracking    -> prediction
    mk_edge(1'b0, 3'(N_PREDICT),3'(N_PLAN),    2'd0),  //  7 prediction  -> planning
    mk_edge(1'b1, 3'(S_LIDAR),  3'(N_LOCAL),   2'd0),  //  8 LiDAR       -> localization
    mk_edge(1'b1, 3'(S_GNSS),   3'(N_LOCAL),   2'd1),  //  9 GNSS/IMU    -> localization
    mk_edge(1'b0, 3'(N_LOCAL),  3'(N_PLAN),    2'd1),  // 10 localization-> planning
    mk_edge(1'b0, 3'(N_PLAN),   3'(N_CONTROL), 2'd0)   // 11 planning    -> control
  };                                                   //    control     -> chassis port

  // Number of operand inputs of each node (indexed by node_e).
  localparam int unsigned NODE_NIN [N_NODES] = '{1, 1, 3, 1, 1, 2, 2, 1};

  // Prescribed firing frequency of each node's output, in Hz (indexed by node_e).
  localparam int unsigned NODE_HZ [N_NODES] = '{30, 10, 10, 10, 10, 10, 10, 100};

  // Nominal frame rate of each sensor, in Hz (indexed by sensor_e).
  localparam int unsigned SENSOR_HZ [N_SENS] = '{30, 10, 10, 100};

  // Ticks of the firing timebase per period of a node.
  function automatic int unsigned period_ticks(int unsigned tick_hz, int unsigned hz);
    return (tick_hz + hz/2) / hz;
  endfunction

  // Does node n consume edge k?  Edge index of operand slot s of node n.
  function automatic int unsigned edge_of(int unsigned n, int unsigned s);
    for (int unsigned k = 0; k < N_EDGES; k++)
      if (EDGES[k].dst == 3'(n) && EDGES[k].slot == 2'(s)) return k;
    return N_EDGES;  // no such operand
  endfunction

  // Why a node fired.
  typedef enum logic [0:0] {
    FIRE_DATA  = 1'b0,   // every operand buffer held a fresh token
    FIRE_TIMER = 1'b1    // its firing period ran out; it took the latest tokens
  } fire_cause_e;

endpackage
