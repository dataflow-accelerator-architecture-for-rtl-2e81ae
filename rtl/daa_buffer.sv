// daa_buffer -- dedicated on-chip communication buffer for one producer ->
// consumer pair of the dataflow graph.
//
// Accelerators do not exchange data through main memory: each arrow of the graph
// has one of these buffers, written by the producer and read by exactly one
// consumer. The buffer is a ring of DEPTH token slots with an occupancy count of
// unconsumed ("fresh") tokens. It runs in one of two consumption modes, chosen at
// run time by drop_en:
//
//   drop_en = 1  latest-data mode. The producer is never blocked. A consume hands
//                the consumer the newest token and discards every older fresh
//                token; a write into a full ring overwrites the oldest one. Each
//                token discarded either way counts in drop_cnt.
//   drop_en = 0  in-order mode. Tokens are consumed oldest first. A full ring
//                deasserts wr_ready, so the producer stalls. Each cycle the
//                producer waits counts in stall_cnt.
//
// The latest-data mode and the run-time choice of when to drop frames follow the
// source's description of flexible dependencies. The ring depth, the in-order
// mode as the alternative, the counters and the token format are this design's
// own.
//
// When no fresh token is held, rd_tok shows the last token consumed (consumers
// that fire on a timer reuse the latest data). `ever` says whether any token has
// arrived since reset.
//
// Timing: a write is accepted on a clock edge with wr_valid && wr_ready. A consume
// takes rd_tok in the same cycle as the consume pulse. A write and a consume may
// happen in the same cycle. rd_tok is combinational from the ring. Reset is
// synchronous and active low.
module daa_buffer
  import daa_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   drop_en,     // 1: latest-data mode, 0: in-order mode
  // producer side
  input  logic   wr_valid,
  input  data_t  wr_data,
  output logic   wr_ready,
  // consumer side
  output logic   fresh,       // an unconsumed token is held
  output logic   ever,        // some token has arrived since reset
  output token_t rd_tok,      // the token a consume takes now
  input  logic   consume,
  // status
  output logic [$clog2(DEPTH+1)-1:0] occupancy,
  output cnt_t   drop_cnt,
  output cnt_t   stall_cnt
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned OW = $clog2(DEPTH+1);

  token_t          ring [DEPTH];
  logic [AW-1:0]   wptr;
  logic [OW-1:0]   count;
  seq_t            seq;
  token_t          last;

  function automatic logic [AW-1:0] wrap_add(logic [AW-1:0] p, int unsigned d);
    int unsigned s;
    s = (int'(p) + d) % DEPTH;
    return AW'(s);
  endfunction

  logic [AW-1:0] newest_ptr, oldest_ptr;
  assign newest_ptr = wrap_add(wptr, DEPTH - 1);
  assign oldest_ptr = wrap_add(wptr, DEPTH - int'(count));

  assign fresh     = (count != '0);
  assign occupancy = count;
  assign wr_ready  = drop_en || (count < OW'(DEPTH));

  always_comb begin
    if (!fresh)        rd_tok = last;
    else if (drop_en)  rd_tok = ring[newest_ptr];
    else               rd_tok = ring[oldest_ptr];
  end

  logic do_wr, do_rd, overwrite;
  assign do_wr     = wr_valid && wr_ready;
  assign do_rd     = consume && fresh;
  // A write into a full ring in latest-data mode replaces the oldest token,
  // unless the consume of this same cycle frees the ring.
  assign overwrite = do_wr && drop_en && (count == OW'(DEPTH)) && !do_rd;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr      <= '0;
      count     <= '0;
      seq       <= '0;
      last      <= '0;
      ever      <= 1'b0;
      drop_cnt  <= '0;
      stall_cnt <= '0;
    end else begin
      if (do_wr) begin
        ring[wptr] <= '{seq: seq, data: wr_data};
        wptr       <= wrap_add(wptr, 1);
        seq        <= seq + 1'b1;
        ever       <= 1'b1;
      end
      if (do_rd) last <= rd_tok;

      // occupancy
      if (do_rd && drop_en)      count <= OW'(do_wr);
      else if (do_rd)            count <= count - 1'b1 + OW'(do_wr);
      else if (do_wr && !overwrite) count <= count + 1'b1;

      // dropped tokens: older fresh tokens skipped by a latest-data consume,
      // and the oldest token overwritten by a write into a full ring
      if (do_rd && drop_en)      drop_cnt <= drop_cnt + CNT_W'(count - 1'b1);
      else if (overwrite)        drop_cnt <= drop_cnt + 1'b1;

      if (wr_valid && !wr_ready) stall_cnt <= stall_cnt + 1'b1;
    end
  end

  // The occupancy never exceeds the ring.
  a_count_le_depth: assert property (@(posedge clk) disable iff (!rst_n) count <= OW'(DEPTH));
  // In in-order mode a full ring accepts nothing.
  a_no_write_when_full: assert property (@(posedge clk) disable iff (!rst_n)
      (!drop_en && count == OW'(DEPTH)) |-> !wr_ready);

endmodule
