// tb_daa_buffer -- self-checking test of the dedicated producer/consumer buffer.
//
// Random writes and consumes, with the mode switched between latest-data and
// in-order every few hundred cycles, are checked cycle by cycle against a
// queue model kept here: occupancy, fresh/ever, wr_ready, the token a consume
// would take, and the drop and stall counters. Directed phases first make each
// mechanism (overwrite when full, skip on consume, producer stall) happen on
// purpose.
module tb_daa_buffer;
  import daa_pkg::*;

  localparam int unsigned DEPTH = 4;

  logic   clk = 1'b0, rst_n = 1'b0;
  logic   drop_en, wr_valid, consume;
  data_t  wr_data;
  logic   wr_ready, fresh, ever;
  token_t rd_tok;
  logic [$clog2(DEPTH+1)-1:0] occupancy;
  cnt_t   drop_cnt, stall_cnt;

  daa_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  token_t q[$];
  token_t m_last;
  logic   m_ever;
  seq_t   m_seq;
  int     m_drops, m_stalls;
  int     n_overwrite = 0, n_skip = 0, n_stall = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // One cycle: drive, compare the settled outputs, advance the model, clock.
  task automatic step(logic de, logic wv, data_t wd, logic cs);
    token_t exp_tok;
    logic   exp_ready, do_wr, do_rd;
    @(negedge clk);
    drop_en = de; wr_valid = wv; wr_data = wd; consume = cs;
    #1;
    exp_ready = de || (q.size() < DEPTH);
    if (q.size() == 0) exp_tok = m_last;
    else if (de)       exp_tok = q[$];
    else               exp_tok = q[0];
    check("wr_ready",  wr_ready == exp_ready);
    check("fresh",     fresh == (q.size() != 0));
    check("ever",      ever == m_ever);
    check("occupancy", int'(occupancy) == q.size());
    check("rd_tok",    rd_tok == exp_tok);
    check("drop_cnt",  int'(drop_cnt) == m_drops);
    check("stall_cnt", int'(stall_cnt) == m_stalls);
    do_wr = wv && exp_ready;
    do_rd = cs && (q.size() != 0);
    if (wv && !exp_ready) begin m_stalls++; n_stall++; end
    if (do_rd) begin
      m_last = exp_tok;
      if (de) begin
        if (q.size() > 1) n_skip++;
        m_drops += q.size() - 1;
        q.delete();
      end else begin
        void'(q.pop_front());
      end
    end
    if (do_wr) begin
      if (q.size() == DEPTH) begin  // only reachable in latest-data mode
        void'(q.pop_front());
        m_drops++;
        n_overwrite++;
      end
      q.push_back('{seq: m_seq, data: wd});
      m_seq++;
      m_ever = 1'b1;
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    drop_en = 1'b1; wr_valid = 1'b0; wr_data = '0; consume = 1'b0;
    m_last = '0; m_ever = 1'b0; m_seq = '0; m_drops = 0; m_stalls = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // nothing written: empty token, no ever
    step(1'b1, 1'b0, '0, 1'b1);
    // latest-data: six writes into a ring of four -> two overwrites
    for (int i = 0; i < 6; i++) step(1'b1, 1'b1, data_t'(64'h100 + i), 1'b0);
    // consume takes the newest (0x105) and drops the other three
    step(1'b1, 1'b0, '0, 1'b1);
    check("directed newest", m_last.data == 64'h105);
    // empty again: rd_tok is the last one consumed
    step(1'b1, 1'b0, '0, 1'b0);
    // in-order: fill, then a fifth write stalls; consumes come oldest first
    for (int i = 0; i < 5; i++) step(1'b0, 1'b1, data_t'(64'h200 + i), 1'b0);
    step(1'b0, 1'b0, '0, 1'b1);
    check("directed oldest", m_last.data == 64'h200);
    // random traffic with mode switches
    for (int blk = 0; blk < 20; blk++) begin
      logic de;
      de = $urandom_range(0, 1);
      for (int i = 0; i < 300; i++)
        step(de, ($urandom_range(0, 99) < 45), {$urandom, $urandom}, ($urandom_range(0, 99) < 30));
    end
    check("overwrite seen", n_overwrite > 0);
    check("skip seen",      n_skip > 0);
    check("stall seen",     n_stall > 0);
    $display("overwrites=%0d skips=%0d stalls=%0d", n_overwrite, n_skip, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
