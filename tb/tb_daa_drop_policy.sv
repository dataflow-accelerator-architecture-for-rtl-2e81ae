// tb_daa_drop_policy -- self-checking test of the run-time drop policy.
//
// Four buffers with STALL_LIMIT = 8 get random requested modes, stall and fresh
// inputs, and the auto switch toggled now and then. A model here keeps the
// stall-cycle count of every buffer and predicts forced, drop_en and the
// fallback count each cycle. A directed part checks that exactly STALL_LIMIT
// stall cycles force a buffer, and that the force is lifted once it is empty.
module tb_daa_drop_policy;
  import daa_pkg::*;

  localparam int unsigned N = 4, LIM = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic auto_en;
  logic [N-1:0] drop_req, stall, fresh, drop_en, forced;
  cnt_t fallback_cnt;

  daa_drop_policy #(.N(N), .STALL_LIMIT(LIM)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int m_acc [N];
  logic [N-1:0] m_forced;
  int m_fb = 0, n_lift = 0;

  task automatic step(logic ae, logic [N-1:0] rq, logic [N-1:0] st, logic [N-1:0] fr);
    @(negedge clk);
    auto_en = ae; drop_req = rq; stall = st; fresh = fr;
    #1;
    check("forced", forced == m_forced);
    check("drop_en", drop_en == (rq | m_forced));
    check("fallback_cnt", int'(fallback_cnt) == m_fb);
    for (int k = 0; k < int'(N); k++) begin
      if (!ae || rq[k]) begin m_forced[k] = 1'b0; m_acc[k] = 0; end
      else if (m_forced[k]) begin
        if (!fr[k]) begin m_forced[k] = 1'b0; n_lift++; end
        m_acc[k] = 0;
      end
      else if (st[k] && m_acc[k] == LIM - 1) begin m_forced[k] = 1'b1; m_acc[k] = 0; m_fb++; end
      else if (st[k]) m_acc[k]++;
      else if (!fr[k]) m_acc[k] = 0;
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    auto_en = 1'b0; drop_req = '0; stall = '0; fresh = '0; m_forced = '0;
    for (int k = 0; k < int'(N); k++) m_acc[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // directed: buffer 0 in-order, stalled for LIM cycles -> forced after the last
    for (int i = 0; i < int'(LIM); i++) begin
      step(1'b1, 4'b0000, 4'b0001, 4'b0001);
      check("not forced before the limit", forced[0] == 1'b0);
    end
    step(1'b1, 4'b0000, 4'b0000, 4'b0001);
    check("forced at the limit", forced[0] && drop_en[0]);
    step(1'b1, 4'b0000, 4'b0000, 4'b0001);
    check("stays forced while fresh", forced[0]);
    step(1'b1, 4'b0000, 4'b0000, 4'b0000);
    step(1'b1, 4'b0000, 4'b0000, 4'b0000);
    check("lifted once empty", !forced[0] && !drop_en[0]);
    // random
    for (int i = 0; i < 20000; i++)
      step(($urandom_range(0, 99) != 0), 4'($urandom_range(0, 15)) & 4'($urandom_range(0, 15)),
           4'($urandom_range(0, 15)) | 4'($urandom_range(0, 15)), 4'($urandom_range(0, 15)) | 4'($urandom_range(0, 15)));
    check("fallbacks", m_fb > 10);
    check("lifts", n_lift > 10);
    $display("fallbacks=%0d lifts=%0d", m_fb, n_lift);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
