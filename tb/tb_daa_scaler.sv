// tb_daa_scaler -- self-checking test of the localization run-time scaler.
//
// Feeds feature counts, first a directed ramp (few features -> many -> few) and
// then random counts, and checks the enabled lane level and the thermometer
// lane_en against a model here: need = ceil(feat / 53) clamped to 1..4, scale up
// at once, scale down by one lane after 4 frames in a row that need fewer.
// Turning auto_en off must restore all lanes.
module tb_daa_scaler;
  import daa_pkg::*;

  localparam int unsigned LANES = 4, FPL = 53, HOLD = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic auto_en, feat_valid;
  logic [15:0] feat;
  logic [LANES-1:0] lane_en;
  logic [$clog2(LANES+1)-1:0] level;
  cnt_t up_cnt, down_cnt;

  daa_scaler #(.LANES(LANES), .FEAT_PER_LANE(FPL), .HOLD(HOLD)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int m_level = LANES, m_low = 0, m_up = 0, m_down = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic frame(logic ae, logic fv, int f);
    int need;
    @(negedge clk);
    auto_en = ae; feat_valid = fv; feat = 16'(f);
    need = (f + FPL - 1) / FPL;
    if (need < 1) need = 1;
    if (need > LANES) need = LANES;
    @(posedge clk);
    if (!ae) begin m_level = LANES; m_low = 0; end
    else if (fv) begin
      if (need > m_level) begin m_level = need; m_low = 0; m_up++; end
      else if (need < m_level) begin
        if (m_low == HOLD - 1) begin m_level--; m_low = 0; m_down++; end
        else m_low++;
      end else m_low = 0;
    end
    #1;
    check("level", int'(level) == m_level);
    for (int i = 0; i < int'(LANES); i++) check("lane_en", lane_en[i] == (i < m_level));
    check("up_cnt", int'(up_cnt) == m_up);
    check("down_cnt", int'(down_cnt) == m_down);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    auto_en = 1'b1; feat_valid = 1'b0; feat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // directed: after reset all lanes run; 10 features -> steps down to 1 lane
    for (int i = 0; i < 16; i++) frame(1'b1, 1'b1, 10);
    check("down to one lane", level == 1 && lane_en == 4'b0001);
    frame(1'b1, 1'b1, 200);  // 200 features need 4 lanes at once
    check("up at once", level == 4);
    frame(1'b1, 1'b1, 100);  // needs 2: three frames keep 4 lanes
    frame(1'b1, 1'b1, 100);
    frame(1'b1, 1'b1, 100);
    check("hysteresis holds", level == 4);
    frame(1'b1, 1'b1, 100);
    check("one lane down", level == 3);
    frame(1'b0, 1'b0, 0);
    check("static mode all lanes", level == 4);
    for (int i = 0; i < 3000; i++)
      frame($urandom_range(0, 19) != 0, $urandom_range(0, 1), $urandom_range(0, 250));
    check("scaled up", m_up > 10);
    check("scaled down", m_down > 10);
    $display("up=%0d down=%0d", m_up, m_down);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
