// daa_accel_model -- behavioural stand-in for one task accelerator (simulation
// only, not synthesizable).
//
// The architecture leaves the inside of each accelerator open. This model
// takes the operand tokens at acc_start, waits `lat` cycles, and answers
// acc_done with a result word that identifies the node, the job number and the
// operands it used: {node[7:0], job[23:0], sum of operand data and sequence
// numbers [31:0]}. acc_done comes `lat` cycles after acc_start (lat >= 1).
module daa_accel_model
  import daa_pkg::*;
#(
  parameter int unsigned NODE = 0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  int     lat,
  input  logic   start,
  input  token_t op [MAX_IN],
  output logic   done,
  output data_t  result
);
  int          cnt;
  logic        running;
  logic [23:0] job;
  data_t       pending;

  function automatic data_t mix(token_t o [MAX_IN]);
    logic [31:0] s;
    s = 32'(NODE) * 32'h9E37;
    for (int i = 0; i < int'(MAX_IN); i++) s = s * 32'd31 + o[i].data[31:0] + 32'(o[i].seq);
    return {8'(NODE), job, s};
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      done    <= 1'b0;
      job     <= '0;
      result  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        pending <= mix(op);
        job     <= job + 1'b1;
        cnt     <= (lat < 1) ? 1 : lat;
        running <= 1'b1;
      end else if (running) begin
        if (cnt == 1) begin
          done    <= 1'b1;
          result  <= pending;
          running <= 1'b0;
        end
        cnt <= cnt - 1;
      end
    end
  end
endmodule
