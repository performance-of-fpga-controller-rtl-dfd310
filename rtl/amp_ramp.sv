// amp_ramp: feedforward ramp of the amplitude setpoint. While the channel is
// on, the working setpoint climbs (or falls) toward the target by step_i every
// 2**DIV_W clocks; when the reflected power is above pr_lvl_i the step is cut
// to a quarter, so a cavity that is detuned by heating is not driven harder
// until the tuner has caught up (pr_lvl_i = 0 turns the slow-down off).
// When rf_on_i is low the setpoint returns to
// zero at once.
// Interface: target and working setpoint DATA_W bits; done_o is high while
// the setpoint equals the target; slow_o while the step is reduced.
// Timing: one step per ramp tick; a tick every 2**DIV_W clocks.
// The ramp and its slow-down on high reflected power follow the paper; the
// step size, the quarter-rate and the tick are this design's own.
module amp_ramp
  import llrf_pkg::*;
#(
  parameter int DIV_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rf_on_i,
  input  logic [DATA_W-1:0] target_i,
  input  logic [15:0]       step_i,
  input  logic [PR_W-1:0]   pr_i,
  input  logic [PR_W-1:0]   pr_lvl_i,
  output logic [DATA_W-1:0] sp_o,
  output logic              done_o,
  output logic              slow_o
);
  logic [DIV_W-1:0]  div;
  logic [DATA_W-1:0] step;
  logic              tick;

  assign tick   = (div == '1);
  assign slow_o = (pr_lvl_i != '0) && (pr_i > pr_lvl_i);
  assign step   = slow_o ? DATA_W'(step_i >> 2) : DATA_W'(step_i);
  assign done_o = (sp_o == target_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div  <= '0;
      sp_o <= '0;
    end else if (!rf_on_i) begin
      div  <= '0;
      sp_o <= '0;
    end else begin
      div <= div + 1'b1;
      if (tick) begin
        if (sp_o < target_i)
          sp_o <= (target_i - sp_o > step) ? sp_o + step : target_i;
        else if (sp_o > target_i)
          sp_o <= (sp_o - target_i > step) ? sp_o - step : target_i;
      end
    end
  end
endmodule
