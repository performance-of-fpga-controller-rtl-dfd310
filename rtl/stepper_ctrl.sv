// stepper_ctrl: step/direction generator for the tuner's stepping motor,
// with the tuner position counter.
//
// How it works: every clock the magnitude of the signed velocity command is
// added to an RATE_W-bit rate accumulator; each carry out issues one step, so
// the step rate is |vel| * f_clk / 2**RATE_W. A step is a PULSE-clock high
// pulse on step_o; dir_o holds the sign of the velocity (1 = positive) and
// the position counter moves by one in that direction on each step.
// clr_i (the "reset counter" of the operator panel) zeroes the counter.
// With en_i low no steps are issued and motor_en_o is low.
// Timing: the first step follows a velocity change by at most
// 2**RATE_W/|vel| clocks; steps are never closer than 2*PULSE clocks apart,
// which caps the step rate at f_clk/(2*PULSE); a faster command is held
// at the cap. |vel| must stay below 2**RATE_W.
// That the stepper controller is inside the controller follows the paper;
// the accumulator scheme, pulse width and counter width are this design's.
module stepper_ctrl
  import llrf_pkg::*;
#(
  parameter int RATE_W = 28,
  parameter int PULSE = 2500
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en_i,
  input  logic signed [VEL_W-1:0] vel_i,
  input  logic                    clr_i,
  output logic                    step_o,
  output logic                    dir_o,
  output logic                    motor_en_o,
  output logic signed [POS_W-1:0] pos_o
);
  localparam int PW = $clog2(2*PULSE + 1);

  logic [RATE_W:0]    acc;
  logic [VEL_W-1:0]  mag;
  logic              pending;
  logic [PW-1:0]     pcnt;

  assign mag        = vel_i[VEL_W-1] ? VEL_W'(-vel_i) : VEL_W'(vel_i);
  assign motor_en_o = en_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      pending <= 1'b0;
      pcnt    <= '0;
      step_o  <= 1'b0;
      dir_o   <= 1'b1;
      pos_o   <= '0;
    end else begin
      if (!en_i) begin
        acc     <= '0;
        pending <= 1'b0;
      end else begin
        acc <= {1'b0, acc[RATE_W-1:0]} + (RATE_W+1)'(mag);
        if (acc[RATE_W]) pending <= 1'b1;
      end
      // Pulse sequencer: start a pulse when a step is pending and the
      // previous pulse plus its low time are over.
      if (pcnt != '0) begin
        pcnt <= pcnt - 1'b1;
        if (pcnt == PW'(PULSE)) step_o <= 1'b0;
      end else if (pending && en_i) begin
        pending <= acc[RATE_W];
        step_o  <= 1'b1;
        dir_o   <= ~vel_i[VEL_W-1];
        pcnt    <= PW'(2*PULSE - 1);
        pos_o   <= vel_i[VEL_W-1] ? pos_o - 1 : pos_o + 1;
      end
      if (clr_i) pos_o <= '0;
    end
  end
endmodule
