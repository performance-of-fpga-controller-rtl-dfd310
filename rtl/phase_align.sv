// phase_align: the phase comparison mode of the tuner. The detuning of the
// cavity shows as the phase between the drive and the cavity field; the
// tuner is moved to bring that phase to its setpoint:
// vel = clamp(gain * wrap(set - phase) / 256, -k0, +k0).
// Interface: phases as PH_W-bit fractions of a turn (the difference wraps),
// gain Q8.8, velocity signed VEL_W.
// Timing: combinational.
// The mode follows the paper; the proportional law and the use of the phase
// regulator's output as the measured tuning phase are this design's own.
module phase_align
  import llrf_pkg::*;
(
  input  logic signed [PH_W-1:0]  ph_i,
  input  logic signed [PH_W-1:0]  set_i,
  input  logic [15:0]             gain_i,
  input  logic [15:0]             k0_i,
  output logic signed [VEL_W-1:0] vel_o
);
  logic signed [PH_W-1:0]   e;
  logic signed [PH_W+17:0]  v;
  logic signed [PH_W+17:0]  k0s;

  assign e   = set_i - ph_i;
  assign v   = (e * $signed({1'b0, gain_i})) >>> 8;
  assign k0s = (PH_W+18)'(k0_i);

  always_comb begin
    if (v > k0s)       vel_o = VEL_W'(k0s);
    else if (v < -k0s) vel_o = VEL_W'(-k0s);
    else               vel_o = VEL_W'(v);
  end
endmodule
