// position_pretune: the positional alignment mode of the tuner. It drives the
// tuner to a preset position where RF can be established in the cavity:
// vel = clamp(gain * (preset - pos) / 256, -k0, +k0), a proportional
// position loop whose speed is limited to the maximum tuner speed k0.
// in_pos_o is high while |preset - pos| <= tol.
// Interface: positions in motor steps, gain Q8.8, velocity signed VEL_W.
// Timing: combinational.
// The mode and its speed limit follow the paper; the proportional law is the
// simplest that does it and is this design's choice.
module position_pretune
  import llrf_pkg::*;
(
  input  logic signed [POS_W-1:0] pos_i,
  input  logic signed [POS_W-1:0] preset_i,
  input  logic [15:0]             tol_i,
  input  logic [15:0]             gain_i,
  input  logic [15:0]             k0_i,
  output logic signed [VEL_W-1:0] vel_o,
  output logic                    in_pos_o
);
  logic signed [POS_W:0]    d, tol_s;
  logic signed [POS_W+17:0] v;
  logic signed [POS_W+17:0] k0s;

  assign d   = (POS_W+1)'(preset_i) - (POS_W+1)'(pos_i);
  assign v   = (d * $signed({1'b0, gain_i})) >>> 8;
  assign k0s = (POS_W+18)'(k0_i);

  always_comb begin
    if (v > k0s)       vel_o = VEL_W'(k0s);
    else if (v < -k0s) vel_o = VEL_W'(-k0s);
    else               vel_o = VEL_W'(v);
  end
  assign tol_s    = (POS_W+1)'($signed({1'b0, tol_i}));
  assign in_pos_o = (d <= tol_s) && (d >= -tol_s);
endmodule
