// cordic_rot: pipelined CORDIC in rotation mode, the polar-to-rectangular
// converter inside the NCO. It rotates the vector (amp, 0) by the angle
// phase_i and returns K*amp*cos(phase) and K*amp*sin(phase), K = 1.64676
// (the caller pre-scales amp by 1/K when it wants unit gain).
//
// How it works: angles in the left half plane are first rotated by 180
// degrees (x = -amp); N micro-rotations by +-atan(2**-i) then drive the
// residual angle z to zero.
// Interface: amp_i signed W bits, phase_i a 32-bit fraction of a full turn;
// cos_o/sin_o signed W+2 bits.
// Timing: one result per clock, latency N+1 clocks.
module cordic_rot
  import llrf_pkg::*;
#(
  parameter int W = DATA_W,
  parameter int N = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  valid_i,
  input  logic signed [W-1:0]   amp_i,
  input  logic        [31:0]    phase_i,
  output logic                  valid_o,
  output logic signed [W+1:0]   cos_o,
  output logic signed [W+1:0]   sin_o
);
  localparam int IW = W + 2;

  logic signed [IW-1:0] xs [N+1];
  logic signed [IW-1:0] ys [N+1];
  logic signed [31:0]   zs [N+1];
  logic                 vs [N+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0; ys[0] <= '0; zs[0] <= '0; vs[0] <= 1'b0;
    end else begin
      vs[0] <= valid_i;
      ys[0] <= '0;
      if (phase_i[31] ^ phase_i[30]) begin
        xs[0] <= -IW'(amp_i);
        zs[0] <= $signed(phase_i - 32'h8000_0000);
      end else begin
        xs[0] <= IW'(amp_i);
        zs[0] <= $signed(phase_i);
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[i+1] <= '0; ys[i+1] <= '0; zs[i+1] <= '0; vs[i+1] <= 1'b0;
      end else begin
        vs[i+1] <= vs[i];
        if (zs[i] >= 0) begin
          xs[i+1] <= xs[i] - (ys[i] >>> i);
          ys[i+1] <= ys[i] + (xs[i] >>> i);
          zs[i+1] <= zs[i] - $signed(ATAN_TAB[i]);
        end else begin
          xs[i+1] <= xs[i] + (ys[i] >>> i);
          ys[i+1] <= ys[i] - (xs[i] >>> i);
          zs[i+1] <= zs[i] + $signed(ATAN_TAB[i]);
        end
      end
    end
  end

  assign valid_o = vs[N];
  assign cos_o   = xs[N];
  assign sin_o   = ys[N];
endmodule
