// lowpass: first-order IIR low-pass that removes the 2*IF product after the
// mixer and keeps the baseband I or Q. y[n+1] = y[n] + (x[n] - y[n]) / 2**K,
// unity DC gain, -3 dB at about fs / (2*pi*2**K) (1.2 MHz for K = 5 at
// 250 MHz).
// Interface: signed W-bit in and out, en_i qualifies a sample.
// Timing: one sample per clock, output registered (one clock).
// The paper draws a low-pass after each multiplier but not its kind or
// order; the first-order IIR is this design's choice.
module lowpass
  import llrf_pkg::*;
#(
  parameter int W = DATA_W,
  parameter int K = 5
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en_i,
  input  logic signed [W-1:0] x_i,
  output logic signed [W-1:0] y_o
);
  logic signed [W+K-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (en_i) acc <= acc + (W+K)'(x_i) - (W+K)'(acc >>> K);
  end
  assign y_o = W'(acc >>> K);
endmodule
