// cavity_model: behavioural model of one cavity seen from the controller's
// IF ports, for testbenches. The drive is delayed D samples and scaled by
// G/256; tuner detuning delta = (pos - POS0)/WIDTH scales the field by
// 1/sqrt(1+delta^2) and turns its phase by -atan(delta). The phase turn is
// applied with a quadrature copy of the IF made from the sample 2 clocks
// earlier (2 samples at 31.6/250 of a turn per sample = 91 degrees).
module cavity_model #(
  parameter int  D     = 10,
  parameter int  G     = 256,
  parameter int  POS0  = 300,
  parameter real WIDTH = 50.0
) (
  input  logic               clk,
  input  logic signed [15:0] dac_i,
  input  int                 pos_i,
  output logic signed [15:0] adc_o
);
  logic signed [15:0] dl [D+2];
  real delta, a, ph, v;
  always @(posedge clk) begin
    dl[0] <= dac_i;
    for (int k = 1; k < D + 2; k++) dl[k] <= dl[k-1];
    delta = real'(pos_i - POS0) / WIDTH;
    a  = 1.0 / $sqrt(1.0 + delta * delta);
    ph = -$atan(delta);
    v  = a * real'(G) / 256.0 * (real'(dl[D-1]) * $cos(ph) - real'(dl[D+1]) * $sin(ph));
    if (v > 32767.0) v = 32767.0;
    if (v < -32768.0) v = -32768.0;
    adc_o <= 16'($rtoi(v));
  end
endmodule
