// mixer: the pair of digital multipliers of the down-converter. Each ADC
// sample is multiplied by the local oscillator's cosine and (negated) sine,
// giving I = adc*cos and Q = -adc*sin; for an input A*cos(wt+phi) at the LO
// frequency the low-pass filtered result is (A/2)*(cos phi, sin phi) in
// full-scale units.
// Interface: signed ADC_W sample, signed LO_W oscillator words; i_o/q_o are
// the products' top DATA_W bits (product >>> ADC_W+LO_W-1-DATA_W),
// clipped to the positive limit in the one case that overflows.
// Timing: one sample per clock, one clock latency.
// The two multipliers are the paper's (the "x" blocks); widths are own.
module mixer
  import llrf_pkg::*;
#(
  parameter int LO_W = DAC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [ADC_W-1:0]  adc_i,
  input  logic signed [LO_W-1:0]   lo_cos_i,
  input  logic signed [LO_W-1:0]   lo_sin_i,
  output logic signed [DATA_W-1:0] i_o,
  output logic signed [DATA_W-1:0] q_o
);
  localparam int PW = ADC_W + LO_W;
  localparam int SH = ADC_W + LO_W - 1 - DATA_W;

  logic signed [PW-1:0] pi_, pq;
  assign pi_ = adc_i * lo_cos_i;
  assign pq  = -(adc_i * lo_sin_i);

  // Only (-full scale) * (-full scale) overflows; it is clipped.
  function automatic logic signed [DATA_W-1:0] sat(input logic signed [PW-1:0] v);
    if (v > PW'(2**(DATA_W-1) - 1)) return DATA_W'(2**(DATA_W-1) - 1);
    else                            return v[DATA_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_o <= '0;
      q_o <= '0;
    end else begin
      i_o <= sat(pi_ >>> SH);
      q_o <= sat(pq >>> SH);
    end
  end
endmodule
