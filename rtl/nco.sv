// nco: numerically controlled oscillator with amplitude and phase inputs.
// The same module serves twice in each channel: as the local oscillator of
// the digital down-converter (full amplitude, zero phase) and as the output
// modulator that turns the regulated amplitude and phase back into an IF
// drive for the DAC (the "NCO" block with Amp and Phase inputs).
//
// How it works: a 32-bit phase accumulator advances by ftw_i every clock;
// the phase offset ph_i (PH_W-bit fraction of a turn) is added, and a
// rotation-mode CORDIC converts (amp, phase) to cos and sin. The amplitude is
// pre-multiplied by 1/K to cancel the CORDIC gain, so cos_o peaks at amp_i
// scaled to OUT_W bits (amp_i = 2**DATA_W-1 gives full scale).
// sync_i clears the accumulator so that all NCOs of a controller run in step.
// Timing: a new sample every clock; a change of ftw/ph/amp shows at the
// outputs N+3 clocks later (19 at N=16).
// Phase accumulation and CORDIC synthesis follow common NCO practice; the
// paper shows the NCO but not its insides.
module nco
  import llrf_pkg::*;
#(
  parameter int OUT_W = DAC_W,
  parameter int N     = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     sync_i,
  input  logic        [ACC_W-1:0]  ftw_i,
  input  logic signed [PH_W-1:0]   ph_i,
  input  logic        [DATA_W-1:0] amp_i,
  output logic        [ACC_W-1:0]  acc_o,
  output logic signed [OUT_W-1:0]  cos_o,
  output logic signed [OUT_W-1:0]  sin_o
);
  logic [ACC_W-1:0]  acc;
  logic [31:0]       phase_q;
  logic signed [DATA_W:0]   amp_q;
  logic [DATA_W+15:0] amp_scaled;

  assign amp_scaled = amp_i * CORDIC_INV_GAIN;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      phase_q <= '0;
      amp_q   <= '0;
    end else begin
      acc     <= sync_i ? '0 : acc + ftw_i;
      phase_q <= acc + {ph_i, {(32-PH_W){1'b0}}};
      // amp * 0.60725 < 2**DATA_W: a positive DATA_W+1-bit signed word.
      amp_q   <= $signed({1'b0, amp_scaled[16 +: DATA_W]});
    end
  end
  assign acc_o = acc;

  logic                     rot_v;
  logic signed [DATA_W+2:0] rc, rs;

  cordic_rot #(.W(DATA_W+1), .N(N)) u_rot (
    .clk, .rst_n, .valid_i(1'b1), .amp_i(amp_q), .phase_i(phase_q),
    .valid_o(rot_v), .cos_o(rc), .sin_o(rs)
  );

  // Scale DATA_W+3 -> OUT_W bits (|rc| <= 2**DATA_W) with saturation.
  localparam int SH = DATA_W + 1 - OUT_W;
  localparam logic signed [OUT_W-1:0] MAXV = {1'b0, {(OUT_W-1){1'b1}}};
  localparam logic signed [OUT_W-1:0] MINV = {1'b1, {(OUT_W-1){1'b0}}};

  function automatic logic signed [OUT_W-1:0] sat(input logic signed [DATA_W+2:0] v);
    logic signed [DATA_W+2:0] s;
    s = v >>> SH;
    if (s > (DATA_W+3)'(MAXV))      return MAXV;
    else if (s < (DATA_W+3)'(MINV)) return MINV;
    else                            return s[OUT_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cos_o <= '0;
      sin_o <= '0;
    end else begin
      cos_o <= sat(rc);
      sin_o <= sat(rs);
    end
  end
endmodule
