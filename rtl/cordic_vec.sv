// cordic_vec: pipelined CORDIC in vectoring mode, the rectangular-to-polar
// converter that turns the filtered I/Q pair of a channel into amplitude and
// phase, so that amplitude and phase can be regulated by separate loops.
//
// How it works: a pre-rotation by 180 degrees brings the vector into the right
// half plane; then N micro-rotations by +-atan(2**-i) drive y to zero while the
// rotation angles are summed in z. The words carry G guard bits below the
// input LSB so that the truncating shifts do not bias the result. The remaining x is K*|v| (K = 1.64676); one
// last stage multiplies it by 1/K so that mag_o is the true magnitude.
//
// Interface: x_i/y_i signed W bits with valid_i; mag_o unsigned W bits (it
// cannot exceed sqrt(2)*2**(W-1)), ph_o the angle atan2(y,x) as a PW-bit
// fraction of a full turn (two's complement, +-half turn).
// Timing: fully pipelined, one result per clock, latency N+2 clocks.
// The CORDIC itself is the paper's; widths, iteration count and the gain
// correction stage are this design's choices.
module cordic_vec
  import llrf_pkg::*;
#(
  parameter int W  = DATA_W,
  parameter int PW = PH_W,
  parameter int N  = 16,
  parameter int G  = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid_i,
  input  logic signed [W-1:0] x_i,
  input  logic signed [W-1:0] y_i,
  output logic                valid_o,
  output logic        [W-1:0] mag_o,
  output logic signed [PW-1:0] ph_o
);
  localparam int IW = W + 2 + G;   // G guard bits against truncation bias

  logic signed [IW-1:0] xs [N+1];
  logic signed [IW-1:0] ys [N+1];
  logic        [31:0]   zs [N+1];
  logic                 vs [N+1];

  // Stage 0: pre-rotation into the right half plane.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0; ys[0] <= '0; zs[0] <= '0; vs[0] <= 1'b0;
    end else begin
      vs[0] <= valid_i;
      if (x_i < 0) begin
        xs[0] <= -(IW'(x_i) <<< G);
        ys[0] <= -(IW'(y_i) <<< G);
        zs[0] <= 32'h8000_0000;
      end else begin
        xs[0] <= IW'(x_i) <<< G;
        ys[0] <= IW'(y_i) <<< G;
        zs[0] <= 32'h0;
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[i+1] <= '0; ys[i+1] <= '0; zs[i+1] <= '0; vs[i+1] <= 1'b0;
      end else begin
        vs[i+1] <= vs[i];
        if (ys[i] >= 0) begin
          xs[i+1] <= xs[i] + (ys[i] >>> i);
          ys[i+1] <= ys[i] - (xs[i] >>> i);
          zs[i+1] <= zs[i] + ATAN_TAB[i];
        end else begin
          xs[i+1] <= xs[i] - (ys[i] >>> i);
          ys[i+1] <= ys[i] + (xs[i] >>> i);
          zs[i+1] <= zs[i] - ATAN_TAB[i];
        end
      end
    end
  end

  // Gain correction: mag = x * (1/K).
  logic [IW+15:0] mag_full;
  assign mag_full = $unsigned(xs[N]) * CORDIC_INV_GAIN;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0; mag_o <= '0; ph_o <= '0;
    end else begin
      valid_o <= vs[N];
      mag_o   <= mag_full[16 + G +: W];
      ph_o    <= zs[N][31 -: PW];
    end
  end
endmodule
