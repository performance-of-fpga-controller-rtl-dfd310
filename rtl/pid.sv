// pid: setpoint summing junction and PID regulator of one loop (amplitude or
// phase). error = set - meas; out = ff + (kp*e + I + kd*(e - e_prev)) / 256
// with I += ki*e, gains unsigned Q8.8. The integrator and the output are
// clamped to [OUT_MIN, OUT_MAX] (anti-windup). With WRAP = 1 (phase) the
// error is taken modulo 2**IN_W, so it is always the short way round, and
// the integrator and output wrap modulo one turn instead of clamping, since
// a drive phase of +half turn and -half turn are the same.
// When en_i is low the loop is open: the integrator is cleared and the
// output is the feedforward term alone.
// Interface: set/meas IN_W bits (unsigned unless WRAP), ff and out OUT_W
// bits, signed; valid_i qualifies a new measurement.
// Timing: the output updates one clock after each valid_i.
// The summing junction and the PID block follow the paper's block diagram;
// gains format, clamping and the feedforward input are this design's own.
module pid
  import llrf_pkg::*;
#(
  parameter int  IN_W    = DATA_W,
  parameter int  OUT_W   = DATA_W + 1,
  parameter bit  WRAP    = 1'b0,
  parameter int     OUT_MIN = 0,
  parameter int     OUT_MAX = 2**DATA_W - 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en_i,
  input  logic                    valid_i,
  input  logic [IN_W-1:0]         set_i,
  input  logic [IN_W-1:0]         meas_i,
  input  logic [GAIN_W-1:0]       kp_i,
  input  logic [GAIN_W-1:0]       ki_i,
  input  logic [GAIN_W-1:0]       kd_i,
  input  logic signed [OUT_W-1:0] ff_i,
  output logic signed [OUT_W-1:0] out_o,
  output logic signed [IN_W:0]    err_o
);
  localparam int EW = IN_W + 1;
  localparam int AW = OUT_W + 8 + 2;   // integrator, Q.8
  localparam int SW = EW + GAIN_W + 2;
  localparam int TW = (SW > AW ? SW : AW) + 2;

  logic signed [EW-1:0] e, e_prev;
  always_comb begin
    if (WRAP) e = EW'($signed(set_i - meas_i));
    else      e = $signed({1'b0, set_i}) - $signed({1'b0, meas_i});
  end
  assign err_o = e;

  logic signed [SW-1:0] p_t, i_inc, d_t;
  assign p_t   = e * $signed({1'b0, kp_i});
  assign i_inc = e * $signed({1'b0, ki_i});
  assign d_t   = (SW'(e) - SW'(e_prev)) * $signed({1'b0, kd_i});

  localparam logic signed [TW-1:0] IMAX = TW'(OUT_MAX) <<< 8;
  localparam logic signed [TW-1:0] IMIN = TW'(OUT_MIN) <<< 8;
  localparam logic signed [TW-1:0] OMAX = TW'(OUT_MAX);
  localparam logic signed [TW-1:0] OMIN = TW'(OUT_MIN);

  logic signed [AW-1:0] integ;
  logic signed [TW-1:0] i_next, sum;

  always_comb begin
    i_next = TW'(integ) + TW'(i_inc);
    if (WRAP) begin
      // phase: integrator and output are modulo one turn
      i_next = TW'($signed(i_next[OUT_W+7:0]));
    end else begin
      if (i_next > IMAX) i_next = IMAX;
      if (i_next < IMIN) i_next = IMIN;
    end
    sum = TW'(ff_i) + ((TW'(p_t) + i_next + TW'(d_t)) >>> 8);
    if (!WRAP) begin
      if (sum > OMAX) sum = OMAX;
      if (sum < OMIN) sum = OMIN;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ  <= '0;
      e_prev <= '0;
      out_o  <= '0;
    end else if (!en_i) begin
      integ  <= '0;
      e_prev <= '0;
      if (TW'(ff_i) > OMAX)      out_o <= OUT_W'(OMAX);
      else if (TW'(ff_i) < OMIN) out_o <= OUT_W'(OMIN);
      else                       out_o <= ff_i;
    end else if (valid_i) begin
      integ  <= AW'(i_next);
      e_prev <= e;
      out_o  <= OUT_W'(sum);
    end
  end
endmodule
