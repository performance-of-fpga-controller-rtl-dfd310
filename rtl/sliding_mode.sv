// sliding_mode: sliding mode extremum seeking of the reflected power, with
// "switching surface skipping" to cut chatter.
//
// The law is  d(theta)/dt = k0 * sgn(sin(pi*s/eps)),  s = Pr + rho*t.
// While the tuner moves the right way Pr falls about as fast as rho*t grows,
// s stays inside one band between two switching surfaces (multiples of eps)
// and the direction is kept; moving the wrong way s climbs at about 2*rho
// and crosses the next surface, which flips the direction.
//
// How it is computed: only s/eps modulo 2 matters (the sign of the sine is
// + in even bands, - in odd ones), so s is kept in band units modulo 2 as a
// Q1.16 word x = Pr/eps + R, R += rho*dt/eps each sample. Working in band
// units lets R wrap freely however long the mode runs. Bit 16 of x is the
// band parity and gives the direction; x[15:0] is the position inside the
// band. Surface skipping: when that position is below skip_lvl (s has come
// down to within skip_lvl*eps of the lower surface, i.e. Pr is falling
// faster than rho*t grows) an extra skip_dt is added to R, pushing s away
// from the surface so that the tuner keeps going instead of reversing.
// skip_lvl = 0 disables skipping.
//
// Interface: Pr unsigned; k0 the speed; rho_dt = rho * sample time (Q16.8,
// Pr units per sample); inv_eps = 1/eps (Q0.16); skip_dt in rho_dt units.
// s_band_o = x (Q1.16): s*pi/eps as a fraction of a turn for the "attitude
// indicator" wheel. s_tape_o = s/eps without the modulo (Q16.16, Pr/eps plus
// an unwrapped copy of R; it wraps only after 2**16 bands) for the moving
// tape; its low 17 bits equal s_band_o. Counters of skips and reversals.
// Timing: one update per tick_i; vel_o is registered.
// Equations (1)-(2) and the skipping idea follow the paper; the band-unit
// arithmetic, fixed-point formats and the reading of "s < 0.1" as a
// fraction of a band are this design's own.
module sliding_mode
  import llrf_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en_i,
  input  logic                    tick_i,
  input  logic [PR_W-1:0]         pr_i,
  input  logic [15:0]             k0_i,
  input  logic [23:0]             rho_dt_i,
  input  logic [15:0]             inv_eps_i,
  input  logic [15:0]             skip_lvl_i,
  input  logic [23:0]             skip_dt_i,
  output logic signed [VEL_W-1:0] vel_o,
  output logic [16:0]             s_band_o,
  output logic [31:0]             s_tape_o,
  output logic                    skip_o,
  output logic [15:0]             skips_o,
  output logic [15:0]             reversals_o
);
  logic [PR_W+15:0] pr_x;      // Pr/eps, Q16.16
  logic [39:0]      r_inc_f;   // rho_dt/eps, Q16.24
  logic [39:0]      k_inc_f;   // skip_dt/eps, Q16.24
  logic [16:0]      r, x, r_inc, k_inc;
  logic             dir, dir_q, skip;
  logic [31:0]      r_full;    // R without the modulo, Q16.16

  assign pr_x    = pr_i * inv_eps_i;
  assign r_inc_f = rho_dt_i * inv_eps_i;
  assign k_inc_f = skip_dt_i * inv_eps_i;
  assign r_inc   = r_inc_f[24:8];
  assign k_inc   = k_inc_f[24:8];
  assign x       = pr_x[16:0] + r;
  assign dir     = ~x[16];
  assign skip    = (x[15:0] < skip_lvl_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r           <= '0;
      dir_q       <= 1'b1;
      vel_o       <= '0;
      s_band_o    <= '0;
      s_tape_o    <= '0;
      r_full      <= '0;
      skip_o      <= 1'b0;
      skips_o     <= '0;
      reversals_o <= '0;
    end else if (!en_i) begin
      r      <= '0;
      r_full <= '0;
      vel_o  <= '0;
      skip_o <= 1'b0;
    end else if (tick_i) begin
      r        <= r + r_inc + (skip ? k_inc : 17'd0);
      r_full   <= r_full + 32'(r_inc) + (skip ? 32'(k_inc) : 32'd0);
      s_band_o <= x;
      s_tape_o <= 32'(pr_x) + r_full;
      skip_o   <= skip;
      dir_q    <= dir;
      vel_o    <= dir ? VEL_W'($signed({1'b0, k0_i})) : -VEL_W'($signed({1'b0, k0_i}));
      if (skip) skips_o <= skips_o + 1'b1;
      if (dir != dir_q) reversals_o <= reversals_o + 1'b1;
    end
  end
endmodule
