// tuner_ctrl: resonance control of one cavity tuner, inside the controller.
//
// It holds the three tuning algorithms (positional alignment, phase
// comparison, sliding mode extremum seeking), the automatic rho estimation,
// the power-up sequencer and the stepper motor controller. The active mode
// comes from the sequencer when auto-sequence is set, else from the host;
// a rho estimation, once started, takes over the motor until it ends. The
// mode's velocity command goes to the stepper controller.
// Sliding mode uses the host's rho_dt, or the last estimate when the host
// has written rho_dt = 0. With sm_open set ("open loop" on the operator
// panel) sliding mode computes s and counts reversals but the tuner is
// not moved; what open loop does is not described, this is own reading.
//
// Interface: pr_i reflected power readback; tune_ph_i the tuning phase
// (drive phase minus cavity phase, taken from the phase regulator's output);
// cav_amp_i cavity amplitude (for "RF established"); step/dir/enable to the
// motor driver; rf_gate_o the sequencer's RF enable; stat_o readback.
// Timing: the tuner algorithms update once per sample tick, a tick every
// TICK_DIV clocks (200 ms at 250 MHz by default).
module tuner_ctrl
  import llrf_pkg::*;
#(
  parameter int TICK_DIV     = 50_000_000,
  parameter int STEP_ACC_W   = 28,
  parameter int STEP_PULSE   = 2500,
  parameter int HOLD         = 5,
  parameter int PULSE_PERIOD = 2_500_000,
  parameter int PULSE_ON     = 250_000
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  tuner_cfg_t             cfg_i,
  input  logic                   clr_pos_i,
  input  logic                   rho_start_i,
  input  logic [PR_W-1:0]        pr_i,
  input  logic signed [PH_W-1:0] tune_ph_i,
  input  logic [DATA_W-1:0]      cav_amp_i,
  output logic                   step_o,
  output logic                   dir_o,
  output logic                   motor_en_o,
  output logic                   rf_gate_o,
  output logic                   tick_o,
  output tuner_stat_t            stat_o
);
  // Sample tick.
  localparam int TW = $clog2(TICK_DIV);
  logic [TW-1:0] tcnt;
  logic          tick;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tcnt <= '0;
    else        tcnt <= (tcnt == TW'(TICK_DIV - 1)) ? '0 : tcnt + 1'b1;
  end
  assign tick   = (tcnt == TW'(TICK_DIV - 1));
  assign tick_o = tick;

  logic signed [POS_W-1:0] pos;

  // Positional alignment.
  logic signed [VEL_W-1:0] v_pos;
  logic                    in_pos;
  position_pretune u_pos (
    .pos_i(pos), .preset_i(cfg_i.preset_pos), .tol_i(cfg_i.pos_tol),
    .gain_i(cfg_i.pos_gain), .k0_i(cfg_i.k0), .vel_o(v_pos), .in_pos_o(in_pos)
  );

  // Phase comparison.
  logic signed [VEL_W-1:0] v_ph;
  phase_align u_ph (
    .ph_i(tune_ph_i), .set_i(cfg_i.tune_ph_set), .gain_i(cfg_i.ph_gain),
    .k0_i(cfg_i.k0), .vel_o(v_ph)
  );

  // Sequencer.
  tuner_mode_e seq_mode, mode;
  logic        rf_ok;
  assign rf_ok = (cav_amp_i >= cfg_i.rf_ok_lvl);
  powerup_seq #(.HOLD(HOLD), .PULSE_PERIOD(PULSE_PERIOD), .PULSE_ON(PULSE_ON)) u_seq (
    .clk, .rst_n, .auto_i(cfg_i.auto_seq), .tick_i(tick), .in_pos_i(in_pos),
    .rf_ok_i(rf_ok), .pr_i, .pr_lvl_i(cfg_i.pr_sm_lvl),
    .mode_o(seq_mode), .rf_gate_o(rf_gate_o)
  );

  // Rho estimation.
  logic                    rho_busy, rho_valid;
  logic signed [VEL_W-1:0] v_rho;
  logic [23:0]             rho_est;
  rho_estimator u_rho (
    .clk, .rst_n, .start_i(rho_start_i), .tick_i(tick), .pr_i, .pos_i(pos),
    .k0_i(cfg_i.k0), .swing_i(cfg_i.rho_swing), .busy_o(rho_busy),
    .vel_o(v_rho), .rho_dt_o(rho_est), .valid_o(rho_valid)
  );

  always_comb begin
    if (rho_busy)           mode = TM_RHO_EST;
    else if (cfg_i.auto_seq) mode = seq_mode;
    else                    mode = cfg_i.man_mode;
  end

  // Sliding mode.
  logic signed [VEL_W-1:0] v_sm;
  logic [16:0]             s_band;
  logic [31:0]             s_tape;
  logic                    skip;
  logic [15:0]             skips, revs;
  logic [23:0]             rho_use;
  assign rho_use = (cfg_i.rho_dt == '0 && rho_valid) ? rho_est : cfg_i.rho_dt;
  sliding_mode u_sm (
    .clk, .rst_n, .en_i(mode == TM_SLIDING), .tick_i(tick), .pr_i,
    .k0_i(cfg_i.k0), .rho_dt_i(rho_use), .inv_eps_i(cfg_i.inv_eps),
    .skip_lvl_i(cfg_i.skip_lvl), .skip_dt_i(cfg_i.skip_dt),
    .vel_o(v_sm), .s_band_o(s_band), .s_tape_o(s_tape), .skip_o(skip),
    .skips_o(skips), .reversals_o(revs)
  );

  logic signed [VEL_W-1:0] vel;
  always_comb begin
    case (mode)
      TM_POSITION: vel = v_pos;
      TM_PHASE:    vel = v_ph;
      TM_SLIDING:  vel = cfg_i.sm_open ? '0 : v_sm;
      TM_RHO_EST:  vel = v_rho;
      default:     vel = '0;
    endcase
  end

  stepper_ctrl #(.RATE_W(STEP_ACC_W), .PULSE(STEP_PULSE)) u_step (
    .clk, .rst_n, .en_i(cfg_i.motor_en && mode != TM_OFF), .vel_i(vel),
    .clr_i(clr_pos_i), .step_o, .dir_o, .motor_en_o, .pos_o(pos)
  );

  assign stat_o = '{pos: pos, mode: mode, vel: vel, s_band: s_band, s_tape: s_tape,
                    rho_est: rho_est, rho_valid: rho_valid,
                    skips: skips, reversals: revs};
endmodule
