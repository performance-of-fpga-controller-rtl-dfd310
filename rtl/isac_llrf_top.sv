// isac_llrf_top: the complete controller of one NIM module: three amplitude/
// phase regulated RF channels, the DPLL that locks their oscillators to the
// RF reference, the tuner controller of the cavity on channel 0, and the
// register file behind the 48-bit host reports.
//
// Connections: the DPLL locks its own NCO, running at channel 0's frequency
// word, to the reference. Every channel NCO runs at its own frequency word
// plus the DPLL correction times the channel's pll_mult (its frequency over
// the reference frequency, Q8.8, 1.0 at reset), so channels at harmonics of
// the reference stay phase-locked to it; this scaling is registered (one
// clock). All NCOs are cleared together by sync_i. The tuner reads
// the reflected power pr_i, the cavity amplitude of channel 0, and the tuning
// phase = drive phase - cavity phase of channel 0; while its power-up
// sequence runs it gates channel 0's RF (pulsed during positional alignment,
// CW after). Channel 0's amplitude ramp slows down above pr_ramp_lvl.
// The ADCs, DACs, the USB/HID device with its processor, and the motor driver
// are outside: their signals are ports.
// Timing: one sample per clock at the 250 MHz ADC/DAC rate; the tuner works
// on a sample tick every TICK_DIV clocks.
// One tuner, on channel 0, is this design's choice; the paper gives the
// number of RF channels (3) but not the number of tuners per controller.
module isac_llrf_top
  import llrf_pkg::*;
#(
  parameter int LPF_K        = 5,
  parameter int CORDIC_N     = 16,
  parameter int RAMP_DIV_W   = 16,
  parameter int TICK_DIV     = 50_000_000,
  parameter int STEP_ACC_W   = 28,
  parameter int STEP_PULSE   = 2500,
  parameter int HOLD         = 5,
  parameter int PULSE_PERIOD = 2_500_000,
  parameter int PULSE_ON     = 250_000,
  parameter int LOCK_TOL     = 512,
  parameter int LOCK_CNT     = 1024
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sync_i,
  // ADCs and DACs
  input  logic signed [ADC_W-1:0] adc_i [N_CHANNELS],
  input  logic signed [ADC_W-1:0] ref_adc_i,
  output logic signed [DAC_W-1:0] dac_o [N_CHANNELS],
  // reflected power readback of the tuned cavity
  input  logic [PR_W-1:0]         pr_i,
  // host reports
  input  hid_report_t             rep_i,
  input  logic                    rep_valid_i,
  output hid_report_t             rep_o,
  output logic                    rep_valid_o,
  // stepping motor driver
  output logic                    step_o,
  output logic                    dir_o,
  output logic                    motor_en_o,
  output logic                    tick_o,
  output logic                    dpll_locked_o
);
  chan_cfg_t               ccfg [N_CHANNELS];
  chan_cfg_t               ccfg_eff [N_CHANNELS];
  chan_stat_t              cstat [N_CHANNELS];
  tuner_cfg_t              tcfg;
  tuner_stat_t             tstat;
  logic                    clr_pos, rho_start, dpll_en, rf_gate;
  logic [15:0]             dpll_kp, dpll_ki;
  logic signed [ACC_W-1:0] corr;
  logic signed [PH_W-1:0]  ref_ph;

  hid_regs u_regs (
    .clk, .rst_n, .rep_i, .rep_valid_i, .rep_o, .rep_valid_o,
    .chan_cfg_o(ccfg), .tuner_cfg_o(tcfg), .clr_pos_o(clr_pos),
    .rho_start_o(rho_start), .dpll_kp_o(dpll_kp), .dpll_ki_o(dpll_ki),
    .dpll_en_o(dpll_en), .chan_stat_i(cstat), .tuner_stat_i(tstat), .pr_i,
    .dpll_corr_i(corr), .dpll_locked_i(dpll_locked_o)
  );

  dpll #(.LPF_K(LPF_K), .CORDIC_N(CORDIC_N), .LOCK_TOL(LOCK_TOL), .LOCK_CNT(LOCK_CNT)) u_dpll (
    .clk, .rst_n, .en_i(dpll_en), .ref_i(ref_adc_i), .base_ftw_i(ccfg[0].ftw),
    .kp_i(dpll_kp), .ki_i(dpll_ki), .corr_o(corr), .ph_o(ref_ph),
    .locked_o(dpll_locked_o)
  );

  // Each channel follows the reference with the DPLL correction scaled by its
  // frequency ratio to the reference (pll_mult, Q8.8), registered.
  logic [ACC_W-1:0] ftw_c [N_CHANNELS];
  for (genvar c = 0; c < N_CHANNELS; c++) begin : g_ftw
    logic signed [ACC_W+16:0] corr_m;
    assign corr_m = corr * $signed({1'b0, ccfg[c].pll_mult});
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) ftw_c[c] <= FTW_IF;
      else        ftw_c[c] <= ccfg[c].ftw + ACC_W'(corr_m >>> 8);
  end

  for (genvar c = 0; c < N_CHANNELS; c++) begin : g_ch
    always_comb begin
      ccfg_eff[c] = ccfg[c];
      if (c == 0 && tcfg.auto_seq) ccfg_eff[c].rf_on = ccfg[c].rf_on & rf_gate;
    end
    llrf_channel #(.LPF_K(LPF_K), .CORDIC_N(CORDIC_N), .RAMP_DIV_W(RAMP_DIV_W)) u_ch (
      .clk, .rst_n, .sync_i, .adc_i(adc_i[c]), .cfg_i(ccfg_eff[c]),
      .ftw_i(ftw_c[c]),
      .pr_i(c == 0 ? pr_i : '0), .pr_lvl_i(tcfg.pr_ramp_lvl),
      .dac_o(dac_o[c]), .stat_o(cstat[c])
    );
  end

  logic signed [PH_W-1:0] tune_ph;
  assign tune_ph = cstat[0].drive_ph - cstat[0].ph;

  tuner_ctrl #(
    .TICK_DIV(TICK_DIV), .STEP_ACC_W(STEP_ACC_W), .STEP_PULSE(STEP_PULSE),
    .HOLD(HOLD), .PULSE_PERIOD(PULSE_PERIOD), .PULSE_ON(PULSE_ON)
  ) u_tuner (
    .clk, .rst_n, .cfg_i(tcfg), .clr_pos_i(clr_pos), .rho_start_i(rho_start),
    .pr_i, .tune_ph_i(tune_ph), .cav_amp_i(cstat[0].amp),
    .step_o, .dir_o, .motor_en_o, .rf_gate_o(rf_gate), .tick_o, .stat_o(tstat)
  );
endmodule
