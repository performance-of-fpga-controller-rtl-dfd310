// llrf_channel: one amplitude/phase regulated RF channel.
//
// Signal path: the IF sample from the cavity pickup is mixed with the
// channel's local NCO (cos and -sin), low-pass filtered to I and Q, and
// converted by a CORDIC to amplitude and phase. Each coordinate has its own
// setpoint junction and PID; their outputs drive the amplitude and phase
// inputs of a second NCO, whose cosine is the IF drive sent to the DAC.
// Because amplitude and phase are regulated separately there is no I/Q cross
// coupling through the loop delay, and no loop phase needs to be set.
// The amplitude setpoint is ramped (amp_ramp) and the ramp is also fed
// forward into the amplitude PID output (ff = ramp * ff_gain / 256).
//
// Interface: adc_i IF samples; cfg_i settings; ftw_i the NCO frequency
// word (setting plus DPLL correction); sync_i aligns both NCOs; pr_i and
// pr_lvl_i slow the ramp. dac_o the IF drive; stat_o readback.
// Timing: one sample per clock at the ADC rate. Latency from ADC to DAC is
// about 40 clocks (mixer 1, low-pass 1, CORDIC 18, PID 1, NCO 20).
// The order of blocks is the paper's; the filter kind, widths, the ramp and
// the feedforward path details are this design's own.
module llrf_channel
  import llrf_pkg::*;
#(
  parameter int LPF_K      = 5,
  parameter int CORDIC_N   = 16,
  parameter int RAMP_DIV_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sync_i,
  input  logic signed [ADC_W-1:0] adc_i,
  input  chan_cfg_t               cfg_i,
  input  logic [ACC_W-1:0]        ftw_i,
  input  logic [PR_W-1:0]         pr_i,
  input  logic [PR_W-1:0]         pr_lvl_i,
  output logic signed [DAC_W-1:0] dac_o,
  output chan_stat_t              stat_o
);
  // Local oscillator.
  logic signed [DAC_W-1:0] lo_c, lo_s;
  logic [ACC_W-1:0]        lo_acc, out_acc;
  nco #(.OUT_W(DAC_W), .N(CORDIC_N)) u_lo (
    .clk, .rst_n, .sync_i, .ftw_i, .ph_i('0), .amp_i('1),
    .acc_o(lo_acc), .cos_o(lo_c), .sin_o(lo_s)
  );

  // Down-conversion.
  logic signed [DATA_W-1:0] mi, mq, fi, fq;
  mixer #(.LO_W(DAC_W)) u_mix (
    .clk, .rst_n, .adc_i, .lo_cos_i(lo_c), .lo_sin_i(lo_s), .i_o(mi), .q_o(mq)
  );
  lowpass #(.W(DATA_W), .K(LPF_K)) u_lpf_i (.clk, .rst_n, .en_i(1'b1), .x_i(mi), .y_o(fi));
  lowpass #(.W(DATA_W), .K(LPF_K)) u_lpf_q (.clk, .rst_n, .en_i(1'b1), .x_i(mq), .y_o(fq));

  // Cartesian to polar.
  logic                    pv;
  logic [DATA_W-1:0]       amp_m;
  logic signed [PH_W-1:0]  ph_m;
  cordic_vec #(.W(DATA_W), .PW(PH_W), .N(CORDIC_N)) u_cordic (
    .clk, .rst_n, .valid_i(1'b1), .x_i(fi), .y_i(fq),
    .valid_o(pv), .mag_o(amp_m), .ph_o(ph_m)
  );

  // Amplitude setpoint ramp and feedforward.
  logic [DATA_W-1:0] amp_sp;
  logic              ramp_done, ramp_slow;
  amp_ramp #(.DIV_W(RAMP_DIV_W)) u_ramp (
    .clk, .rst_n, .rf_on_i(cfg_i.rf_on), .target_i(cfg_i.amp_set),
    .step_i(cfg_i.ramp_step), .pr_i, .pr_lvl_i,
    .sp_o(amp_sp), .done_o(ramp_done), .slow_o(ramp_slow)
  );
  logic [DATA_W+GAIN_W-1:0] ff_full;
  logic signed [DATA_W:0]   amp_ff;
  assign ff_full = amp_sp * cfg_i.ff_gain;
  always_comb begin
    if (ff_full[DATA_W+GAIN_W-1:8] > (DATA_W+GAIN_W-8)'(2**DATA_W - 1))
      amp_ff = (DATA_W+1)'(2**DATA_W - 1);
    else
      amp_ff = $signed({1'b0, ff_full[8 +: DATA_W]});
  end

  // Amplitude and phase regulators.
  logic signed [DATA_W:0]  amp_out;
  logic signed [PH_W-1:0]  ph_out;
  logic signed [DATA_W:0]  amp_err;
  logic signed [PH_W:0]    ph_err;
  logic loop_en;
  assign loop_en = cfg_i.loop_on & cfg_i.rf_on;

  pid #(.IN_W(DATA_W), .OUT_W(DATA_W+1), .WRAP(1'b0),
        .OUT_MIN(0), .OUT_MAX(2**DATA_W-1)) u_pid_amp (
    .clk, .rst_n, .en_i(loop_en), .valid_i(pv),
    .set_i(amp_sp), .meas_i(amp_m),
    .kp_i(cfg_i.amp_kp), .ki_i(cfg_i.amp_ki), .kd_i(cfg_i.amp_kd),
    .ff_i(cfg_i.rf_on ? amp_ff : '0), .out_o(amp_out), .err_o(amp_err)
  );
  pid #(.IN_W(PH_W), .OUT_W(PH_W), .WRAP(1'b1),
        .OUT_MIN(-(2**(PH_W-1))), .OUT_MAX(2**(PH_W-1)-1)) u_pid_ph (
    .clk, .rst_n, .en_i(loop_en), .valid_i(pv),
    .set_i(cfg_i.ph_set), .meas_i(ph_m),
    .kp_i(cfg_i.ph_kp), .ki_i(cfg_i.ph_ki), .kd_i(cfg_i.ph_kd),
    .ff_i('0), .out_o(ph_out), .err_o(ph_err)
  );

  // Polar to IF drive.
  logic [DATA_W-1:0]       drive_amp;
  logic signed [DAC_W-1:0] out_s;
  assign drive_amp = cfg_i.rf_on ? amp_out[DATA_W-1:0] : '0;
  nco #(.OUT_W(DAC_W), .N(CORDIC_N)) u_out (
    .clk, .rst_n, .sync_i, .ftw_i, .ph_i(ph_out), .amp_i(drive_amp),
    .acc_o(out_acc), .cos_o(dac_o), .sin_o(out_s)
  );

  assign stat_o = '{amp: amp_m, ph: ph_m, drive_amp: drive_amp,
                    drive_ph: ph_out, amp_sp: amp_sp};
endmodule
