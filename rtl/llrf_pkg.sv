// llrf_pkg: shared widths, constants and types of the amplitude/phase LLRF
// controller and its tuner controller.
//
// Numbers that follow the paper: 250 MHz sampling, 31.6 MHz IF, three RF
// channels per controller, 48-bit host reports. Everything else here (word
// widths, the CORDIC angle table precision, the report layout and the register
// map) is this design's own choice.
package llrf_pkg;

  // Sample clock and IF (the paper's numbers).
  localparam int unsigned FS_HZ      = 250_000_000;
  localparam int unsigned IF_HZ      = 31_600_000;
  localparam int          N_CHANNELS = 3;

  // Data widths (own choice).
  localparam int ADC_W   = 16;   // ADC sample, two's complement
  localparam int DAC_W   = 16;   // DAC sample, two's complement
  localparam int DATA_W  = 18;   // I/Q and amplitude words inside the loop
  localparam int PH_W    = 16;   // phase word, full turn = 2**PH_W
  localparam int ACC_W   = 32;   // NCO phase accumulator, full turn = 2**32
  localparam int GAIN_W  = 16;   // PID gains, Q8.8
  localparam int POS_W   = 32;   // tuner position in motor steps
  localparam int VEL_W   = 16;   // tuner velocity command
  localparam int PR_W    = 16;   // reflected power readback

  // Frequency tuning word for the 31.6 MHz IF at 250 MHz:
  // round(IF_HZ / FS_HZ * 2**32).
  localparam logic [ACC_W-1:0] FTW_IF = 32'd542_883_866;

  // CORDIC angle table: ATAN_TAB[i] = round(atan(2**-i) / (2*pi) * 2**32),
  // i.e. atan(2**-i) in units of a full turn scaled to 32 bits.
  localparam int CORDIC_MAX_ITER = 24;
  localparam logic [31:0] ATAN_TAB [CORDIC_MAX_ITER] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756,
    32'd42667331,  32'd21354465,  32'd10679838,  32'd5340245,
    32'd2670163,   32'd1335087,   32'd667544,    32'd333772,
    32'd166886,    32'd83443,     32'd41722,     32'd20861,
    32'd10430,     32'd5215,      32'd2608,      32'd1304,
    32'd652,       32'd326,       32'd163,       32'd81
  };
  // 1/K of an unrolled CORDIC (K = 1.64676), Q0.16: round(0.607253 * 65536).
  localparam logic [15:0] CORDIC_INV_GAIN = 16'd39797;

  // Host report (48 bits, the paper's length); layout is this design's own.
  localparam int REPORT_W = 48;
  typedef enum logic [7:0] {
    OP_NOP   = 8'h00,
    OP_WRITE = 8'h01,
    OP_READ  = 8'h02
  } hid_op_e;
  typedef struct packed {
    hid_op_e     op;     // [47:40]
    logic [7:0]  addr;   // [39:32]
    logic [31:0] data;   // [31:0]
  } hid_report_t;

  // Tuner operating modes, in the order of the power-up sequence.
  typedef enum logic [2:0] {
    TM_OFF      = 3'd0,
    TM_POSITION = 3'd1,
    TM_PHASE    = 3'd2,
    TM_SLIDING  = 3'd3,
    TM_RHO_EST  = 3'd4
  } tuner_mode_e;

  // Per-channel settings of the amplitude/phase loop.
  typedef struct packed {
    logic [DATA_W-1:0]        amp_set;   // amplitude setpoint (target of the ramp)
    logic signed [PH_W-1:0]   ph_set;    // phase setpoint
    logic [GAIN_W-1:0]        amp_kp, amp_ki, amp_kd;
    logic [GAIN_W-1:0]        ph_kp, ph_ki, ph_kd;
    logic [15:0]              ramp_step; // amplitude ramp step per ramp tick
    logic [15:0]              ff_gain;   // feedforward gain on the ramp, Q8.8
    logic                     loop_on;   // close the loops
    logic                     rf_on;     // drive enabled
    logic [ACC_W-1:0]         ftw;       // NCO frequency word
    logic [15:0]              pll_mult;  // DPLL correction multiplier, Q8.8 (channel / reference frequency)
  } chan_cfg_t;

  // Tuner settings.
  typedef struct packed {
    logic signed [POS_W-1:0]  preset_pos;  // position preset
    logic [15:0]              pos_tol;     // "in position" tolerance, steps
    logic [15:0]              k0;          // maximum tuner speed
    logic [15:0]              pos_gain;    // position loop gain, Q8.8
    logic [15:0]              ph_gain;     // phase alignment gain, Q8.8
    logic signed [PH_W-1:0]   tune_ph_set; // tuning phase setpoint
    logic [23:0]              rho_dt;      // rho * sample period, Q16.8
    logic [15:0]              inv_eps;     // 1/epsilon, Q0.16
    logic [15:0]              skip_lvl;    // skip when s/eps band fraction below this, Q0.16
    logic [23:0]              skip_dt;     // rho * dt added on a skip, Q16.8
    logic [PR_W-1:0]          pr_sm_lvl;   // reflected power at which sliding mode starts
    logic [PR_W-1:0]          pr_ramp_lvl; // reflected power above which the ramp slows
    logic [DATA_W-1:0]        rf_ok_lvl;   // cavity amplitude taken as "rf established"
    logic [15:0]              rho_swing;   // rho estimation: steps per half swing
    logic                     motor_en;    // motor enable
    logic                     auto_seq;    // run the power-up sequence
    tuner_mode_e              man_mode;    // mode when auto_seq is 0
    logic                     sm_open;     // sliding mode open loop: s is computed, the motor is not moved
  } tuner_cfg_t;

  // Per-channel readback.
  typedef struct packed {
    logic [DATA_W-1:0]        amp;       // measured cavity amplitude
    logic signed [PH_W-1:0]   ph;        // measured cavity phase
    logic [DATA_W-1:0]        drive_amp; // amplitude sent to the output NCO
    logic signed [PH_W-1:0]   drive_ph;  // phase offset sent to the output NCO
    logic [DATA_W-1:0]        amp_sp;    // working (ramped) amplitude setpoint
  } chan_stat_t;

  // Tuner readback.
  typedef struct packed {
    logic signed [POS_W-1:0]  pos;        // step counter
    tuner_mode_e              mode;       // active mode
    logic signed [VEL_W-1:0]  vel;        // velocity command
    logic [16:0]              s_band;     // s/eps modulo 2 (Q1.16): wheel aid
    logic [31:0]              s_tape;     // s/eps (Q16.16, wraps at 2**16 bands): tape aid
    logic [23:0]              rho_est;    // last rho*dt estimate, Q16.8
    logic                     rho_valid;  // rho_est holds a result
    logic [15:0]              skips;      // surface skips so far
    logic [15:0]              reversals;  // direction reversals in sliding mode
  } tuner_stat_t;

endpackage
