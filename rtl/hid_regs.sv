// hid_regs: register file behind the 48-bit host reports.
//
// The host talks to the controller in 48-bit reports, both ways. Layout (own
// choice): [47:40] operation (1 = write, 2 = read), [39:32] register address,
// [31:0] data. Every report received is answered by one report: a write is
// echoed with the value now held, a read returns the register, an unknown
// address or operation returns operation 0 and data 0.
//
// Register map (own choice):
//   0x00 + 16*c  channel c settings: 0 amp_set, 1 ph_set, 2..4 amp kp/ki/kd,
//                5..7 phase kp/ki/kd, 8 ramp_step, 9 ff_gain,
//                A control {rf_on, loop_on}, B ftw, C pll_mult (Q8.8)
//   0x40..0x4E   tuner settings: 0 preset_pos, 1 pos_tol, 2 k0, 3 pos_gain,
//                4 ph_gain, 5 tune_ph_set, 6 rho_dt, 7 inv_eps, 8 skip_lvl,
//                9 skip_dt, A pr_sm_lvl, B pr_ramp_lvl, C rf_ok_lvl,
//                D rho_swing, E control {sm_open, man_mode[4:2], auto_seq,
//                motor_en}
//   0x4F         tuner command (write-only pulses): bit0 clear position,
//                bit1 start rho estimation
//   0x50..0x52   DPLL: 0 kp, 1 ki, 2 control {en}
//   0x80 + 8*c   channel c readback: 0 amp, 1 phase, 2 drive amp,
//                3 drive phase, 4 ramped amplitude setpoint
//   0x98..0x9F   tuner readback: 0 position, 1 mode, 2 velocity, 3 s/eps band,
//                4 {valid, rho estimate}, 5 skips, 6 reversals, 7 Pr
//   0xA0..0xA2   0 DPLL correction, 1 DPLL locked, 2 tuner s/eps (Q16.16)
// Reset values: every setting 0, except each channel's ftw = the 31.6 MHz IF
// and pll_mult = 256 (1.0).
// Timing: a report is taken when rep_valid_i is high; its answer appears with
// rep_valid_o one clock later; a setting takes effect on that clock.
module hid_regs
  import llrf_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  hid_report_t             rep_i,
  input  logic                    rep_valid_i,
  output hid_report_t             rep_o,
  output logic                    rep_valid_o,
  output chan_cfg_t               chan_cfg_o [N_CHANNELS],
  output tuner_cfg_t              tuner_cfg_o,
  output logic                    clr_pos_o,
  output logic                    rho_start_o,
  output logic [15:0]             dpll_kp_o,
  output logic [15:0]             dpll_ki_o,
  output logic                    dpll_en_o,
  input  chan_stat_t              chan_stat_i [N_CHANNELS],
  input  tuner_stat_t             tuner_stat_i,
  input  logic [PR_W-1:0]         pr_i,
  input  logic signed [ACC_W-1:0] dpll_corr_i,
  input  logic                    dpll_locked_i
);
  logic        wr, rd;
  logic [7:0]  a;
  logic [31:0] d;
  assign wr = rep_valid_i && rep_i.op == OP_WRITE;
  assign rd = rep_valid_i && rep_i.op == OP_READ;
  assign a  = rep_i.addr;
  assign d  = rep_i.data;

  // Register read, after this clock's write.
  function automatic logic [32:0] read_reg(
      input logic [7:0] ad, input chan_cfg_t cc [N_CHANNELS], input tuner_cfg_t tc,
      input logic [15:0] kp, input logic [15:0] ki, input logic en);
    logic [32:0] r;
    int c;
    r = {1'b1, 32'h0};
    if (ad < 8'h40 && ad[3:0] <= 4'hC && int'(ad[5:4]) < N_CHANNELS) begin
      c = int'(ad[5:4]);
      case (ad[3:0])
        4'h0: r[31:0] = 32'(cc[c].amp_set);
        4'h1: r[31:0] = 32'($signed(cc[c].ph_set));
        4'h2: r[31:0] = 32'(cc[c].amp_kp);
        4'h3: r[31:0] = 32'(cc[c].amp_ki);
        4'h4: r[31:0] = 32'(cc[c].amp_kd);
        4'h5: r[31:0] = 32'(cc[c].ph_kp);
        4'h6: r[31:0] = 32'(cc[c].ph_ki);
        4'h7: r[31:0] = 32'(cc[c].ph_kd);
        4'h8: r[31:0] = 32'(cc[c].ramp_step);
        4'h9: r[31:0] = 32'(cc[c].ff_gain);
        4'hA: r[31:0] = {30'd0, cc[c].rf_on, cc[c].loop_on};
        4'hB: r[31:0] = cc[c].ftw;
        default: r[31:0] = 32'(cc[c].pll_mult);
      endcase
    end else begin
      case (ad)
        8'h40: r[31:0] = tc.preset_pos;
        8'h41: r[31:0] = 32'(tc.pos_tol);
        8'h42: r[31:0] = 32'(tc.k0);
        8'h43: r[31:0] = 32'(tc.pos_gain);
        8'h44: r[31:0] = 32'(tc.ph_gain);
        8'h45: r[31:0] = 32'($signed(tc.tune_ph_set));
        8'h46: r[31:0] = 32'(tc.rho_dt);
        8'h47: r[31:0] = 32'(tc.inv_eps);
        8'h48: r[31:0] = 32'(tc.skip_lvl);
        8'h49: r[31:0] = 32'(tc.skip_dt);
        8'h4A: r[31:0] = 32'(tc.pr_sm_lvl);
        8'h4B: r[31:0] = 32'(tc.pr_ramp_lvl);
        8'h4C: r[31:0] = 32'(tc.rf_ok_lvl);
        8'h4D: r[31:0] = 32'(tc.rho_swing);
        8'h4E: r[31:0] = {26'd0, tc.sm_open, tc.man_mode, tc.auto_seq, tc.motor_en};
        8'h4F: r[31:0] = 32'd0;
        8'h50: r[31:0] = 32'(kp);
        8'h51: r[31:0] = 32'(ki);
        8'h52: r[31:0] = {31'd0, en};
        default: r = 33'd0;
      endcase
    end
    return r;
  endfunction

  function automatic logic [32:0] read_stat(input logic [7:0] ad);
    logic [32:0] r;
    int c;
    r = {1'b1, 32'h0};
    if (ad >= 8'h80 && ad < 8'h98) begin
      c = int'(ad[4:3]);   // (ad - 0x80) / 8 for ad in 0x80..0x97
      if (c >= N_CHANNELS) return 33'd0;
      case (ad[2:0])
        3'd0: r[31:0] = 32'(chan_stat_i[c].amp);
        3'd1: r[31:0] = 32'($signed(chan_stat_i[c].ph));
        3'd2: r[31:0] = 32'(chan_stat_i[c].drive_amp);
        3'd3: r[31:0] = 32'($signed(chan_stat_i[c].drive_ph));
        3'd4: r[31:0] = 32'(chan_stat_i[c].amp_sp);
        default: r = 33'd0;
      endcase
    end else begin
      case (ad)
        8'h98: r[31:0] = tuner_stat_i.pos;
        8'h99: r[31:0] = 32'(tuner_stat_i.mode);
        8'h9A: r[31:0] = 32'($signed(tuner_stat_i.vel));
        8'h9B: r[31:0] = 32'(tuner_stat_i.s_band);
        8'h9C: r[31:0] = {tuner_stat_i.rho_valid, 7'd0, tuner_stat_i.rho_est};
        8'h9D: r[31:0] = 32'(tuner_stat_i.skips);
        8'h9E: r[31:0] = 32'(tuner_stat_i.reversals);
        8'h9F: r[31:0] = 32'(pr_i);
        8'hA0: r[31:0] = dpll_corr_i;
        8'hA1: r[31:0] = {31'd0, dpll_locked_i};
        8'hA2: r[31:0] = tuner_stat_i.s_tape;
        default: r = 33'd0;
      endcase
    end
    return r;
  endfunction

  chan_cfg_t   cc_n [N_CHANNELS];
  tuner_cfg_t  tc_n;
  logic [15:0] kp_n, ki_n;
  logic        en_n;
  logic [32:0] rv;

  // Next settings: the current ones with this clock's write applied.
  always_comb begin
    cc_n = chan_cfg_o;
    tc_n = tuner_cfg_o;
    kp_n = dpll_kp_o;
    ki_n = dpll_ki_o;
    en_n = dpll_en_o;
    if (wr) begin
      for (int c = 0; c < N_CHANNELS; c++) begin
        if (a[7:6] == 2'b00 && int'(a[5:4]) == c) begin
          case (a[3:0])
            4'h0: cc_n[c].amp_set   = d[DATA_W-1:0];
            4'h1: cc_n[c].ph_set    = d[PH_W-1:0];
            4'h2: cc_n[c].amp_kp    = d[15:0];
            4'h3: cc_n[c].amp_ki    = d[15:0];
            4'h4: cc_n[c].amp_kd    = d[15:0];
            4'h5: cc_n[c].ph_kp     = d[15:0];
            4'h6: cc_n[c].ph_ki     = d[15:0];
            4'h7: cc_n[c].ph_kd     = d[15:0];
            4'h8: cc_n[c].ramp_step = d[15:0];
            4'h9: cc_n[c].ff_gain   = d[15:0];
            4'hA: {cc_n[c].rf_on, cc_n[c].loop_on} = d[1:0];
            4'hB: cc_n[c].ftw       = d;
            4'hC: cc_n[c].pll_mult  = d[15:0];
            default: ;
          endcase
        end
      end
      case (a)
        8'h40: tc_n.preset_pos  = d;
        8'h41: tc_n.pos_tol     = d[15:0];
        8'h42: tc_n.k0          = d[15:0];
        8'h43: tc_n.pos_gain    = d[15:0];
        8'h44: tc_n.ph_gain     = d[15:0];
        8'h45: tc_n.tune_ph_set = d[PH_W-1:0];
        8'h46: tc_n.rho_dt      = d[23:0];
        8'h47: tc_n.inv_eps     = d[15:0];
        8'h48: tc_n.skip_lvl    = d[15:0];
        8'h49: tc_n.skip_dt     = d[23:0];
        8'h4A: tc_n.pr_sm_lvl   = d[PR_W-1:0];
        8'h4B: tc_n.pr_ramp_lvl = d[PR_W-1:0];
        8'h4C: tc_n.rf_ok_lvl   = d[DATA_W-1:0];
        8'h4D: tc_n.rho_swing   = d[15:0];
        8'h4E: begin
          tc_n.motor_en = d[0];
          tc_n.auto_seq = d[1];
          tc_n.man_mode = tuner_mode_e'(d[4:2]);
          tc_n.sm_open  = d[5];
        end
        8'h50: kp_n = d[15:0];
        8'h51: ki_n = d[15:0];
        8'h52: en_n = d[0];
        default: ;
      endcase
    end
    if (a >= 8'h80) rv = read_stat(a);
    else            rv = read_reg(a, cc_n, tc_n, kp_n, ki_n, en_n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CHANNELS; c++) begin
        chan_cfg_o[c]     <= '0;
        chan_cfg_o[c].ftw <= FTW_IF;
        chan_cfg_o[c].pll_mult <= 16'd256;
      end
      tuner_cfg_o <= '0;
      dpll_kp_o   <= '0;
      dpll_ki_o   <= '0;
      dpll_en_o   <= 1'b0;
      clr_pos_o   <= 1'b0;
      rho_start_o <= 1'b0;
      rep_o       <= '0;
      rep_valid_o <= 1'b0;
    end else begin
      chan_cfg_o  <= cc_n;
      tuner_cfg_o <= tc_n;
      dpll_kp_o   <= kp_n;
      dpll_ki_o   <= ki_n;
      dpll_en_o   <= en_n;
      clr_pos_o   <= wr && a == 8'h4F && d[0];
      rho_start_o <= wr && a == 8'h4F && d[1];
      rep_valid_o <= rep_valid_i;
      if (rep_valid_i) begin
        if ((wr && a < 8'h80 && rv[32]) || (rd && rv[32]))
          rep_o <= '{op: rep_i.op, addr: a, data: rv[31:0]};
        else
          rep_o <= '{op: OP_NOP, addr: a, data: 32'd0};
      end
    end
  end
endmodule
