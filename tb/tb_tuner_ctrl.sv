// tb_tuner_ctrl: the tuner controller with a cavity model. The tuner
// position is counted from the controller's own step/dir pulses. The cavity
// resonates at position 300: Pr = 100 + d*d/4 (d = position - 300) while RF
// is on, and the tuning phase reads (d - 20)*64, i.e. the phase setpoint is
// 20 steps off the true minimum, as happens when the cavity warms up.
// Checked: with the motor disabled nothing moves; manual positional
// alignment reaches the preset; the automatic sequence runs position ->
// phase alignment -> sliding mode, with RF pulsed then CW; sliding mode then
// brings the tuner closer to the minimum than phase alignment left it; in
// sliding-mode open loop the tuner stays still while s keeps crossing
// switching surfaces; a rho estimation runs, returns a value and hands the motor back.
module tb_tuner_ctrl;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, rho_go = 0;
  tuner_cfg_t cfg;
  logic [15:0] pr;
  logic signed [15:0] tph;
  logic [17:0] camp;
  logic step, dir, men, gate, tick;
  tuner_stat_t st;
  int pos_model = 0;
  int checks = 0, failures = 0;
  int seen_pulsed = 0, gate_on = 0, gate_cnt = 0;
  tuner_ctrl #(.TICK_DIV(16), .STEP_ACC_W(8), .STEP_PULSE(1), .HOLD(3), .PULSE_PERIOD(20), .PULSE_ON(4)) dut (
    .clk, .rst_n, .cfg_i(cfg), .clr_pos_i(clr), .rho_start_i(rho_go), .pr_i(pr), .tune_ph_i(tph),
    .cav_amp_i(camp), .step_o(step), .dir_o(dir), .motor_en_o(men), .rf_gate_o(gate), .tick_o(tick), .stat_o(st));
  always #2 clk = ~clk;
  always @(posedge step) if (rst_n) pos_model += dir ? 1 : -1;
  always_comb begin
    int d;
    d = pos_model - 300;
    pr   = (gate || !cfg.auto_seq) ? 16'(100 + d*d/4) : 16'd0;
    tph  = 16'((d - 20) * 64);
    camp = gate ? 18'd50000 : 18'd0;
  end
  always @(posedge clk) if (st.mode == TM_POSITION) begin
    gate_cnt++; if (gate) gate_on++;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic int absd(input int p);
    return (p - 300 < 0) ? 300 - p : p - 300;
  endfunction
  initial begin
    int n, d_phase, dsum;
    cfg = '0;
    cfg.preset_pos = 32'sd250; cfg.pos_tol = 16'd3; cfg.k0 = 16'd16; cfg.pos_gain = 16'd256;
    cfg.ph_gain = 16'd8; cfg.tune_ph_set = 16'sd0;
    cfg.rho_dt = 24'd512; cfg.inv_eps = 16'd3277; cfg.skip_lvl = 16'd6554; cfg.skip_dt = 24'd1024;
    cfg.pr_sm_lvl = 16'd250; cfg.rf_ok_lvl = 18'd10000; cfg.rho_swing = 16'd10;
    cfg.man_mode = TM_POSITION;
    repeat (3) @(posedge clk); rst_n = 1;
    // motor disabled
    repeat (2000) @(posedge clk); #1;
    chk(pos_model == 0 && st.pos == 0 && !men, "motor disabled: no motion");
    // manual positional alignment
    @(negedge clk); cfg.motor_en = 1;
    n = 0;
    while (st.pos != 250 && n < 50000) begin @(posedge clk); n++; end
    repeat (200) @(posedge clk); #1;
    chk(st.pos >= 247 && st.pos <= 253 && pos_model == st.pos, $sformatf("manual preset pos=%0d model=%0d", st.pos, pos_model));
    // automatic sequence from position 0
    @(negedge clk); cfg.motor_en = 0; cfg.man_mode = TM_OFF;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0; pos_model = 0;
    @(negedge clk); cfg.motor_en = 1; cfg.auto_seq = 1; gate_on = 0; gate_cnt = 0;
    repeat (5) @(posedge clk); #1;
    chk(st.mode == TM_POSITION, "sequence starts with positional alignment");
    n = 0;
    while (st.mode != TM_PHASE && n < 100000) begin @(posedge clk); n++; end
    chk(st.mode == TM_PHASE && absd(pos_model) <= 53 && absd(pos_model) >= 47, $sformatf("phase alignment entered at pos=%0d", pos_model));
    chk(gate_cnt > 0 && gate_on * 5 >= gate_cnt - 20 && gate_on * 5 <= gate_cnt + 20, $sformatf("RF pulsed in position mode: %0d of %0d", gate_on, gate_cnt));
    n = 0;
    while (st.mode != TM_SLIDING && n < 200000) begin @(posedge clk); n++; end
    d_phase = absd(pos_model);
    chk(st.mode == TM_SLIDING && gate, $sformatf("sliding mode entered at pos=%0d, RF CW", pos_model));
    // sliding mode: let it run 400 ticks then average the distance over 100 ticks
    repeat (400 * 16) @(posedge clk);
    dsum = 0;
    for (int k = 0; k < 100; k++) begin repeat (16) @(posedge clk); dsum += absd(pos_model); end
    $display("distance to minimum: after phase alignment %0d, in sliding mode %0d (mean of 100 ticks), reversals %0d, skips %0d",
             d_phase, dsum / 100, st.reversals, st.skips);
    chk(dsum / 100 < d_phase && dsum / 100 <= 12, "sliding mode improves on phase alignment");
    chk(st.pos == pos_model, "position counter tracks the steps");
    // sliding mode open loop: s keeps running (surfaces crossed), tuner still
    begin
      int p0, r0;
      @(negedge clk); cfg.sm_open = 1;
      repeat (2 * 16) @(posedge clk);
      p0 = pos_model; r0 = int'(st.reversals);
      repeat (50 * 16) @(posedge clk); #1;
      chk(pos_model == p0 && st.mode == TM_SLIDING && int'(st.reversals) > r0 + 2,
          $sformatf("open loop: tuner still (%0d -> %0d), reversals %0d -> %0d", p0, pos_model, r0, st.reversals));
      @(negedge clk); cfg.sm_open = 0;
    end
    // rho estimation
    @(negedge clk); rho_go = 1; @(negedge clk); rho_go = 0;
    @(posedge clk); #1;
    chk(st.mode == TM_RHO_EST, "rho estimation takes the motor");
    n = 0;
    while (!st.rho_valid && n < 50000) begin @(posedge clk); n++; end
    repeat (3) @(posedge clk); #1;
    $display("rho estimate %0d (Q16.8)", st.rho_est);
    chk(st.rho_valid && st.rho_est > 0 && st.mode == TM_SLIDING, "rho estimate returned, sliding resumes");
    // stop
    @(negedge clk); cfg.auto_seq = 0; cfg.man_mode = TM_OFF;
    repeat (3) @(posedge clk); #1;
    chk(st.mode == TM_OFF && !men, "stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
