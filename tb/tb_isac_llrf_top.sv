// tb_isac_llrf_top: the whole controller, end to end, with short tuner ticks
// (16 clocks), a fast stepper, a fast amplitude ramp and short RF pulses.
// Three cavities (cavity_model) close the three RF loops; the reference is
// the IF plus 50 kHz; channel 0's cavity is tuned by the controller's own
// stepper pulses (resonance at step 300, half width 50 steps), and its
// reflected power is Pr = 20 + 2000*delta^2/(1+delta^2) while its RF is on.
// Everything is set and read through 48-bit host reports.
// Sequence: configure; DPLL lock (and the per-channel scaling of its
// correction, pll_mult); channels 1 and 2 settle; calibrate the
// tuning phase of channel 0 at the start position and set the phase
// setpoint 20 steps off resonance; run the automatic power-up sequence;
// run a rho estimation; stop.
// Mechanisms counted (each must happen): DPLL lock, RF pulsing, ramp slow-down
// on high Pr, the three mode transitions, sliding-mode reversals, surface
// skips, rho estimation, report answers.
module tb_isac_llrf_top;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, sync = 0;
  logic signed [15:0] adc [N_CHANNELS];
  logic signed [15:0] dac [N_CHANNELS];
  logic signed [15:0] ref_s;
  logic [15:0] pr;
  hid_report_t ri, ro;
  logic rv = 0, ov;
  logic step, dir, men, tick, locked;
  int pos = 0;
  int checks = 0, failures = 0;
  real th = 0.0;
  // mechanism counters
  int n_pulse_edges = 0, n_slow = 0, n_pos = 0, n_phase = 0, n_slide = 0, n_rho = 0;
  int n_lock = 0, n_answers = 0;

  isac_llrf_top #(.TICK_DIV(16), .STEP_ACC_W(8), .STEP_PULSE(1), .RAMP_DIV_W(4), .HOLD(3),
                  .PULSE_PERIOD(4000), .PULSE_ON(1500), .LOCK_CNT(256)) dut (
    .clk, .rst_n, .sync_i(sync), .adc_i(adc), .ref_adc_i(ref_s), .dac_o(dac), .pr_i(pr),
    .rep_i(ri), .rep_valid_i(rv), .rep_o(ro), .rep_valid_o(ov),
    .step_o(step), .dir_o(dir), .motor_en_o(men), .tick_o(tick), .dpll_locked_o(locked));

  cavity_model #(.D(10), .G(256)) cav0 (.clk, .dac_i(dac[0]), .pos_i(pos), .adc_o(adc[0]));
  cavity_model #(.D(14), .G(200)) cav1 (.clk, .dac_i(dac[1]), .pos_i(300), .adc_o(adc[1]));
  cavity_model #(.D(7),  .G(300)) cav2 (.clk, .dac_i(dac[2]), .pos_i(300), .adc_o(adc[2]));

  always #2 clk = ~clk;
  always @(posedge clk) begin
    th = th + (31.6e6 + 50.0e3) / 250.0e6;
    th = th - $floor(th);
    ref_s <= 16'($rtoi(16000.0 * $cos(2.0 * PI * th)));
  end
  always @(posedge step) if (rst_n) pos += dir ? 1 : -1;
  logic rf0;
  assign rf0 = dut.ccfg_eff[0].rf_on;
  always_comb begin
    real dl;
    dl = real'(pos - 300) / 50.0;
    pr = rf0 ? 16'($rtoi(20.0 + 2000.0 * dl * dl / (1.0 + dl * dl))) : 16'd0;
  end
  tuner_mode_e mode_q = TM_OFF;
  logic rf0_q = 0, locked_q = 0;
  always @(posedge clk) begin
    rf0_q <= rf0; locked_q <= locked;
    if (rf0 && !rf0_q && dut.tstat.mode == TM_POSITION) n_pulse_edges++;
    if (dut.g_ch[0].u_ch.ramp_slow && rf0) n_slow++;
    if (locked && !locked_q) n_lock++;
    mode_q <= dut.tstat.mode;
    if (dut.tstat.mode != mode_q) begin
      if (dut.tstat.mode == TM_POSITION) n_pos++;
      if (dut.tstat.mode == TM_PHASE)    n_phase++;
      if (dut.tstat.mode == TM_SLIDING && mode_q == TM_PHASE) n_slide++;
      if (dut.tstat.mode == TM_RHO_EST)  n_rho++;
    end
    if (ov) n_answers++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); ri = '{op: OP_WRITE, addr: a, data: d}; rv = 1;
    @(negedge clk); rv = 0;
    chk(ov && ro.op == OP_WRITE && ro.addr == a, $sformatf("write %h answered", a));
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); ri = '{op: OP_READ, addr: a, data: 0}; rv = 1;
    @(negedge clk); rv = 0;
    d = ro.data;
  endtask
  // mean of a readback over n reads
  task automatic rd_mean(input logic [7:0] a, input int n, output real m);
    logic [31:0] d;
    m = 0.0;
    for (int k = 0; k < n; k++) begin rd(a, d); m += real'($signed(d)) / n; repeat (8) @(posedge clk); end
  endtask
  function automatic real wrapd(input real x);
    real y;
    y = x;
    while (y > 32768.0) y -= 65536.0;
    while (y < -32768.0) y += 65536.0;
    return y;
  endfunction

  initial begin
    logic [31:0] d;
    real am, pm, tph, c0, pr_phase, pr_slide;
    int n, dist_phase, dsum;
    ri = '0;
    repeat (5) @(posedge clk); rst_n = 1;
    @(negedge clk); sync = 1; @(negedge clk); sync = 0;
    // DPLL
    wr(8'h50, 32'd256); wr(8'h51, 32'd16384); wr(8'h52, 32'd1);
    // channels: setpoints and gains
    for (int c = 0; c < N_CHANNELS; c++) begin
      wr(8'(16*c + 0), 32'd40000);
      wr(8'(16*c + 1), 32'(16'sh1000 + 16'(c * 4000)));
      wr(8'(16*c + 2), 32'd64); wr(8'(16*c + 3), 32'd4);
      wr(8'(16*c + 6), 32'd2);
      wr(8'(16*c + 8), 32'd2000);
      wr(8'(16*c + 10), 32'd3);
    end
    n = 0;
    while (!locked && n < 200000) begin @(posedge clk); n++; end
    chk(locked, $sformatf("DPLL locked after %0d clocks", n));
    rd(8'hA1, d); chk(d == 1, "lock readback");
    rd(8'hA0, d);
    chk($signed(d) > 800000 && $signed(d) < 920000, $sformatf("DPLL correction %0d (expect about 858993)", $signed(d)));
    // channel 2 at twice the reference frequency: its correction is doubled
    wr(8'h2C, 32'd512);
    begin
      logic signed [31:0] c1;
      @(posedge clk); #1 c1 = dut.corr;
      @(posedge clk); #1;
      chk(dut.ftw_c[2] == FTW_IF + 32'(2 * c1) && dut.ftw_c[1] == FTW_IF + 32'(c1),
          $sformatf("pll_mult: ch2 word %0d, ch1 word %0d, correction %0d", dut.ftw_c[2], dut.ftw_c[1], c1));
    end
    wr(8'h2C, 32'd256);
    repeat (30000) @(posedge clk);
    for (int c = 1; c < N_CHANNELS; c++) begin
      rd_mean(8'(8'h80 + 8*c), 200, am);
      rd_mean(8'(8'h81 + 8*c), 200, pm);
      chk(am > 39600.0 && am < 40400.0, $sformatf("ch%0d amplitude %f", c, am));
      chk(wrapd(pm - real'($signed(16'(16'sh1000 + 16'(c * 4000))))) < 182.0 &&
          wrapd(pm - real'($signed(16'(16'sh1000 + 16'(c * 4000))))) > -182.0, $sformatf("ch%0d phase %f", c, pm));
    end
    // calibrate channel 0's tuning phase at position 0 (delta = -6)
    rd_mean(8'h83, 200, tph); rd_mean(8'h81, 200, pm);
    tph = wrapd(tph - pm);
    c0 = tph - $atan(-6.0) * 65536.0 / (2.0 * PI);
    wr(8'h45, 32'($signed(16'($rtoi(wrapd(c0 + $atan(20.0 / 50.0) * 65536.0 / (2.0 * PI)))))));
    // tuner settings; RF of channel 0 now under the sequencer
    wr(8'h40, 32'd250); wr(8'h41, 32'd3); wr(8'h42, 32'd16); wr(8'h43, 32'd256); wr(8'h44, 32'd2);
    wr(8'h46, 32'd1024); wr(8'h47, 32'd1638); wr(8'h48, 32'd6554); wr(8'h49, 32'd1024);
    wr(8'h4A, 32'd350); wr(8'h4B, 32'd600); wr(8'h4C, 32'd5000); wr(8'h4D, 32'd10);
    wr(8'h4E, 32'h3);   // motor enable + automatic sequence
    n = 0;
    do begin rd(8'h99, d); repeat (50) @(posedge clk); n++; end while (d != 32'(TM_PHASE) && n < 4000);
    chk(d == 32'(TM_PHASE), "phase alignment reached");
    dist_phase = pos;
    n = 0;
    do begin rd(8'h99, d); repeat (50) @(posedge clk); n++; end while (d != 32'(TM_SLIDING) && n < 8000);
    chk(d == 32'(TM_SLIDING), $sformatf("sliding mode reached at pos %0d", pos));
    dist_phase = (pos > 300) ? pos - 300 : 300 - pos;
    pr_phase = real'(pr);
    repeat (400 * 16) @(posedge clk);
    dsum = 0; pr_slide = 0.0;
    for (int k = 0; k < 100; k++) begin
      repeat (16) @(posedge clk);
      dsum += (pos > 300) ? pos - 300 : 300 - pos; pr_slide += real'(pr) / 100.0;
    end
    $display("after phase alignment: |d|=%0d Pr=%f; sliding mode: mean |d|=%0d mean Pr=%f", dist_phase, pr_phase, dsum / 100, pr_slide);
    chk(pr_slide < pr_phase, "sliding mode lowers the reflected power");
    rd_mean(8'h80, 100, am);
    chk(am > 39000.0 && am < 41000.0, $sformatf("ch0 amplitude in CW %f", am));
    rd(8'h9D, d); chk(d > 0, $sformatf("surface skips %0d", d));
    rd(8'h9E, d); chk(d > 0, $sformatf("sliding reversals %0d", d));
    // rho estimation
    wr(8'h4F, 32'h2);
    n = 0;
    do begin rd(8'h9C, d); repeat (50) @(posedge clk); n++; end while (!d[31] && n < 4000);
    chk(d[31] && d[23:0] != 0, $sformatf("rho estimate %0d", d[23:0]));
    // stop
    wr(8'h4E, 32'h0);
    repeat (10) @(posedge clk);
    rd(8'h99, d); chk(d == 32'(TM_OFF) && !men, "stopped");
    $display("mechanisms: lock %0d, RF pulses %0d, ramp slowed %0d clk, ->position %0d, ->phase %0d, ->sliding %0d, rho runs %0d, answers %0d",
             n_lock, n_pulse_edges, n_slow, n_pos, n_phase, n_slide, n_rho, n_answers);
    chk(n_lock > 0, "mechanism: DPLL lock");
    chk(n_pulse_edges > 0, "mechanism: pulsed RF");
    chk(n_slow > 0, "mechanism: ramp slowed by reflected power");
    chk(n_pos > 0 && n_phase > 0 && n_slide > 0, "mechanism: mode transitions");
    chk(n_rho > 0, "mechanism: rho estimation");
    chk(n_answers > 0, "mechanism: report answers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
