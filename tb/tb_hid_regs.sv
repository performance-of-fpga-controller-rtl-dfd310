// tb_hid_regs: writes and reads through 48-bit reports: every report gets one
// answer a clock later; settings land in the right fields; channel status,
// tuner status and DPLL status read back; unknown addresses answer with
// operation 0; the command register issues one-clock pulses; reset values.
module tb_hid_regs;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, rv = 0, ov;
  hid_report_t ri, ro;
  chan_cfg_t   cc [N_CHANNELS];
  tuner_cfg_t  tc;
  logic clr, rst_rho, den;
  logic [15:0] dkp, dki;
  chan_stat_t  cs [N_CHANNELS];
  tuner_stat_t ts;
  logic [15:0] pr;
  int checks = 0, failures = 0;
  int clr_pulses = 0, rho_pulses = 0;
  hid_regs dut (.clk, .rst_n, .rep_i(ri), .rep_valid_i(rv), .rep_o(ro), .rep_valid_o(ov),
    .chan_cfg_o(cc), .tuner_cfg_o(tc), .clr_pos_o(clr), .rho_start_o(rst_rho),
    .dpll_kp_o(dkp), .dpll_ki_o(dki), .dpll_en_o(den), .chan_stat_i(cs), .tuner_stat_i(ts),
    .pr_i(pr), .dpll_corr_i(-32'sd12345), .dpll_locked_i(1'b1));
  always #2 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n && clr) clr_pulses++;
    if (rst_n && rst_rho) rho_pulses++;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic xfer(input hid_op_e op, input logic [7:0] a, input logic [31:0] d, output hid_report_t ans);
    @(negedge clk); ri = '{op: op, addr: a, data: d}; rv = 1;
    @(negedge clk); rv = 0;
    chk(ov, "answer valid one clock later");
    ans = ro;
  endtask
  initial begin
    hid_report_t a;
    ri = '0; pr = 16'd777;
    for (int c = 0; c < N_CHANNELS; c++) cs[c] = '{amp: 18'(1000 + c), ph: 16'(-5 - c), drive_amp: 18'(2000 + c), drive_ph: 16'(7 + c), amp_sp: 18'(3000 + c)};
    ts = '{pos: -32'sd42, mode: TM_SLIDING, vel: -16'sd3, s_band: 17'd70000, s_tape: 32'h0015_1170, rho_est: 24'd1920, rho_valid: 1'b1, skips: 16'd5, reversals: 16'd9};
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk); #1;
    chk(cc[0].ftw == FTW_IF && cc[2].ftw == FTW_IF && cc[1].amp_set == 0 && !tc.auto_seq && cc[0].pll_mult == 16'd256 && cc[2].pll_mult == 16'd256, "reset values");
    // channel settings
    xfer(OP_WRITE, 8'h10, 32'd54321, a);
    chk(a.op == OP_WRITE && a.data == 32'd54321 && cc[1].amp_set == 18'd54321 && cc[0].amp_set == 0, "write ch1 amp_set");
    xfer(OP_WRITE, 8'h21, 32'hFFFF_8001, a);
    chk(cc[2].ph_set == 16'sh8001, "write ch2 ph_set");
    xfer(OP_WRITE, 8'h07, 32'd99, a);
    chk(cc[0].ph_kd == 16'd99, "write ch0 ph_kd");
    xfer(OP_WRITE, 8'h1A, 32'd3, a);
    chk(cc[1].rf_on && cc[1].loop_on, "write ch1 control");
    xfer(OP_WRITE, 8'h2B, 32'h1234_5678, a);
    chk(cc[2].ftw == 32'h1234_5678, "write ch2 ftw");
    xfer(OP_READ, 8'h10, 32'd0, a);
    chk(a.op == OP_READ && a.addr == 8'h10 && a.data == 32'd54321, $sformatf("read back ch1 amp_set %0d", a.data));
    // tuner settings
    xfer(OP_WRITE, 8'h40, 32'hFFFF_FF00, a);
    chk(tc.preset_pos == -32'sd256, "preset");
    xfer(OP_WRITE, 8'h46, 32'd2050, a);
    chk(tc.rho_dt == 24'd2050, "rho_dt");
    xfer(OP_WRITE, 8'h4E, {27'd0, 3'(TM_PHASE), 1'b1, 1'b1}, a);
    chk(tc.motor_en && tc.auto_seq && tc.man_mode == TM_PHASE && !tc.sm_open, "tuner control");
    xfer(OP_READ, 8'h4E, 0, a);
    chk(a.data == 32'h0B, $sformatf("read tuner control %h", a.data));
    xfer(OP_WRITE, 8'h4E, 32'h2B, a);
    chk(tc.sm_open && tc.man_mode == TM_PHASE && a.data == 32'h2B, "sliding mode open-loop bit");
    // DPLL correction multiplier of channel 2
    xfer(OP_WRITE, 8'h2C, 32'd768, a);
    chk(cc[2].pll_mult == 16'd768 && cc[1].pll_mult == 16'd256, "ch2 pll_mult");
    xfer(OP_READ, 8'h2C, 0, a);
    chk(a.op == OP_READ && a.data == 32'd768, "read ch2 pll_mult");
    // DPLL
    xfer(OP_WRITE, 8'h50, 32'd256, a); xfer(OP_WRITE, 8'h52, 32'd1, a);
    chk(dkp == 16'd256 && den, "dpll settings");
    // command pulses
    xfer(OP_WRITE, 8'h4F, 32'd3, a);
    repeat (3) @(posedge clk);
    chk(clr_pulses == 1 && rho_pulses == 1, $sformatf("command pulses %0d %0d", clr_pulses, rho_pulses));
    // status
    xfer(OP_READ, 8'h88, 0, a); chk(a.data == 32'd1001, "ch1 amp readback");
    xfer(OP_READ, 8'h91, 0, a); chk($signed(a.data) == -32'sd7, "ch2 phase readback");
    xfer(OP_READ, 8'h84, 0, a); chk(a.data == 32'd3000, "ch0 ramp setpoint readback");
    xfer(OP_READ, 8'h98, 0, a); chk($signed(a.data) == -32'sd42, "position readback");
    xfer(OP_READ, 8'h99, 0, a); chk(a.data == 32'(TM_SLIDING), "mode readback");
    xfer(OP_READ, 8'h9C, 0, a); chk(a.data == 32'h8000_0780, "rho estimate readback");
    xfer(OP_READ, 8'h9F, 0, a); chk(a.data == 32'd777, "Pr readback");
    xfer(OP_READ, 8'hA0, 0, a); chk($signed(a.data) == -32'sd12345, "dpll correction readback");
    xfer(OP_READ, 8'hA2, 0, a); chk(a.op == OP_READ && a.data == 32'h0015_1170, "s/eps tape readback");
    // unknown
    xfer(OP_READ, 8'h3C, 0, a); chk(a.op == OP_NOP && a.data == 0, "unknown address");
    xfer(OP_WRITE, 8'h88, 32'd5, a); chk(a.op == OP_NOP, "write to status refused");
    xfer(OP_NOP, 8'h10, 0, a); chk(a.op == OP_NOP && cc[1].amp_set == 18'd54321, "nop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
