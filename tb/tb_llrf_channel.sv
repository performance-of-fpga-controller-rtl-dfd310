// tb_llrf_channel: one channel in closed loop with a cavity modelled as a
// gain G/256 and a delay of 10 samples on the IF (the delay turns into a
// fixed phase shift). Checked, as means over 2000 samples: the amplitude
// ramps up and settles at its setpoint within 1 %, the phase at its setpoint
// within 1 degree; after a step of the cavity gain the loop restores both;
// in open loop the drive follows the ramp through the feedforward path
// (measured amplitude = drive/4 * G/256); with RF off the DAC is silent.
module tb_llrf_channel;
  import llrf_pkg::*;
  localparam int D = 10;
  logic clk = 0, rst_n = 0, sync = 0;
  logic signed [15:0] adc, dac;
  chan_cfg_t cfg;
  chan_stat_t st;
  int G = 256;
  int checks = 0, failures = 0;
  logic signed [15:0] dl [D];
  llrf_channel #(.RAMP_DIV_W(4)) dut (.clk, .rst_n, .sync_i(sync), .adc_i(adc), .cfg_i(cfg),
    .ftw_i(FTW_IF), .pr_i(16'd0), .pr_lvl_i(16'hFFFF), .dac_o(dac), .stat_o(st));
  always #2 clk = ~clk;
  always @(posedge clk) begin
    dl[0] <= dac;
    for (int k = 1; k < D; k++) dl[k] <= dl[k-1];
    adc <= 16'((int'(dl[D-1]) * G) >>> 8);
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic means(output real am, output real pm, output real dam);
    am = 0; pm = 0; dam = 0;
    for (int k = 0; k < 2000; k++) begin
      @(posedge clk); #1;
      am += real'(st.amp) / 2000.0; pm += real'(st.ph) / 2000.0; dam += real'(st.drive_amp) / 2000.0;
    end
  endtask
  initial begin
    real am, pm, dam;
    int maxdac;
    cfg = '0; cfg.ftw = FTW_IF; adc = 0;
    for (int k = 0; k < D; k++) dl[k] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); sync = 1; @(negedge clk); sync = 0;
    // RF off: DAC silent
    repeat (200) @(posedge clk);
    maxdac = 0;
    repeat (200) begin @(posedge clk); if (dac > maxdac || -dac > maxdac) maxdac = (dac < 0) ? -dac : dac; end
    chk(maxdac == 0, "RF off: DAC silent");
    // closed loop
    @(negedge clk);
    cfg.amp_set = 18'd40000; cfg.ph_set = 16'sh1000; cfg.ramp_step = 16'd4000;
    cfg.amp_kp = 16'd64; cfg.amp_ki = 16'd4; cfg.ph_kp = 16'd0; cfg.ph_ki = 16'd2;
    cfg.loop_on = 1; cfg.rf_on = 1;
    repeat (100) @(posedge clk); #1;
    chk(st.amp_sp > 0 && st.amp_sp < 40000, $sformatf("ramping: setpoint %0d", st.amp_sp));
    repeat (20000) @(posedge clk);
    means(am, pm, dam);
    $display("closed loop: amp %f phase %f drive %f", am, pm, dam);
    chk(am > 39600.0 && am < 40400.0, $sformatf("amplitude %f (expect 40000)", am));
    chk(pm > 4096.0 - 182.0 && pm < 4096.0 + 182.0, $sformatf("phase %f (expect 4096)", pm));
    chk(dam > 150000.0 && dam < 170000.0, $sformatf("drive %f (expect about 160000)", dam));
    // disturbance: cavity gain drops
    G = 200;
    repeat (20000) @(posedge clk);
    means(am, pm, dam);
    $display("after gain step: amp %f phase %f drive %f", am, pm, dam);
    chk(am > 39600.0 && am < 40400.0, $sformatf("amplitude restored %f", am));
    chk(dam > 195000.0 && dam < 215000.0, $sformatf("drive raised %f (expect about 204800)", dam));
    chk(pm > 4096.0 - 182.0 && pm < 4096.0 + 182.0, $sformatf("phase held %f", pm));
    // open loop with feedforward: drive = ramped setpoint
    @(negedge clk); cfg.loop_on = 0; cfg.ff_gain = 16'd256; cfg.amp_set = 18'd100000; G = 256;
    repeat (5000) @(posedge clk);
    means(am, pm, dam);
    $display("open loop: amp %f drive %f", am, dam);
    chk(dam > 99999.0 && dam < 100001.0, $sformatf("feedforward drive %f", dam));
    chk(am > 24500.0 && am < 25500.0, $sformatf("open-loop amplitude %f (expect 25000)", am));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
