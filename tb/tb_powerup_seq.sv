// tb_powerup_seq: the sequence OFF -> POSITION (RF pulsed, 2 of 10 clocks)
// -> PHASE (RF CW) once in position and RF seen -> SLIDING after Pr stays
// below its level for HOLD = 3 ticks (a single low tick is not enough);
// clearing auto returns to OFF with RF off.
module tb_powerup_seq;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, auto_ = 0, tick = 0, in_pos = 0, rf_ok = 0;
  logic [15:0] pr, lvl;
  tuner_mode_e mode;
  logic gate;
  int checks = 0, failures = 0;
  powerup_seq #(.HOLD(3), .PULSE_PERIOD(10), .PULSE_ON(2)) dut (.clk, .rst_n, .auto_i(auto_),
    .tick_i(tick), .in_pos_i(in_pos), .rf_ok_i(rf_ok), .pr_i(pr), .pr_lvl_i(lvl),
    .mode_o(mode), .rf_gate_o(gate));
  always #2 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic do_tick;
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
  endtask
  initial begin
    int on;
    pr = 16'd900; lvl = 16'd300;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5) @(posedge clk); #1;
    chk(mode == TM_OFF && !gate, "off");
    @(negedge clk); auto_ = 1;
    repeat (3) @(posedge clk); #1;
    chk(mode == TM_POSITION, "position mode");
    on = 0;
    for (int n = 0; n < 100; n++) begin @(posedge clk); #1; if (gate) on++; end
    chk(on == 20, $sformatf("pulsed RF duty %0d/100 (expect 20)", on));
    // in position but RF not yet seen: stay
    @(negedge clk); in_pos = 1;
    repeat (20) @(posedge clk); #1;
    chk(mode == TM_POSITION, "waits for RF");
    @(negedge clk); rf_ok = 1; @(negedge clk); rf_ok = 0;
    @(posedge clk); #1;
    chk(mode == TM_PHASE && gate, "phase alignment, RF CW");
    do_tick(); do_tick();
    chk(mode == TM_PHASE, "Pr high: stay in phase alignment");
    pr = 16'd200; do_tick(); pr = 16'd900; do_tick(); do_tick();
    chk(mode == TM_PHASE, "one low tick is not enough");
    pr = 16'd200; do_tick(); do_tick(); do_tick(); @(posedge clk); #1;
    chk(mode == TM_SLIDING && gate, "sliding mode after 3 low ticks");
    pr = 16'd900; do_tick(); do_tick(); do_tick();
    chk(mode == TM_SLIDING, "sliding mode kept");
    @(negedge clk); auto_ = 0; @(posedge clk); #1;
    chk(mode == TM_OFF && !gate, "back to off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
