// tb_amp_ramp: with a ramp tick every 4 clocks (DIV_W = 2) and step 100 the
// setpoint reaches 1000 in 10 ticks; with Pr above its level the step is 25;
// ramping down; immediate return to zero when RF is switched off.
module tb_amp_ramp;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, rf_on = 0;
  logic [17:0] target, sp;
  logic [15:0] step, pr, lvl;
  logic done, slow;
  int checks = 0, failures = 0;
  amp_ramp #(.DIV_W(2)) dut (.clk, .rst_n, .rf_on_i(rf_on), .target_i(target), .step_i(step),
    .pr_i(pr), .pr_lvl_i(lvl), .sp_o(sp), .done_o(done), .slow_o(slow));
  always #2 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    int n;
    target = 18'd1000; step = 16'd100; pr = 0; lvl = 16'd500;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (8) @(posedge clk); #1;
    chk(sp == 0, "no ramp while RF off");
    @(negedge clk); rf_on = 1;
    n = 0;
    while (!done && n < 1000) begin @(posedge clk); #1; n++; end
    chk(n == 40, $sformatf("ramp up took %0d clocks (expect 40)", n));
    chk(sp == 1000, "reached target");
    // slow ramp
    @(negedge clk); target = 18'd1500; pr = 16'd600; #1;
    n = 0;
    while (!done && n < 1000) begin @(posedge clk); #1; n++; end
    chk(slow && n >= 77 && n <= 80, $sformatf("slow ramp took %0d clocks (expect 80)", n));
    // ramp down, odd remainder
    @(negedge clk); target = 18'd1430; pr = 0; #1;
    n = 0;
    while (!done && n < 1000) begin @(posedge clk); #1; n++; end
    chk(sp == 1430 && n <= 4, $sformatf("ramp down sp=%0d n=%0d", sp, n));
    @(negedge clk); rf_on = 0;
    @(posedge clk); #1;
    chk(sp == 0, "RF off clears setpoint");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
