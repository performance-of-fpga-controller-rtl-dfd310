// tb_pid: proportional, integral and derivative terms against hand-worked
// values; integrator and output clamping; wrap-around phase error; open
// loop (feedforward only) when disabled. Output one clock after valid.
module tb_pid;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, v = 0;
  logic [17:0] set, meas;
  logic [15:0] kp, ki, kd;
  logic signed [18:0] ff, out;
  logic signed [18:0] err;
  // phase instance
  logic [15:0] pset, pmeas;
  logic signed [15:0] pff, pout;
  logic signed [16:0] perr;
  int checks = 0, failures = 0;
  pid #(.IN_W(18), .OUT_W(19), .WRAP(0), .OUT_MIN(0), .OUT_MAX(262143)) dut (
    .clk, .rst_n, .en_i(en), .valid_i(v), .set_i(set), .meas_i(meas),
    .kp_i(kp), .ki_i(ki), .kd_i(kd), .ff_i(ff), .out_o(out), .err_o(err));
  pid #(.IN_W(16), .OUT_W(16), .WRAP(1), .OUT_MIN(-32768), .OUT_MAX(32767)) dut_ph (
    .clk, .rst_n, .en_i(en), .valid_i(v), .set_i(pset), .meas_i(pmeas),
    .kp_i(kp), .ki_i(ki), .kd_i(kd), .ff_i(pff), .out_o(pout), .err_o(perr));
  always #2 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic step1;
    @(negedge clk); v = 1; @(posedge clk); #1; v = 0;
  endtask
  initial begin
    set = 0; meas = 0; kp = 0; ki = 0; kd = 0; ff = 0; pset = 0; pmeas = 0; pff = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // open loop: out = ff
    ff = 19'sd1234; pff = -16'sd77;
    repeat (2) @(posedge clk); #1;
    chk(out == 1234 && pout == -77, $sformatf("open loop ff out=%0d pout=%0d", out, pout));
    // P only: e = 1000, kp = 2.0 -> 2000 (+ff 1234)
    @(negedge clk); en = 1; set = 18'd5000; meas = 18'd4000; kp = 16'd512;
    step1();
    chk(out == 3234, $sformatf("P out=%0d", out));
    // no valid: output holds
    @(negedge clk); meas = 18'd0; repeat (3) @(posedge clk); #1;
    chk(out == 3234, "hold without valid");
    // I only: ki = 0.5, e = 1000, three samples -> 500, 1000, 1500
    @(negedge clk); kp = 0; ki = 16'd128; ff = 0; meas = 18'd4000;
    step1(); chk(out == 500, $sformatf("I1 out=%0d", out));
    step1(); chk(out == 1000, $sformatf("I2 out=%0d", out));
    step1(); chk(out == 1500, $sformatf("I3 out=%0d", out));
    // D only: e goes 1000 -> 1500, kd = 1.0 -> +500 on top of integral
    @(negedge clk); ki = 0; kd = 16'd256; meas = 18'd3500;
    step1(); chk(out == 1500 + 500, $sformatf("D out=%0d", out));
    step1(); chk(out == 1500, $sformatf("D settle out=%0d", out));
    // clamp at OUT_MAX with large error and integral gain
    @(negedge clk); kd = 0; ki = 16'hFFFF; set = 18'd262143; meas = 0;
    repeat (20) step1();
    chk(out == 262143, $sformatf("clamp high out=%0d", out));
    // anti-windup: after reversing the error the output leaves the clamp at once
    @(negedge clk); ki = 16'd256; set = 0; meas = 18'd1000;
    step1(); chk(out < 262143 && out > 262143 - 10000, $sformatf("anti-windup out=%0d", out));
    // clamp at 0
    @(negedge clk); ki = 16'hFFFF; meas = 18'd262143;
    repeat (20) step1();
    chk(out == 0, $sformatf("clamp low out=%0d", out));
    // wrap: set = +32000, meas = -32000 -> e = 64000 mod 65536 = -1536
    @(negedge clk); en = 0; @(negedge clk); en = 1; ki = 0; kp = 16'd256; pff = 0;
    pset = 16'd32000; pmeas = 16'($signed(-16'sd32000));
    step1(); chk(pout == -1536 && perr == -1536, $sformatf("wrap pout=%0d perr=%0d", pout, perr));
    // disable clears the integrator
    @(negedge clk); ki = 16'd256; kp = 0; pset = 16'd100; pmeas = 0;
    step1(); step1(); chk(pout == 200, $sformatf("phase I pout=%0d", pout));
    @(negedge clk); en = 0; @(negedge clk); en = 1;
    step1(); chk(pout == 100, $sformatf("integrator cleared pout=%0d", pout));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
