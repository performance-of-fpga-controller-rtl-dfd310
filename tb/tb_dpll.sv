// tb_dpll: the reference is a 31.6 MHz + 100 kHz tone (real arithmetic), the
// base frequency word is the 31.6 MHz one. The loop must lock and its
// correction must settle at 100e3/250e6*2**32 = 1717987 (within 1 %), with
// the residual phase within the lock window (mean over 1000 samples, as
// the 2*IF ripple left by the low-pass moves the correction sample by sample). Disabling the loop clears it.
module tb_dpll;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [15:0] ref_s;
  logic signed [31:0] corr;
  logic signed [15:0] ph;
  logic locked;
  int checks = 0, failures = 0;
  real th = 0.0;
  dpll #(.LOCK_CNT(256)) dut (.clk, .rst_n, .en_i(en), .ref_i(ref_s), .base_ftw_i(FTW_IF),
    .kp_i(16'd256), .ki_i(16'd16384), .corr_o(corr), .ph_o(ph), .locked_o(locked));
  always #2 clk = ~clk;
  always @(posedge clk) begin
    th = th + (31.6e6 + 100.0e3) / 250.0e6;
    th = th - $floor(th);
    ref_s <= 16'($rtoi(20000.0 * $cos(2.0 * PI * th + 0.7)));
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    int n;
    real avg;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (200) @(posedge clk);
    chk(!locked && corr == 0, "open loop: no correction");
    @(negedge clk); en = 1;
    n = 0;
    while (!locked && n < 150000) begin @(posedge clk); n++; end
    chk(locked, $sformatf("locked after %0d clocks", n));
    repeat (5000) @(posedge clk); #1;
    avg = 0.0;
    for (int k = 0; k < 1000; k++) begin @(posedge clk); #1; avg += real'(corr) / 1000.0; end
    chk(avg > 1700807.0 && avg < 1735167.0, $sformatf("mean correction %f (expect 1717987)", avg));
    chk(ph < 512 && ph > -512 && locked, $sformatf("residual phase %0d", ph));
    @(negedge clk); en = 0; @(posedge clk); #1;
    chk(corr == 0 && !locked, "disable clears");
    $display("lock time %0d clocks", n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
