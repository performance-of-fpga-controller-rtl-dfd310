// tb_lowpass: step response of the first-order low-pass (K = 5) against the
// closed form x*(1-(1-2**-K)**n), DC gain, and a 2*IF tone attenuation.
module tb_lowpass;
  import llrf_pkg::*;
  localparam int K = 5;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [17:0] x, y;
  int checks = 0, failures = 0;
  lowpass #(.W(18), .K(K)) dut (.clk, .rst_n, .en_i(en), .x_i(x), .y_o(y));
  always #2 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    real e, a;
    int ymax, ymin;
    x = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; en = 1;
    @(negedge clk); x = 18'sd100000;
    for (int n = 1; n <= 300; n++) begin
      @(posedge clk); #1;
      e = 100000.0 * (1.0 - (1.0 - 1.0/32.0) ** n);
      if (n % 10 == 0) chk((real'(y) - e) < 40.0 && (e - real'(y)) < 40.0, $sformatf("step n=%0d y=%0d e=%f", n, y, e));
    end
    chk(y > 99960 && y <= 100000, $sformatf("dc gain y=%0d", y));
    // hold: en low keeps the output
    @(negedge clk); en = 0; x = 0;
    repeat (10) @(posedge clk); #1;
    chk(y > 99960, "hold when en low");
    @(negedge clk); en = 1;
    // tone at 63.2 MHz (2*IF) of amplitude 50000: expect strong attenuation
    repeat (300) @(posedge clk);
    ymax = -1000000; ymin = 1000000;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      a = 50000.0 * $cos(2.0 * 3.14159265358979 * 0.2528 * n);
      x = 18'($rtoi(a));
      @(posedge clk); #1;
      if (n > 500) begin
        if (y > ymax) ymax = y;
        if (y < ymin) ymin = y;
      end
    end
    chk(ymax - ymin < 2 * 50000 / 20, $sformatf("2*IF ripple %0d", ymax - ymin));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
