// tb_nco: with ftw = 0 the output is amp*cos(ph)/8 and amp*sin(ph)/8 (real
// arithmetic reference, within 3 LSB); latency from a phase change to the
// output is 19 clocks; with ftw for 31.6 MHz the zero-crossing count over
// 10000 samples matches 2*10000*ftw/2**32.
module tb_nco;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, sync = 0;
  logic [31:0] ftw;
  logic signed [15:0] ph;
  logic [17:0] amp;
  logic [31:0] acc;
  logic signed [15:0] c, s;
  int checks = 0, failures = 0;
  nco dut (.clk, .rst_n, .sync_i(sync), .ftw_i(ftw), .ph_i(ph), .amp_i(amp), .acc_o(acc), .cos_o(c), .sin_o(s));
  always #2 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    real ec, es, a;
    int lat, zc;
    logic signed [15:0] prev;
    ftw = 0; ph = 0; amp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      amp = 18'($urandom);
      ph  = $signed(16'($urandom));
      if (n == 0) amp = '1;
      repeat (22) @(posedge clk); #1;
      a  = real'(amp) / 8.0;
      ec = a * $cos(2.0*PI*real'(ph)/65536.0);
      es = a * $sin(2.0*PI*real'(ph)/65536.0);
      if (ec > 32767.0) ec = 32767.0;
      if (es > 32767.0) es = 32767.0;
      chk((real'(c) - ec) < 3.5 && (ec - real'(c)) < 3.5 && (real'(s) - es) < 3.5 && (es - real'(s)) < 3.5,
          $sformatf("amp=%0d ph=%0d c=%0d/%f s=%0d/%f", amp, ph, c, ec, s, es));
    end
    // latency: step the phase from 0 to a quarter turn
    @(negedge clk); amp = 18'd100000; ph = 0;
    repeat (25) @(posedge clk);
    @(negedge clk); ph = 16'sd16384;
    lat = 0;
    while (s < 16'sd6000 && lat < 100) begin @(posedge clk); #1; lat++; end
    chk(lat == 19, $sformatf("latency %0d", lat));
    // frequency
    @(negedge clk); ph = 0; ftw = FTW_IF; sync = 1;
    @(negedge clk); sync = 0;
    repeat (25) @(posedge clk); #1;
    zc = 0; prev = c;
    for (int n = 0; n < 10000; n++) begin
      @(posedge clk); #1;
      if ((prev < 0) != (c < 0)) zc++;
      prev = c;
    end
    chk(zc >= 2527 && zc <= 2529, $sformatf("zero crossings %0d (expect 2528)", zc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
