// tb_cordic_vec: random vectors against sqrt/atan2 computed in real
// arithmetic; magnitude within 4 LSB, phase within 3 LSB of 2**16 per turn
// plus one input LSB of angle (10430/|v| LSB);
// latency N+2 = 18 clocks, one result per clock.
module tb_cordic_vec;
  import llrf_pkg::*;
  localparam int LAT = 18;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic signed [17:0] x, y;
  logic [17:0] mag;
  logic signed [15:0] ph;
  int checks = 0, failures = 0;
  cordic_vec dut (.clk, .rst_n, .valid_i(vi), .x_i(x), .y_i(y), .valid_o(vo), .mag_o(mag), .ph_o(ph));
  always #2 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  real em [$];
  real ep [$];
  int  sent_at [$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    real xr, yr;
    x = 0; y = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      vi = 1;
      x = $signed(18'($urandom)) >>> ($urandom % 4);
      y = $signed(18'($urandom)) >>> ($urandom % 4);
      if (n < 4) begin x = (n % 2) ? -18'sd100000 : 18'sd100000; y = (n / 2) ? 18'sd1 : -18'sd1; end
      xr = x; yr = y;
      em.push_back($sqrt(xr*xr + yr*yr));
      ep.push_back($atan2(yr, xr) / (2.0*PI) * 65536.0);
      sent_at.push_back(cyc);
    end
    @(negedge clk); vi = 0;
    repeat (LAT + 4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n && vo) begin
    real m, p, d;
    int  t;
    m = em.pop_front(); p = ep.pop_front(); t = sent_at.pop_front();
    d = real'(ph) - p;
    if (d > 32768.0) d -= 65536.0;
    if (d < -32768.0) d += 65536.0;
    checks++;
    if ((real'(mag) - m) > 4.0 || (m - real'(mag)) > 4.0 || d > 3.0 + 10430.0/m || d < -3.0 - 10430.0/m || (cyc - t) != LAT) begin
      failures++;
      if (failures < 6) $display("mismatch mag=%0d/%f ph=%0d/%f lat=%0d", mag, m, ph, p, cyc - t);
    end
  end
endmodule
