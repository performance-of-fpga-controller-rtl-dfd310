// tb_mixer: random ADC and LO words; I and Q are checked against the products
// shifted to 18 bits (clipped at the positive limit), computed here in
// 64-bit arithmetic, one clock later.
module tb_mixer;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] adc, c, s;
  logic signed [17:0] i_o, q_o;
  int checks = 0, failures = 0;
  mixer dut (.clk, .rst_n, .adc_i(adc), .lo_cos_i(c), .lo_sin_i(s), .i_o, .q_o);
  always #2 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint ei, eq;
    adc = 0; c = 0; s = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      adc = $signed(16'($urandom)); c = $signed(16'($urandom)); s = $signed(16'($urandom));
      if (n == 0) begin adc = -16'sd32768; c = -16'sd32768; s = 16'sd32767; end
      ei = (longint'(adc) * longint'(c)) >>> 13;
      eq = (-(longint'(adc) * longint'(s))) >>> 13;
      if (ei > 131071) ei = 131071;
      if (eq > 131071) eq = 131071;
      @(posedge clk); #1;
      checks++;
      if (longint'(i_o) != ei || longint'(q_o) != eq) begin
        failures++;
        if (failures < 5) $display("mismatch adc=%0d c=%0d s=%0d i=%0d/%0d q=%0d/%0d", adc, c, s, i_o, ei, q_o, eq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
