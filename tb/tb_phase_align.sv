// tb_phase_align: velocity = clamp(gain*wrap(set-phase)/256, +-k0) for
// random phases, including errors that wrap across half a turn.
module tb_phase_align;
  import llrf_pkg::*;
  logic signed [15:0] ph, set;
  logic [15:0] gain, k0;
  logic signed [15:0] vel;
  int checks = 0, failures = 0;
  phase_align dut (.ph_i(ph), .set_i(set), .gain_i(gain), .k0_i(k0), .vel_o(vel));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e, v;
    for (int n = 0; n < 2000; n++) begin
      ph = $signed(16'($urandom)); set = $signed(16'($urandom));
      gain = 16'($urandom % 1024); k0 = 16'($urandom % 20000);
      #1;
      e = longint'(set) - longint'(ph);
      if (e > 32767) e -= 65536;
      if (e < -32768) e += 65536;
      v = (e * longint'(gain)) >>> 8;
      if (v > longint'(k0)) v = k0;
      if (v < -longint'(k0)) v = -longint'(k0);
      checks++;
      if (longint'(vel) != v) begin
        failures++;
        if (failures < 5) $display("FAIL e=%0d vel=%0d/%0d", e, vel, v);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
