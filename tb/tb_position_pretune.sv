// tb_position_pretune: velocity = clamp(gain*(preset-pos)/256, +-k0) and the
// in-position flag, for random positions, against a reference computed here.
module tb_position_pretune;
  import llrf_pkg::*;
  logic signed [31:0] pos, preset;
  logic [15:0] tol, gain, k0;
  logic signed [15:0] vel;
  logic inp;
  int checks = 0, failures = 0;
  position_pretune dut (.pos_i(pos), .preset_i(preset), .tol_i(tol), .gain_i(gain), .k0_i(k0), .vel_o(vel), .in_pos_o(inp));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint d, v;
    bit ei;
    for (int n = 0; n < 2000; n++) begin
      preset = $signed($urandom) >>> ($urandom % 24);
      pos    = preset + ($signed($urandom) >>> (8 + $urandom % 20));
      tol  = 16'($urandom % 64);
      gain = 16'($urandom % 2048);
      k0   = 16'($urandom % 5000);
      #1;
      d = longint'(preset) - longint'(pos);
      v = (d * longint'(gain)) >>> 8;
      if (v > longint'(k0)) v = k0;
      if (v < -longint'(k0)) v = -longint'(k0);
      ei = (d <= longint'(tol)) && (d >= -longint'(tol));
      checks++;
      if (longint'(vel) != v || inp != ei) begin
        failures++;
        if (failures < 5) $display("FAIL d=%0d vel=%0d/%0d inp=%0d/%0d", d, vel, v, inp, ei);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
