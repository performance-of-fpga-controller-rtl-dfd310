// tb_sliding_mode: (1) the switching law against sgn(sin(pi*s/eps)) with
// s = Pr + rho*t computed here in real arithmetic, and the s/eps readouts
// (modulo 2 for the wheel, unwrapped for the tape);
// (2) surface skipping adds skip_dt exactly when s is within skip_lvl of the
// lower surface; (3) closed loop on a parabolic Pr(theta): the tuner reaches
// the minimum with and without skipping, and skipping does not slow it down.
module tb_sliding_mode;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, en = 0, tick = 0;
  logic [15:0] pr, k0, inv_eps, skip_lvl;
  logic [23:0] rho_dt, skip_dt;
  logic signed [15:0] vel;
  logic [16:0] sb;
  logic [31:0] stape;
  logic skip;
  logic [15:0] skips, revs;
  int checks = 0, failures = 0;
  sliding_mode dut (.clk, .rst_n, .en_i(en), .tick_i(tick), .pr_i(pr), .k0_i(k0),
    .rho_dt_i(rho_dt), .inv_eps_i(inv_eps), .skip_lvl_i(skip_lvl), .skip_dt_i(skip_dt),
    .vel_o(vel), .s_band_o(sb), .s_tape_o(stape), .skip_o(skip), .skips_o(skips), .reversals_o(revs));
  always #2 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic do_tick;
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
  endtask
  // closed loop run; returns ticks to reach |theta-theta0| <= 10 and final distance
  task automatic run_loop(input bit use_skip, output int t_conv, output int final_d, output int nrev);
    real th, p;
    int r0;
    en = 0; @(negedge clk); @(negedge clk);
    skip_lvl = use_skip ? 16'd6554 : 16'd0;   // 0.1 of a band
    skip_dt  = 24'd1024;                      // 4 Pr units
    k0 = 16'd1; rho_dt = 24'd256;             // rho*dt = 1
    inv_eps = 16'd3277;                       // eps = 20
    r0 = revs;
    th = 150.0; t_conv = -1;
    en = 1;
    for (int n = 0; n < 600; n++) begin
      p = 100.0 + th*th/64.0;
      pr = 16'($rtoi(p));
      do_tick();
      th = th + real'(vel);
      if (t_conv < 0 && th <= 40.0 && th >= -40.0) t_conv = n;
    end
    final_d = $rtoi(th < 0 ? -th : th);
    nrev = revs - r0;
  endtask
  initial begin
    real s, sn, e;
    int tc0, tc1, fd0, fd1, nr0, nr1, sk0;
    logic [16:0] sb_prev;
    pr = 0; k0 = 16'd7; rho_dt = 24'd512; inv_eps = 16'd1024; skip_lvl = 0; skip_dt = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // (1) law, eps = 64, rho*dt = 2, Pr = 1000
    pr = 16'd1000; en = 1;
    for (int n = 0; n < 300; n++) begin
      s = 1000.0 + 2.0 * n;
      do_tick();
      sn = s / 64.0;
      e = $sin(PI * sn);
      if (e > 1e-6 || e < -1e-6)
        chk(vel == ((e > 0) ? 16'sd7 : -16'sd7), $sformatf("law n=%0d s=%f vel=%0d", n, s, vel));
      chk(stape == 32'($rtoi(sn * 65536.0)), $sformatf("s/eps tape %0d vs %f", stape, sn));
      sn = sn - 2.0 * $floor(sn / 2.0);
      chk(sb == 17'($rtoi(sn * 65536.0)), $sformatf("s/eps readout %0d vs %f", sb, sn));
    end
    chk(skips == 0, "no skips when disabled");
    // (2) skipping: eps = 64, skip below 0.1 band, skip_dt = 16 (0.25 band)
    en = 0; @(negedge clk); en = 1;
    skip_lvl = 16'd6554; skip_dt = 24'd4096; rho_dt = 24'd256; pr = 16'd2; // s/eps = 2/64
    sk0 = skips;
    do_tick();   // x = 0.03125 -> skip
    chk(skip && skips == sk0 + 1, "skip taken near lower surface");
    sb_prev = sb;
    do_tick();   // r = (1+16)/64 band
    chk(sb == sb_prev + 17'd1024 + 17'd16384, $sformatf("skip adds skip_dt: %0d -> %0d", sb_prev, sb));
    chk(!skip, "no skip away from the surface");
    en = 0; do_tick();
    chk(vel == 0, "disabled: zero velocity");
    // (3) closed loop
    run_loop(1'b0, tc0, fd0, nr0);
    run_loop(1'b1, tc1, fd1, nr1);
    $display("convergence ticks: plain %0d (final |d|=%0d, %0d reversals), skipping %0d (final |d|=%0d, %0d reversals)",
             tc0, fd0, nr0, tc1, fd1, nr1);
    chk(tc0 > 0 && fd0 <= 40, "plain sliding mode reaches the minimum");
    chk(tc1 > 0 && fd1 <= 40, "sliding mode with skipping reaches the minimum");
    chk(tc1 <= tc0, "skipping does not slow convergence");
    chk(nr1 < nr0, "skipping reduces direction reversals (chatter)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
