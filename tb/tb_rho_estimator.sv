// tb_rho_estimator: the tuner (modelled here, moving vel steps per tick)
// sits on a linear flank Pr = 1000 + 3*pos. With k0 = 5 and a swing of 50
// steps each swing takes 10 ticks and changes Pr by 150, so the estimate
// is (150+150)/20/2 = 7.5 Pr per tick (1920 in Q16.8). A second flank,
// Pr = 4000 - 2*pos with k0 = 4, swing 40, gives (80+80)/20/2 = 4.0 (1024).
module tb_rho_estimator;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, tick = 0;
  logic [15:0] pr, k0, swing;
  logic signed [31:0] pos;
  logic busy, valid;
  logic signed [15:0] vel;
  logic [23:0] rho;
  int checks = 0, failures = 0;
  int slope, base;
  rho_estimator dut (.clk, .rst_n, .start_i(start), .tick_i(tick), .pr_i(pr), .pos_i(pos),
    .k0_i(k0), .swing_i(swing), .busy_o(busy), .vel_o(vel), .rho_dt_o(rho), .valid_o(valid));
  always #2 clk = ~clk;
  // tuner and cavity model: a tick every 8 clocks; the position moves by vel
  // in the interval before each tick, so Pr at a tick shows that interval's
  // motion
  always @(posedge clk) begin
    tick <= ($time / 4) % 8 == 0;
    if (($time / 4) % 8 == 0) pos <= pos + 32'(vel);
  end
  assign pr = 16'(base + slope * pos);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic run(input int b, input int sl, input int k, input int sw, input int expect_q8);
    int p0, n;
    base = b; slope = sl; k0 = 16'(k); swing = 16'(sw);
    @(negedge clk); p0 = pos; start = 1; @(negedge clk); start = 0;
    chk(busy, "busy after start");
    n = 0;
    while (!valid && n < 10000) begin @(posedge clk); n++; end
    #1;
    chk(!busy && valid, "done");
    chk(int'(rho) >= expect_q8 - expect_q8/50 && int'(rho) <= expect_q8 + expect_q8/50,
        $sformatf("rho_dt=%0d (Q16.8) expect %0d", rho, expect_q8));
    chk(pos >= p0 - k && pos <= p0 + k, $sformatf("tuner returned pos=%0d start=%0d", pos, p0));
  endtask
  initial begin
    pos = 100; base = 1000; slope = 3;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (10) @(posedge clk);
    chk(!busy && vel == 0, "idle");
    run(1000, 3, 5, 50, 1920);
    run(4000, -2, 4, 40, 1024);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
