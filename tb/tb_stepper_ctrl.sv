// tb_stepper_ctrl: with an 8-bit rate accumulator and 2-clock pulses, a
// velocity of +32 gives one step per 8 clocks (|vel|*2**-8 per clock): 100
// steps in 800 clocks, counted up, dir high; -16 gives one per 16 clocks,
// counted down; disabled gives none; clear zeroes the counter; pulses are
// 2 clocks wide; the position equals the counted pulses.
module tb_stepper_ctrl;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic signed [15:0] vel;
  logic step, dir, men;
  logic signed [31:0] pos;
  int checks = 0, failures = 0;
  int ups = 0, downs = 0, width = 0, bad_width = 0;
  stepper_ctrl #(.RATE_W(8), .PULSE(2)) dut (.clk, .rst_n, .en_i(en), .vel_i(vel), .clr_i(clr),
    .step_o(step), .dir_o(dir), .motor_en_o(men), .pos_o(pos));
  always #2 clk = ~clk;
  always @(posedge clk) begin
    if (!rst_n) width <= 0;
    else if (step) width <= width + 1;
    else begin
      if (width != 0 && width != 2) bad_width <= bad_width + 1;
      width <= 0;
    end
  end
  always @(posedge step) if (rst_n) begin if (dir) ups++; else downs++; end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    vel = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); vel = 16'sd32;
    repeat (800) @(posedge clk); #1;
    chk(pos == 0 && ups == 0 && !men, "no steps while disabled");
    @(negedge clk); en = 1;
    repeat (800) @(posedge clk); #1;
    chk(pos >= 99 && pos <= 100, $sformatf("+32: pos=%0d (expect 100)", pos));
    chk(ups == pos && dir && men, $sformatf("ups=%0d dir=%0d", ups, dir));
    @(negedge clk); en = 0; repeat (4) @(negedge clk);
    clr = 1; @(negedge clk); clr = 0;
    chk(pos == 0, "clear");
    vel = -16'sd16; ups = 0; downs = 0; en = 1;
    repeat (1600) @(posedge clk); #1;
    chk(pos >= -100 && pos <= -98, $sformatf("-16: pos=%0d (expect -100)", pos));
    chk(!dir && downs == -pos, $sformatf("downs=%0d dir=%0d", downs, dir));
    // rate cap: 2*PULSE = 4 clocks between steps at most
    @(negedge clk); en = 0; repeat (4) @(negedge clk);
    clr = 1; @(negedge clk); clr = 0; vel = 16'sd255; en = 1;
    repeat (400) @(posedge clk); #1;
    chk(pos >= 98 && pos <= 101, $sformatf("rate cap pos=%0d (expect 100)", pos));
    chk(bad_width == 0, $sformatf("pulse widths wrong %0d", bad_width));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
