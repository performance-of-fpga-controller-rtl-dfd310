// tb_isac_llrf_full: the whole controller with every parameter at its default
// (250 MHz clock, 16-iteration CORDICs, ramp tick every 65536 clocks, 200 ms
// tuner tick, 2**28 stepper rate accumulator, 10 us step pulses).
// One complete operation: configure through host reports, lock the DPLL to a
// reference 20 kHz above the IF, ramp all three channels to their amplitude
// setpoints and regulate amplitude and phase; then move the tuner in manual
// positional alignment at full speed k0 and check the step rate and the
// pulse width. The 200 ms tuner tick is too slow to run the automatic
// sequence here; that is covered by tb_isac_llrf_top at short ticks.
module tb_isac_llrf_full;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, sync = 0;
  logic signed [15:0] adc [N_CHANNELS];
  logic signed [15:0] dac [N_CHANNELS];
  logic signed [15:0] ref_s;
  hid_report_t ri, ro;
  logic rv = 0, ov;
  logic step, dir, men, tick, locked;
  int pos = 0, width = 0, wmax = 0, wmin = 1 << 30;
  int checks = 0, failures = 0;
  real th = 0.0;

  isac_llrf_top dut (
    .clk, .rst_n, .sync_i(sync), .adc_i(adc), .ref_adc_i(ref_s), .dac_o(dac), .pr_i(16'd100),
    .rep_i(ri), .rep_valid_i(rv), .rep_o(ro), .rep_valid_o(ov),
    .step_o(step), .dir_o(dir), .motor_en_o(men), .tick_o(tick), .dpll_locked_o(locked));

  cavity_model #(.D(10), .G(256)) cav0 (.clk, .dac_i(dac[0]), .pos_i(300), .adc_o(adc[0]));
  cavity_model #(.D(14), .G(200)) cav1 (.clk, .dac_i(dac[1]), .pos_i(300), .adc_o(adc[1]));
  cavity_model #(.D(7),  .G(300)) cav2 (.clk, .dac_i(dac[2]), .pos_i(320), .adc_o(adc[2]));

  always #2 clk = ~clk;
  always @(posedge clk) begin
    th = th + (31.6e6 + 20.0e3) / 250.0e6;
    th = th - $floor(th);
    ref_s <= 16'($rtoi(16000.0 * $cos(2.0 * PI * th)));
  end
  always @(posedge step) if (rst_n) pos += dir ? 1 : -1;
  always @(posedge clk) begin
    if (!rst_n) width <= 0;
    else if (step) width <= width + 1;
    else if (width != 0) begin
      if (width > wmax) wmax <= width;
      if (width < wmin) wmin <= width;
      width <= 0;
    end
  end

  initial begin
    repeat (1_500_000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); ri = '{op: OP_WRITE, addr: a, data: d}; rv = 1;
    @(negedge clk); rv = 0;
    chk(ov && ro.op == OP_WRITE && ro.addr == a && ro.data == d, $sformatf("write %h answered", a));
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); ri = '{op: OP_READ, addr: a, data: 0}; rv = 1;
    @(negedge clk); rv = 0;
    d = ro.data;
  endtask
  task automatic rd_mean(input logic [7:0] a, input int n, output real m);
    logic [31:0] d;
    m = 0.0;
    for (int k = 0; k < n; k++) begin rd(a, d); m += real'($signed(d)) / n; repeat (8) @(posedge clk); end
  endtask

  initial begin
    logic [31:0] d;
    real am, pm, e;
    int n;
    ri = '0;
    repeat (5) @(posedge clk); rst_n = 1;
    @(negedge clk); sync = 1; @(negedge clk); sync = 0;
    wr(8'h50, 32'd256); wr(8'h51, 32'd16384); wr(8'h52, 32'd1);
    for (int c = 0; c < N_CHANNELS; c++) begin
      wr(8'(16*c + 0), 32'(30000 + 5000 * c));
      wr(8'(16*c + 1), 32'(-2000 * c));
      wr(8'(16*c + 2), 32'd64); wr(8'(16*c + 3), 32'd4);
      wr(8'(16*c + 6), 32'd2);
      wr(8'(16*c + 8), 32'd20000);
      wr(8'(16*c + 10), 32'd3);
    end
    n = 0;
    while (!locked && n < 200000) begin @(posedge clk); n++; end
    chk(locked, $sformatf("DPLL locked after %0d clocks", n));
    // the ramp needs 2 ticks of 65536 clocks
    repeat (200000) @(posedge clk);
    for (int c = 0; c < N_CHANNELS; c++) begin
      rd(8'(8'h84 + 8*c), d);
      chk(d == 32'(30000 + 5000 * c), $sformatf("ch%0d ramp at target %0d", c, d));
      rd_mean(8'(8'h80 + 8*c), 200, am);
      rd_mean(8'(8'h81 + 8*c), 200, pm);
      e = pm + 2000.0 * c;
      chk(am > 0.99 * (30000 + 5000 * c) && am < 1.01 * (30000 + 5000 * c), $sformatf("ch%0d amplitude %f", c, am));
      chk(e < 182.0 && e > -182.0, $sformatf("ch%0d phase %f", c, pm));
    end
    // manual positional alignment toward a far preset at full speed k0 = 10000:
    // 10000 * 250 MHz / 2**28 = 9313 steps/s, one step per 26844 clocks
    wr(8'h40, 32'd1000); wr(8'h41, 32'd0); wr(8'h42, 32'd10000); wr(8'h43, 32'd4096);
    wr(8'h4E, {27'd0, 3'(TM_POSITION), 1'b0, 1'b1});
    repeat (161064) @(posedge clk);
    rd(8'h98, d);
    chk(pos >= 5 && pos <= 7 && $signed(d) == pos, $sformatf("6 steps expected in 161064 clocks: pulses %0d counter %0d", pos, $signed(d)));
    rd(8'h9A, d);
    chk($signed(d) == 10000, $sformatf("velocity limited to k0: %0d", $signed(d)));
    chk(wmin == 2500 && wmax == 2500, $sformatf("step pulse width %0d..%0d clocks (expect 2500 = 10 us)", wmin, wmax));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
