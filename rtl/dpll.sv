// dpll: digital phase-locked loop that locks the controller's oscillators to
// the accelerator RF reference, for frequency generation and synchronization.
//
// How it works: the reference IF sample is down-converted with the loop's own
// NCO (mixer, low-pass, CORDIC, as in a channel) to give the phase of the
// reference against that NCO. A PI loop filter turns the phase into a
// frequency word correction, corr = kp*ph + (sum of ki*ph) / 2**16, that is
// added to the base word of the loop NCO and of every channel NCO, so all of
// them follow the reference frequency. locked_o is high after LOCK_CNT
// consecutive samples with |ph| <= LOCK_TOL. The first-order low-pass leaves
// a 2*IF ripple of about 1/50 rad on the phase, so the lock window is wider
// than that (512 = 2.8 degrees).
// Interface: ref_i reference IF sample; base_ftw_i nominal frequency word;
// kp/ki unsigned; en_i closes the loop (when low corr is zero); corr_o signed
// correction in frequency word units.
// Timing: one sample per clock; loop delay about 40 clocks.
// The paper says the controllers use internal digital PLLs for frequency
// generation and synchronization but not how they are built: this phase
// detector and loop filter are this design's own.
module dpll
  import llrf_pkg::*;
#(
  parameter int LPF_K    = 5,
  parameter int CORDIC_N = 16,
  parameter int LOCK_TOL = 512,
  parameter int LOCK_CNT = 1024
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en_i,
  input  logic signed [ADC_W-1:0] ref_i,
  input  logic [ACC_W-1:0]        base_ftw_i,
  input  logic [15:0]             kp_i,
  input  logic [15:0]             ki_i,
  output logic signed [ACC_W-1:0] corr_o,
  output logic signed [PH_W-1:0]  ph_o,
  output logic                    locked_o
);
  logic [ACC_W-1:0]        ftw, acc;
  logic signed [DAC_W-1:0] lo_c, lo_s;
  assign ftw = base_ftw_i + corr_o;

  nco #(.OUT_W(DAC_W), .N(CORDIC_N)) u_nco (
    .clk, .rst_n, .sync_i(1'b0), .ftw_i(ftw), .ph_i('0), .amp_i('1),
    .acc_o(acc), .cos_o(lo_c), .sin_o(lo_s)
  );

  logic signed [DATA_W-1:0] mi, mq, fi, fq;
  mixer #(.LO_W(DAC_W)) u_mix (
    .clk, .rst_n, .adc_i(ref_i), .lo_cos_i(lo_c), .lo_sin_i(lo_s), .i_o(mi), .q_o(mq)
  );
  lowpass #(.W(DATA_W), .K(LPF_K)) u_lpf_i (.clk, .rst_n, .en_i(1'b1), .x_i(mi), .y_o(fi));
  lowpass #(.W(DATA_W), .K(LPF_K)) u_lpf_q (.clk, .rst_n, .en_i(1'b1), .x_i(mq), .y_o(fq));

  logic                   pv;
  logic [DATA_W-1:0]      mag;
  logic signed [PH_W-1:0] ph;
  cordic_vec #(.W(DATA_W), .PW(PH_W), .N(CORDIC_N)) u_cordic (
    .clk, .rst_n, .valid_i(1'b1), .x_i(fi), .y_i(fq),
    .valid_o(pv), .mag_o(mag), .ph_o(ph)
  );
  assign ph_o = ph;

  // PI loop filter.
  localparam int IW = 48;
  localparam logic signed [IW-1:0] IMAX = {2'b00, {(IW-2){1'b1}}};
  logic signed [IW-1:0]   integ, i_next;
  logic signed [PH_W+16:0] p_t, i_inc;
  assign p_t   = ph * $signed({1'b0, kp_i});
  assign i_inc = ph * $signed({1'b0, ki_i});
  always_comb begin
    i_next = integ + IW'(i_inc);
    if (i_next > IMAX)  i_next = IMAX;
    if (i_next < -IMAX) i_next = -IMAX;
  end

  localparam int LCW = $clog2(LOCK_CNT + 1);
  logic [LCW-1:0] lcnt;
  logic           near;
  assign near = (ph <= PH_W'(LOCK_TOL)) && (ph >= -PH_W'(LOCK_TOL)) && (mag != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ    <= '0;
      corr_o   <= '0;
      lcnt     <= '0;
      locked_o <= 1'b0;
    end else if (!en_i) begin
      integ    <= '0;
      corr_o   <= '0;
      lcnt     <= '0;
      locked_o <= 1'b0;
    end else if (pv) begin
      integ  <= i_next;
      corr_o <= ACC_W'(p_t) + ACC_W'(i_next >>> 16);
      if (!near)                   lcnt <= '0;
      else if (lcnt != LCW'(LOCK_CNT)) lcnt <= lcnt + 1'b1;
      locked_o <= (lcnt == LCW'(LOCK_CNT));
    end
  end
endmodule
