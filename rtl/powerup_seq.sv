// powerup_seq: the automatic power-up sequence of the tuner and RF.
//
// Order of the modes (from the paper): RF off; positional alignment with RF
// pulsed, to bring the tuner to the preset where RF can be established; phase
// alignment with RF in CW, to bring the reflected power down; sliding mode,
// kept for as long as the sequence runs.
// Conditions (this design's own): OFF -> POSITION when auto_i is set;
// POSITION -> PHASE when the tuner is in position and the cavity amplitude
// has been seen above its level during a pulse; PHASE -> SLIDING when Pr has
// stayed below pr_lvl_i for HOLD consecutive sample ticks; any state -> OFF
// when auto_i is cleared.
// rf_gate_o enables the drive: a PULSE_ON-of-PULSE_PERIOD clock pulse train in
// POSITION, always in PHASE and SLIDING, never in OFF.
// Timing: state changes on the clock; Pr is sampled on tick_i.
module powerup_seq
  import llrf_pkg::*;
#(
  parameter int HOLD         = 5,
  parameter int PULSE_PERIOD = 2_500_000,
  parameter int PULSE_ON     = 250_000
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            auto_i,
  input  logic            tick_i,
  input  logic            in_pos_i,
  input  logic            rf_ok_i,
  input  logic [PR_W-1:0] pr_i,
  input  logic [PR_W-1:0] pr_lvl_i,
  output tuner_mode_e     mode_o,
  output logic            rf_gate_o
);
  localparam int CW_ = $clog2(PULSE_PERIOD);
  localparam int HW  = $clog2(HOLD + 1);

  logic [CW_-1:0] pcnt;
  logic [HW-1:0]  hold;
  logic           rf_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_o  <= TM_OFF;
      pcnt    <= '0;
      hold    <= '0;
      rf_seen <= 1'b0;
    end else begin
      pcnt <= (pcnt == CW_'(PULSE_PERIOD - 1)) ? '0 : pcnt + 1'b1;
      if (!auto_i) begin
        mode_o  <= TM_OFF;
        hold    <= '0;
        rf_seen <= 1'b0;
      end else begin
        case (mode_o)
          TM_OFF: begin
            mode_o <= TM_POSITION;
            pcnt   <= '0;
          end
          TM_POSITION: begin
            if (rf_ok_i) rf_seen <= 1'b1;
            if (in_pos_i && (rf_seen || rf_ok_i)) mode_o <= TM_PHASE;
          end
          TM_PHASE: begin
            if (tick_i) begin
              if (pr_i < pr_lvl_i) hold <= hold + 1'b1;
              else                 hold <= '0;
            end
            if (hold == HW'(HOLD)) mode_o <= TM_SLIDING;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    case (mode_o)
      TM_POSITION:           rf_gate_o = (pcnt < CW_'(PULSE_ON));
      TM_PHASE, TM_SLIDING:  rf_gate_o = 1'b1;
      default:               rf_gate_o = 1'b0;
    endcase
  end
endmodule
