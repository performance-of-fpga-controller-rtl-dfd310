// rho_estimator: the automatic estimate of the sliding mode parameter rho.
// It moves the tuner at full speed k0 one swing forward and one back around
// the current position (on the steep flank of Pr versus tuner position),
// measures the change of reflected power over each swing and the number of
// sample ticks it took, and returns
//   rho_dt = (|dPr_fwd| + |dPr_back|) / ticks / 2
// i.e. half the rate at which Pr changes when the tuner moves at k0, so that
// dPr/dtheta * k0 + rho < 0 (the sliding condition) holds with margin.
//
// Interface: start_i pulse; pos_i tuner position; swing_i steps per swing.
// vel_o drives the tuner while busy_o; rho_dt_o (Q16.8 Pr units per tick)
// and valid_o when done. A swing that takes 2**16-1 ticks is cut short.
// Timing: Pr is sampled, and a swing starts and ends, only on sample ticks:
// the first swing starts at the first tick after start_i and ends on the
// first tick at which the tuner has gone swing_i steps; the second ends on
// the first tick at which it is back at its start. Every swing so counts
// whole ticks, at least one, even with a fast motor. Then a 32-clock
// division.
// That rho is estimated by moving the tuner back and forth follows the
// paper; the formula, the factor 1/2 and the swing control are this
// design's own.
module rho_estimator
  import llrf_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start_i,
  input  logic                    tick_i,
  input  logic [PR_W-1:0]         pr_i,
  input  logic signed [POS_W-1:0] pos_i,
  input  logic [15:0]             k0_i,
  input  logic [15:0]             swing_i,
  output logic                    busy_o,
  output logic signed [VEL_W-1:0] vel_o,
  output logic [23:0]             rho_dt_o,
  output logic                    valid_o
);
  typedef enum logic [2:0] {S_IDLE, S_SYNC, S_FWD, S_BACK, S_DIV, S_DONE} st_e;
  st_e st;

  logic signed [POS_W-1:0] pos0;
  logic [PR_W-1:0]         pr0, pr1;
  logic [PR_W:0]           dsum;
  logic [15:0]             ticks;
  logic [31:0]             num, quo;
  logic [16:0]             rem;
  logic [5:0]              bitn;

  function automatic logic [PR_W-1:0] absdiff(input logic [PR_W-1:0] a, input logic [PR_W-1:0] b);
    return (a > b) ? a - b : b - a;
  endfunction

  logic signed [POS_W:0] moved;
  assign moved = (POS_W+1)'(pos_i) - (POS_W+1)'(pos0);

  assign busy_o = (st == S_SYNC) || (st == S_FWD) || (st == S_BACK);
  always_comb begin
    case (st)
      S_FWD:   vel_o = VEL_W'($signed({1'b0, k0_i}));
      S_BACK:  vel_o = -VEL_W'($signed({1'b0, k0_i}));
      default: vel_o = '0;
    endcase
  end

  // Restoring division num / ticks, one quotient bit per clock.
  logic [16:0] rem_sh;
  assign rem_sh = {rem[15:0], num[31]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pos0 <= '0; pr0 <= '0; pr1 <= '0; dsum <= '0;
      ticks <= '0; num <= '0; quo <= '0; rem <= '0; bitn <= '0;
      rho_dt_o <= '0; valid_o <= 1'b0;
    end else begin
      case (st)
        S_IDLE: if (start_i) begin
          st <= S_SYNC; ticks <= '0; valid_o <= 1'b0;
        end
        S_SYNC: if (tick_i) begin
          st <= S_FWD; pos0 <= pos_i; pr0 <= pr_i;
        end
        S_FWD: if (tick_i) begin
          if (ticks != '1) ticks <= ticks + 1'b1;
          if (moved >= (POS_W+1)'(swing_i) || ticks == '1) begin
            st <= S_BACK; pr1 <= pr_i; dsum <= (PR_W+1)'(absdiff(pr_i, pr0));
          end
        end
        S_BACK: if (tick_i) begin
          if (ticks != '1) ticks <= ticks + 1'b1;
          if (moved <= 0 || ticks == '1) begin
            st   <= S_DIV;
            // numerator in Q.8, halved: dsum * 256 / 2
            num  <= 32'(dsum + (PR_W+1)'(absdiff(pr_i, pr1))) << 7;
            rem  <= '0; quo <= '0; bitn <= 6'd32;
          end
        end
        S_DIV: begin
          if (bitn == 0) begin
            st <= S_DONE;
          end else begin
            bitn <= bitn - 1'b1;
            num  <= num << 1;
            if (ticks != 0 && rem_sh >= {1'b0, ticks}) begin
              rem <= rem_sh - {1'b0, ticks};
              quo <= {quo[30:0], 1'b1};
            end else begin
              rem <= rem_sh;
              quo <= {quo[30:0], 1'b0};
            end
          end
        end
        S_DONE: begin
          rho_dt_o <= (quo > 32'h00FF_FFFF) ? 24'hFF_FFFF : quo[23:0];
          valid_o  <= 1'b1;
          st       <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
