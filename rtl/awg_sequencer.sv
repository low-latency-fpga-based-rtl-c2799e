// awg_sequencer: runs one rearrangement round on the AWG card.
//
// A round follows the published sequence: the tones of empty traps are
// ramped down adiabatically, the atoms are carried by chirped tones to their
// new sites, and the closed traps are ramped back up so the static array is
// restored. Between move and ramp-up one COMMIT clock re-indexes the tones to
// the sites they now hold. The durations are this design's choice:
// 2^RAMP_LOG2 clocks per ramp and 2^MOVE_LOG2 clocks for the move (about
// 131 us + 524 us + 131 us at 250 MHz, close to the ~0.8 ms rearrangement
// pulse of the published latency measurement).
//
// start_i (a good command packet) starts a round in the next clock; starts
// during a round are ignored. rearr_ind_o is the rearrangement-indicator
// square wave: it rises with the first ramp-down clock and falls after the
// last ramp-up clock, 2*2^RAMP_LOG2 + 2^MOVE_LOG2 + 1 clocks later. done_o
// pulses once at the end of each round.
module awg_sequencer
  import qc_pkg::*;
#(
  parameter int unsigned RAMP_LOG2 = 15,
  parameter int unsigned MOVE_LOG2 = 17
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start_i,
  output round_phase_e phase_o,
  output logic         rearr_ind_o,
  output logic         done_o,
  output logic [15:0]  rounds_o
);
  localparam int unsigned TW = (MOVE_LOG2 > RAMP_LOG2 ? MOVE_LOG2 : RAMP_LOG2) + 1;
  localparam logic [TW-1:0] RAMP_LAST = TW'((64'd1 << RAMP_LOG2) - 1);
  localparam logic [TW-1:0] MOVE_LAST = TW'((64'd1 << MOVE_LOG2) - 1);

  logic [TW-1:0] t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_o  <= PH_IDLE;
      t        <= '0;
      done_o   <= 1'b0;
      rounds_o <= '0;
    end else begin
      done_o <= 1'b0;
      t      <= t + 1'b1;
      case (phase_o)
        PH_IDLE: begin
          t <= '0;
          if (start_i) phase_o <= PH_RAMP_DOWN;
        end
        PH_RAMP_DOWN: if (t == RAMP_LAST) begin
          phase_o <= PH_MOVE;
          t       <= '0;
        end
        PH_MOVE: if (t == MOVE_LAST) begin
          phase_o <= PH_COMMIT;
          t       <= '0;
        end
        PH_COMMIT: begin
          phase_o <= PH_RAMP_UP;
          t       <= '0;
        end
        PH_RAMP_UP: if (t == RAMP_LAST) begin
          phase_o  <= PH_IDLE;
          done_o   <= 1'b1;
          rounds_o <= rounds_o + 1'b1;
        end
        default: phase_o <= PH_IDLE;
      endcase
    end
  end

  assign rearr_ind_o = (phase_o != PH_IDLE);
endmodule
