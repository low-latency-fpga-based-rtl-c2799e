// awg_tone_bank: one RF tone per tweezer site, and the moves between sites.
//
// The AOD makes one trap per RF tone, so the AWG keeps a table of N_TONE
// tones: frequency tuning word, phase accumulator and amplitude (16.16 fixed
// point). After reset tone p sits at F0_FTW + p*DF_FTW with full amplitude:
// the static array. Instructions from the decoder are collected while no
// round runs (discard_i drops them after a bad packet):
//   CLOSE p        tone p will ramp down
//   MOVE  s -> d   tone s will chirp linearly from f_start to f_stop
// The round phase from awg_sequencer then acts on the table:
//   RAMP_DOWN  closing tones lose a_step per clock, clamped at zero
//   MOVE       moving tones gain f_step per clock (linear chirp)
//   COMMIT     one clock: every moving tone is set exactly to its target and
//              copied to the slot of the site it reached; slots of sites
//              left empty get a silent tone at their home frequency
//   RAMP_UP    every tone below full amplitude gains a_step per clock,
//              clamped at AMP_FULL
// so after each round the table is again one tone per site, with the atoms'
// tones keeping their phase. Every phase accumulator advances by its
// frequency word each clock. phase_o/amp_o are registered outputs.
// Linear chirps and ramps, and the re-indexing, are this design's choices.
module awg_tone_bank
  import qc_pkg::*;
#(
  parameter int unsigned      N_TONE   = N_TRAP,
  parameter logic [FTW_W-1:0] F0       = F0_FTW,
  parameter logic [FTW_W-1:0] DF       = DF_FTW,
  parameter logic [AMP_W-1:0] AMP_MAX  = AMP_FULL
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cmd_valid_i,
  input  awg_cmd_t                      cmd_i,
  input  logic                          discard_i,
  input  round_phase_e                  phase_i,
  output logic [N_TONE-1:0][FTW_W-1:0]  phase_o,
  output logic [N_TONE-1:0][AMP_W-1:0]  amp_o,
  output logic [N_TONE-1:0][FTW_W-1:0]  freq_o
);
  localparam logic [31:0] AMAX32 = {AMP_MAX, 16'h0000};
  localparam int unsigned TI = $clog2(N_TONE);

  logic [N_TONE-1:0][FTW_W-1:0] freq, phase, tgt, fstep;
  logic [N_TONE-1:0][31:0]      amp;
  logic [N_TONE-1:0]            closing, moving, from_v, vacated;
  logic [N_TONE-1:0][TI-1:0]    from_idx;
  logic [31:0]                  a_step;

  function automatic logic [FTW_W-1:0] home(int p);
    return F0 + FTW_W'(p) * DF;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < N_TONE; p++) begin
        freq[p]  <= home(p);
        phase[p] <= '0;
        amp[p]   <= AMAX32;
      end
      tgt      <= '0;
      fstep    <= '0;
      closing  <= '0;
      moving   <= '0;
      from_v   <= '0;
      vacated  <= '0;
      from_idx <= '0;
      a_step   <= 32'h0000_1554;
    end else begin
      for (int p = 0; p < N_TONE; p++) phase[p] <= phase[p] + freq[p];
      case (phase_i)
        PH_IDLE: begin
          if (discard_i) begin
            closing <= '0;
            moving  <= '0;
            from_v  <= '0;
            vacated <= '0;
          end else if (cmd_valid_i && int'(cmd_i.src) < N_TONE && int'(cmd_i.dst) < N_TONE) begin
            if (cmd_i.op == OP_CLOSE) begin
              closing[cmd_i.src[TI-1:0]] <= 1'b1;
              a_step                     <= cmd_i.a_step;
            end else if (cmd_i.op == OP_MOVE) begin
              moving[cmd_i.src[TI-1:0]]   <= 1'b1;
              tgt[cmd_i.src[TI-1:0]]      <= cmd_i.f_stop;
              fstep[cmd_i.src[TI-1:0]]    <= cmd_i.f_step;
              from_v[cmd_i.dst[TI-1:0]]   <= 1'b1;
              from_idx[cmd_i.dst[TI-1:0]] <= cmd_i.src[TI-1:0];
              vacated[cmd_i.src[TI-1:0]]  <= 1'b1;
            end
          end
        end
        PH_RAMP_DOWN: begin
          for (int p = 0; p < N_TONE; p++)
            if (closing[p]) amp[p] <= (amp[p] > a_step) ? amp[p] - a_step : '0;
        end
        PH_MOVE: begin
          for (int p = 0; p < N_TONE; p++)
            if (moving[p]) freq[p] <= freq[p] + fstep[p];
        end
        PH_COMMIT: begin
          for (int p = 0; p < N_TONE; p++) begin
            if (from_v[p]) begin
              freq[p]  <= tgt[from_idx[p]];
              phase[p] <= phase[from_idx[p]] + tgt[from_idx[p]];
              amp[p]   <= amp[from_idx[p]];
            end else if (vacated[p]) begin
              freq[p]  <= home(p);
              phase[p] <= '0;
              amp[p]   <= '0;
            end
          end
          closing <= '0;
          moving  <= '0;
          from_v  <= '0;
          vacated <= '0;
        end
        PH_RAMP_UP: begin
          for (int p = 0; p < N_TONE; p++)
            if (amp[p] < AMAX32) amp[p] <= (AMAX32 - amp[p] > a_step) ? amp[p] + a_step : AMAX32;
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    for (int p = 0; p < N_TONE; p++) begin
      phase_o[p] = phase[p];
      amp_o[p]   = amp[p][31:16];
      freq_o[p]  = freq[p];
    end
  end
endmodule
