// photon_counter: "counting" stage of the counter card, one counter per SPD.
//
// Each single-photon detector delivers an asynchronous TTL pulse per detected
// photon. Every channel passes its input through a two-flop synchroniser,
// detects rising edges and counts them while gate_i is high; start_i clears
// all counters. One clock after done_i the counts are copied to counts_o and
// valid_o pulses (the one-cycle count evaluation of the published counter).
// Counters saturate at 2^CNT_W-1. Synchroniser, edge detection and saturation
// are this design's choices.
//
// Timing: an edge on spd_i is counted 3 clocks later; counts_o/valid_o update
// in the cycle after done_i.
module photon_counter #(
  parameter int unsigned N_CH  = 24,
  parameter int unsigned CNT_W = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_CH-1:0]            spd_i,
  input  logic                       start_i,
  input  logic                       gate_i,
  input  logic                       done_i,
  output logic [N_CH-1:0][CNT_W-1:0] counts_o,
  output logic                       valid_o
);
  logic [N_CH-1:0]            s1, s2, s3;
  logic [N_CH-1:0][CNT_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; s3 <= '0;
      cnt      <= '0;
      counts_o <= '0;
      valid_o  <= 1'b0;
    end else begin
      s1 <= spd_i;
      s2 <= s1;
      s3 <= s2;
      valid_o <= done_i;
      if (done_i) counts_o <= cnt;
      for (int i = 0; i < N_CH; i++) begin
        if (start_i)
          cnt[i] <= '0;
        else if (gate_i && s2[i] && !s3[i] && cnt[i] != '1)
          cnt[i] <= cnt[i] + 1'b1;
      end
    end
  end
endmodule
