// threshold_compare: "threshold comparison" stage of the counter card.
//
// Binarises every channel's photon count against its own preset threshold:
// occupancy bit = 1 (one atom) when the count is above the threshold, else 0
// (vacant). The comparison is registered, so occ_o and valid_o follow
// valid_i by exactly one clock, the single 4 ns cycle the published counter
// spends on this step. Per-channel thresholds and the strict '>' are this
// design's choices.
module threshold_compare #(
  parameter int unsigned N_CH  = 24,
  parameter int unsigned CNT_W = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_CH-1:0][CNT_W-1:0] counts_i,
  input  logic                       valid_i,
  input  logic [N_CH-1:0][CNT_W-1:0] thr_i,
  output logic [N_CH-1:0]            occ_o,
  output logic                       valid_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occ_o   <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      if (valid_i)
        for (int i = 0; i < N_CH; i++) occ_o[i] <= (counts_i[i] > thr_i[i]);
    end
  end
endmodule
