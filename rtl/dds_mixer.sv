// dds_mixer: sums the tones of the tone bank into one RF sample per clock.
//
// For each tone the top 16 bits of the phase accumulator are read as a
// signed fraction x in [-1, 1) of half a turn, and sin(pi*x) is approximated
// without a table: a parabola y = 4x(1-|x|) followed by one correction
// y' = y + 0.225*(y|y| - y), accurate to about 0.1% of full scale. The sine
// is scaled by the tone's amplitude and all tones are added; the sum is
// halved into the 16-bit signed sample for the DAC, so N_TONE tones of
// amplitude up to 2^16/N_TONE cannot overflow. The approximation and the
// one-sample-per-clock rate are this design's choices.
//
// Timing: three register stages; sample_o reflects phase_i/amp_i of three
// clocks earlier.
module dds_mixer #(
  parameter int unsigned N_TONE = 24
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_TONE-1:0][31:0]      phase_i,
  input  logic [N_TONE-1:0][15:0]      amp_i,
  output logic signed [15:0]           sample_o
);
  localparam logic signed [17:0] P_CORR = 18'sd7373;  // 0.225 * 2^15

  logic signed [16:0]      y1   [N_TONE];  // parabola, Q15
  logic        [N_TONE-1:0][15:0] amp1, amp2;
  logic signed [16:0]      y2   [N_TONE];  // corrected sine, Q15
  logic signed [16:0]      prod [N_TONE];  // sine * amp, amp units

  logic signed [16:0] y1_d [N_TONE];
  logic signed [16:0] y2_d [N_TONE];
  logic signed [23:0] acc;

  // Stage 1: parabola.  Stage 2: correction step.  Stage 3: amplitude, sum.
  always_comb begin
    for (int i = 0; i < N_TONE; i++) begin
      logic signed [16:0] x, ax, ay;
      logic signed [34:0] t, yy, d;
      x  = 17'(signed'(phase_i[i][31:16]));
      ax = (x < 0) ? -x : x;
      t  = (35'(x) * 35'(17'sd32768 - ax)) >>> 13;
      if (t > 35'sd32767) t = 35'sd32767;
      y1_d[i] = 17'(t);

      ay = (y1[i] < 0) ? -y1[i] : y1[i];
      yy = (35'(y1[i]) * 35'(ay)) >>> 15;
      d  = ((yy - 35'(y1[i])) * 35'(P_CORR)) >>> 15;
      y2_d[i] = 17'(35'(y1[i]) + d);

      prod[i] = 17'((35'(y2[i]) * 35'({1'b0, amp2[i]})) >>> 15);
    end
    acc = '0;
    for (int i = 0; i < N_TONE; i++) acc = acc + 24'(prod[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_TONE; i++) begin
        y1[i] <= '0;
        y2[i] <= '0;
      end
      amp1     <= '0;
      amp2     <= '0;
      sample_o <= '0;
    end else begin
      for (int i = 0; i < N_TONE; i++) begin
        y1[i] <= y1_d[i];
        y2[i] <= y2_d[i];
      end
      amp1     <= amp_i;
      amp2     <= amp1;
      sample_o <= 16'(acc >>> 1);
    end
  end
endmodule
