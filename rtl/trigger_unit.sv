// trigger_unit: "wait trigger" stage of the counter card.
//
// Waits for a rising edge on the timing trigger, then holds the counting gate
// open for WINDOW_CYCLES clocks and finishes with a one-cycle detection-
// completion pulse. Trigger processing costs one clock: the edge is seen in
// the cycle it arrives and start_o/gate_o rise on the next clock edge, as the
// published counter does (one 4 ns cycle per stage). The default window is
// the 5 ms detection time at a 250 MHz clock. Triggers that arrive while a
// window is open are ignored (this design's choice).
//
// Timing: trig_i rises in cycle t -> start_o=1 and gate_o=1 in t+1 ..
// t+WINDOW_CYCLES -> done_o=1 in t+WINDOW_CYCLES+1.
module trigger_unit #(
  parameter int unsigned WINDOW_CYCLES = 1_250_000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic trig_i,
  output logic start_o,
  output logic gate_o,
  output logic done_o,
  output logic busy_o
);
  localparam int unsigned CW = $clog2(WINDOW_CYCLES + 1);

  logic          trig_q;
  logic [CW-1:0] remain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_q  <= 1'b0;
      remain  <= '0;
      start_o <= 1'b0;
      gate_o  <= 1'b0;
      done_o  <= 1'b0;
    end else begin
      trig_q  <= trig_i;
      start_o <= 1'b0;
      done_o  <= 1'b0;
      if (!gate_o && !done_o && trig_i && !trig_q) begin
        start_o <= 1'b1;
        gate_o  <= 1'b1;
        remain  <= CW'(WINDOW_CYCLES - 1);
      end else if (gate_o) begin
        if (remain == '0) begin
          gate_o <= 1'b0;
          done_o <= 1'b1;
        end else begin
          remain <= remain - 1'b1;
        end
      end
    end
  end

  assign busy_o = gate_o;
endmodule
