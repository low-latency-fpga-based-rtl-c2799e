// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used on the counter card to collect the RF-command frames written by the
// processor until the whole list has arrived and can be forwarded over the
// backplane. dout_o shows the oldest word whenever empty_o is low; pop_i
// removes it. A push and a pop may happen in the same clock. Pushing when
// full or popping when empty is a protocol error (asserted in simulation).
// The default depth (512) holds the longest list of a 24-trap array; depth
// and organisation are this design's choices.
// rst_n also disables the two assertions during reset; that use is why lint
// sees it as both a synchronous and an asynchronous net. The logic uses it
// only as an asynchronous reset.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_i,
  input  logic [WIDTH-1:0] din_i,
  output logic             full_o,
  input  logic             pop_i,
  output logic [WIDTH-1:0] dout_o,
  output logic             empty_o,
  output logic [$clog2(DEPTH):0] count_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      cnt;

  assign full_o  = (cnt == (AW+1)'(DEPTH));
  assign empty_o = (cnt == '0);
  assign count_o = cnt;
  assign dout_o  = mem[rptr];

  always_ff @(posedge clk) begin
    if (push_i && !full_o) mem[wptr] <= din_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
      cnt  <= '0;
    end else begin
      if (push_i && !full_o) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop_i && !empty_o) rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      cnt <= cnt + (AW+1)'(push_i && !full_o) - (AW+1)'(pop_i && !empty_o);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push_i && full_o));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop_i && empty_o));
endmodule
