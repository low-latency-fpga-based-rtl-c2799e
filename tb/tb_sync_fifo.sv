// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, full/empty/count and simultaneous push and pop, including runs to
// full and back to empty.
`include "check.svh"
module tb_sync_fifo;
  localparam int W = 32, D = 16;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0, full, empty;
  logic [W-1:0] din = '0, dout;
  logic [$clog2(D):0] cnt;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push_i(push), .din_i(din), .full_o(full),
    .pop_i(pop), .dout_o(dout), .empty_o(empty), .count_o(cnt));
  always #2 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 3000; t++) begin
      int bias;
      bias = (t / 200) % 2 == 0 ? 75 : 25;   // alternate filling and draining
      `CHECK(int'(cnt) == model.size(), $sformatf("count %0d model %0d", cnt, model.size()))
      `CHECK(empty == (model.size() == 0) && full == (model.size() == D), "flags")
      if (model.size() > 0) `CHECK(dout == model[0], $sformatf("head %h expected %h", dout, model[0]))
      push = ($urandom_range(99) < bias) && !full;
      pop  = ($urandom_range(99) < 100 - bias) && !empty;
      din  = $urandom;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
      @(negedge clk);
    end
    push = 0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
