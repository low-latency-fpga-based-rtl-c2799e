// tb_backplane_tx: fills a FIFO model with random frames, commits lists of
// several lengths and checks the packet on the backplane: header
// {A55A, length} with sop, the frames in order, the XOR checksum with eop,
// and a total of length+2 words sent back to back.
`include "check.svh"
module tb_backplane_tx;
  logic clk = 0, rst_n = 0;
  logic commit = 0, pop, v, sop, eop, busy;
  logic [15:0] len = '0;
  logic [31:0] d;
  int checks = 0, failures = 0;
  logic [31:0] fifo [$];

  backplane_tx dut (.clk, .rst_n, .commit_i(commit), .len_i(len), .fifo_empty_i(fifo.size() == 0),
    .fifo_data_i(fifo.size() > 0 ? fifo[0] : 32'h0), .fifo_pop_o(pop), .bp_valid_o(v), .bp_sop_o(sop),
    .bp_eop_o(eop), .bp_data_o(d), .busy_o(busy));
  always #2 clk = ~clk;
  always @(posedge clk) if (rst_n && pop) void'(fifo.pop_front());

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input int n);
    logic [31:0] exp_w [$];
    logic [31:0] sum;
    int first, last, words;
    sum = '0;
    for (int i = 0; i < n; i++) begin
      logic [31:0] w;
      w = $urandom;
      fifo.push_back(w);
      exp_w.push_back(w);
      sum ^= w;
    end
    @(negedge clk) commit = 1; len = 16'(n);
    @(negedge clk) commit = 0;
    first = -1; last = -1; words = 0;
    for (int c = 0; c < n + 10; c++) begin
      if (v) begin
        if (words == 0)
          `CHECK(sop && !eop && d == {16'hA55A, 16'(n)}, $sformatf("header %h sop %0d", d, sop))
        else if (words <= n)
          `CHECK(!sop && !eop && d == exp_w[words - 1], $sformatf("frame %0d: %h expected %h", words - 1, d, exp_w[words - 1]))
        else
          `CHECK(eop && !sop && d == sum, $sformatf("checksum %h expected %h", d, sum))
        if (first < 0) first = c;
        last = c;
        words++;
      end
      @(negedge clk);
    end
    `CHECK(words == n + 2, $sformatf("%0d words sent for %0d frames", words, n))
    `CHECK(last - first + 1 == n + 2, "words sent back to back")
    `CHECK(fifo.size() == 0 && !busy, "FIFO drained, link idle")
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    send(1);
    send(27);
    send(318);
    send(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
