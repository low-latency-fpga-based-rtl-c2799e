// tb_threshold_compare: random counts and thresholds; the occupancy must be
// count > threshold per channel, one clock after valid_i, and hold while
// valid_i is low.
`include "check.svh"
module tb_threshold_compare;
  localparam int N = 24, CW = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][CW-1:0] counts, thr;
  logic valid_in = 0, valid_out;
  logic [N-1:0] occ, exp_occ;
  int checks = 0, failures = 0;

  threshold_compare #(.N_CH(N), .CNT_W(CW)) dut (.clk, .rst_n, .counts_i(counts), .valid_i(valid_in),
    .thr_i(thr), .occ_o(occ), .valid_o(valid_out));
  always #2 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    counts = '0; thr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int c = 0; c < N; c++) begin
        thr[c]    = CW'($urandom_range(10, 20));
        counts[c] = CW'($urandom_range(0, 40));
        if (t % 7 == 0) counts[c] = thr[c];        // equal: vacant
        if (t % 7 == 1) counts[c] = thr[c] + 1'b1; // just above: occupied
        exp_occ[c] = counts[c] > thr[c];
      end
      valid_in = 1;
      @(negedge clk);
      valid_in = 0;
      `CHECK(valid_out, "valid one clock later")
      `CHECK(occ == exp_occ, $sformatf("occ %h expected %h", occ, exp_occ))
      counts = ~counts;
      @(negedge clk);
      `CHECK(!valid_out && occ == exp_occ, "occupancy held without valid")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
