// tb_photon_counter: drives random SPD pulse trains into photon_counter and
// compares the latched counts with the number of pulses sent inside the
// gate. Also checks the one-clock count evaluation, clearing by start_i,
// that pulses outside the gate are ignored and saturation at 2^CNT_W-1.
`include "check.svh"
module tb_photon_counter;
  localparam int N = 4, CW = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] spd = '0;
  logic start = 0, gate = 0, done = 0;
  logic [N-1:0][CW-1:0] counts;
  logic valid;
  int checks = 0, failures = 0;
  int sent [N];

  photon_counter #(.N_CH(N), .CNT_W(CW)) dut (.clk, .rst_n, .spd_i(spd), .start_i(start),
    .gate_i(gate), .done_i(done), .counts_o(counts), .valid_o(valid));
  always #2 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One window: pulses of 2 high / 2+ low clocks, counted only inside the gate.
  task automatic window(input int max_pulses, input bit pulses_outside);
    int n [N];
    for (int c = 0; c < N; c++) begin n[c] = $urandom_range(max_pulses); sent[c] = 0; end
    if (pulses_outside) begin
      for (int k = 0; k < 3; k++) begin
        @(negedge clk) spd = '1; @(negedge clk); @(negedge clk) spd = '0; @(negedge clk);
      end
    end
    @(negedge clk) start = 1; gate = 1;
    @(negedge clk) start = 0;
    for (int k = 0; k < max_pulses; k++) begin
      for (int c = 0; c < N; c++) if (k < n[c]) begin spd[c] = 1; sent[c]++; end
      @(negedge clk); @(negedge clk);
      spd = '0;
      repeat (2 + $urandom_range(2)) @(negedge clk);
    end
    repeat (3) @(negedge clk);   // synchroniser latency
    gate = 0; done = 1;
    @(negedge clk) done = 0;
    `CHECK(valid, "valid one clock after done")
    for (int c = 0; c < N; c++) begin
      int exp_c;
      exp_c = (sent[c] > (1 << CW) - 1) ? (1 << CW) - 1 : sent[c];
      `CHECK(int'(counts[c]) == exp_c, $sformatf("ch%0d count %0d expected %0d", c, counts[c], exp_c))
    end
    @(negedge clk);
    `CHECK(!valid, "valid is a single pulse")
    if (pulses_outside) begin
      for (int k = 0; k < 3; k++) begin
        @(negedge clk) spd = '1; @(negedge clk); @(negedge clk) spd = '0; @(negedge clk);
      end
      `CHECK(counts[0] == CW'(sent[0] > 31 ? 31 : sent[0]), "counts held after window")
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    window(12, 0);
    window(20, 1);
    window(12, 1);
    window(40, 0);   // saturation
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
