// tb_awg_sequencer: starts rounds and measures every phase: ramp-down and
// ramp-up last 2^RAMP_LOG2 clocks, the move 2^MOVE_LOG2, commit one clock;
// the indicator is high for exactly their sum, rises one clock after
// start_i, and done_o/rounds_o mark the end. A start during a round is
// ignored.
`include "check.svh"
module tb_awg_sequencer;
  import qc_pkg::*;
  localparam int RL = 3, ML = 5;
  logic clk = 0, rst_n = 0, start = 0, ind, done;
  round_phase_e ph;
  logic [15:0] rounds;
  int checks = 0, failures = 0;
  int cnt [5];

  awg_sequencer #(.RAMP_LOG2(RL), .MOVE_LOG2(ML)) dut (.clk, .rst_n, .start_i(start), .phase_o(ph),
    .rearr_ind_o(ind), .done_o(done), .rounds_o(rounds));
  always #2 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic round(input int r);
    int ind_len, dones, order_ok;
    round_phase_e prev;
    for (int i = 0; i < 5; i++) cnt[i] = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    `CHECK(ind && ph == PH_RAMP_DOWN, "round starts one clock after start_i")
    ind_len = 0; dones = 0; order_ok = 1; prev = ph;
    for (int c = 0; c < 2 * (1 << RL) + (1 << ML) + 10; c++) begin
      if (ind) ind_len++;
      cnt[int'(ph)]++;
      if (done) dones++;
      if (ph != prev && ph != PH_IDLE && int'(ph) != int'(prev) + 1) order_ok = 0;
      prev = ph;
      if (c == 5) start = 1;
      if (c == 6) start = 0;
      @(negedge clk);
    end
    `CHECK(cnt[1] == (1 << RL), $sformatf("ramp-down %0d clocks", cnt[1]))
    `CHECK(cnt[2] == (1 << ML), $sformatf("move %0d clocks", cnt[2]))
    `CHECK(cnt[3] == 1, "commit one clock")
    `CHECK(cnt[4] == (1 << RL), $sformatf("ramp-up %0d clocks", cnt[4]))
    `CHECK(ind_len == 2 * (1 << RL) + (1 << ML) + 1, $sformatf("indicator high %0d clocks", ind_len))
    `CHECK(order_ok == 1, "phase order")
    `CHECK(dones == 1 && int'(rounds) == r, "one done pulse, round counted")
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(!ind && ph == PH_IDLE, "idle after reset")
    round(1);
    round(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
