// tb_trigger_unit: checks the counting window of trigger_unit.
// A trigger edge must give start/gate one clock later, a gate exactly
// WINDOW_CYCLES clocks long and a one-clock done pulse right after it;
// a trigger during the window is ignored; a later trigger works again.
`include "check.svh"
module tb_trigger_unit;
  localparam int W = 20;
  logic clk = 0, rst_n = 0, trig = 0;
  logic start, gate, done, busy;
  int checks = 0, failures = 0;
  int cyc = 0;
  trigger_unit #(.WINDOW_CYCLES(W)) dut (.clk, .rst_n, .trig_i(trig), .start_o(start),
                                         .gate_o(gate), .done_o(done), .busy_o(busy));
  always #2 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_window(input bool_extra_trig);
    int t0, gate_len, done_at, starts;
    @(negedge clk) trig = 1;
    t0 = cyc;
    @(negedge clk);
    `CHECK(start && gate, "start/gate one clock after trigger")
    gate_len = 0; starts = 0; done_at = -1;
    trig = 0;
    for (int i = 0; i < W + 10; i++) begin
      if (gate) gate_len++;
      if (start) starts++;
      if (done) done_at = cyc - t0;
      if (bool_extra_trig && i == 5) trig = 1;
      if (bool_extra_trig && i == 6) trig = 0;
      @(negedge clk);
    end
    `CHECK(gate_len == W, $sformatf("gate length %0d, expected %0d", gate_len, W))
    `CHECK(starts == 1, "exactly one start pulse")
    `CHECK(done_at == W + 1, $sformatf("done %0d clocks after trigger, expected %0d", done_at, W + 1))
    `CHECK(!busy && !gate, "idle after window")
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    `CHECK(!gate && !done && !start, "idle after reset")
    run_window(0);
    run_window(1);
    // a level held high is not a new trigger
    @(negedge clk) trig = 1;
    repeat (W + 5) @(negedge clk);
    `CHECK(!gate, "held trigger opens only one window")
    trig = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
