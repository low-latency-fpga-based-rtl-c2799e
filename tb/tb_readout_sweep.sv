// tb_readout_sweep: the detection read-out path (readout_regs feeding
// path_planner) at several array sizes, 1 to 35 channels, in both read-out
// modes.
//
// Each lane instantiates the pair for one channel count N. For random counts
// and thresholds it loads a detection result (counts, then occupancy bits),
// lets the planner read it, and checks that
//   - the planner's occupancy equals count > threshold for every channel;
//   - the number of bus reads is N in real-value mode (one per count) and
//     ceil(N/32) in comparison-value mode (one per packed word);
//   - the time from the result interrupt to its acknowledge is the number of
//     reads plus a fixed RD_FIXED clocks, i.e. the read latency grows by one
//     clock (4 ns) per channel in real-value mode and by one clock per 32
//     channels in comparison mode.
// The sizes 7/8 and 32/33 sit on either side of the point where the
// published comparison-mode latency starts to grow and of this design's
// 32-bit word boundary. The lane sizes are this testbench's choice.
`include "check.svh"
module tb_readout_sweep;
  import qc_pkg::*;
  localparam int NL = 7;
  localparam int NS [NL] = '{1, 7, 8, 24, 32, 33, 35};
  localparam int RD_FIXED = 4;     // irq seen, first request, last data back, ack
  localparam int ROUNDS = 8;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int cyc = 0;
  int lanes_done = 0;
  always #2 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NL; g++) begin : g_lane
    localparam int N = NS[g];
    logic [N-1:0][CNT_W-1:0] cnt, thr;
    logic [N-1:0] occ, occ_plan;
    logic cv = 0, ov = 0, rd_en, ack, irq, cmd_valid, pd, ok, real_mode = 1;
    logic [7:0] rd_addr, nm, nc;
    logic [31:0] rd_data;
    plan_cmd_t cmd;
    int n_rd = 0, t_irq = 0, t_ack = 0;
    logic irq_d = 0;

    readout_regs #(.N_CH(N), .CNT_W(CNT_W)) u_regs (
      .clk, .rst_n, .counts_i(cnt), .counts_valid_i(cv), .occ_i(occ), .occ_valid_i(ov),
      .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_data_o(rd_data), .ack_i(ack), .irq_o(irq));

    path_planner #(.N_TRAP_P(N)) u_plan (
      .clk, .rst_n, .thr_i(thr), .n_target_i(8'(N / 2)), .real_mode_i(real_mode), .irq_i(irq),
      .rd_en_o(rd_en), .rd_addr_o(rd_addr), .rd_data_i(rd_data), .ack_o(ack),
      .cmd_valid_o(cmd_valid), .cmd_ready_i(1'b1), .cmd_o(cmd), .occ_o(occ_plan),
      .n_move_o(nm), .n_close_o(nc), .target_ok_o(ok), .plan_done_o(pd));

    always @(posedge clk) if (rst_n) begin
      irq_d <= irq;
      if (rd_en) n_rd++;
      if (irq && !irq_d) t_irq = cyc;
      if (ack) t_ack = cyc;
    end

    initial begin
      wait (rst_n);
      repeat (2) @(negedge clk);
      for (int t = 0; t < ROUNDS; t++) begin
        int exp_rd;
        real_mode = t[0];
        for (int c = 0; c < N; c++) begin
          thr[c] = CNT_W'($urandom_range(5, 25));
          cnt[c] = CNT_W'($urandom_range(0, 40));
          occ[c] = cnt[c] > thr[c];
        end
        n_rd = 0;
        @(negedge clk) cv = 1;
        @(negedge clk) cv = 0; ov = 1;
        @(negedge clk) ov = 0;
        wait (pd);
        @(negedge clk);
        exp_rd = real_mode ? N : (N + 31) / 32;
        `CHECK(occ_plan == occ, $sformatf("N=%0d mode %0d: occupancy %h, expected %h", N, real_mode, occ_plan, occ))
        `CHECK(n_rd == exp_rd, $sformatf("N=%0d mode %0d: %0d reads, expected %0d", N, real_mode, n_rd, exp_rd))
        `CHECK(t_ack - t_irq == exp_rd + RD_FIXED,
               $sformatf("N=%0d mode %0d: irq to ack %0d clocks, expected %0d", N, real_mode, t_ack - t_irq, exp_rd + RD_FIXED))
        if (t < 2)
          $display("N=%2d %s read: %0d reads, %0d clocks (%0d ns)", N, real_mode ? "real-value      " : "comparison-value",
                   n_rd, t_ack - t_irq, 4 * (t_ack - t_irq));
        repeat (3) @(negedge clk);
      end
      lanes_done++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (lanes_done == NL);
    `CHECK(1, "all lanes finished")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
