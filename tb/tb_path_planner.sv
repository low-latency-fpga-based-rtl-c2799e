// tb_path_planner: two planners, one reading raw counts (real-value mode)
// and one reading packed occupancy bits (comparison mode), selected by
// their real_mode_i inputs (swapped between the two halves of the run), are served by a
// register model holding the same random detection result. For each of many
// random occupancies the command streams, taken under random back-pressure,
// are compared with an independent model of the rule: CLOSE every empty
// trap in ascending order, then MOVE the k-th atom from the left to site k
// (k < target size, 10 and also 2..12) when it is not already there; the last command carries
// last=1. The move/close counts and the target_ok and target_full flags are
// checked too.
`include "check.svh"
module tb_path_planner;
  import qc_pkg::*;
  localparam int N = 24;
  int nt = 10;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][CNT_W-1:0] thr;
  logic [N-1:0] occ;
  logic irq [2];
  logic tf [2];
  logic rd_en [2], ack [2], cv [2], cr [2], ok [2], pd [2];
  logic [7:0] ra [2], nm [2], nc [2];
  logic [31:0] rdat [2];
  plan_cmd_t cmd [2];
  logic [N-1:0] occ_out [2];
  logic [N-1:0][CNT_W-1:0] cnt;
  int checks = 0, failures = 0;
  logic mode [2];
  int n_reads [2];     // read requests per result

  path_planner #(.N_TRAP_P(N)) dut_a (.clk, .rst_n, .thr_i(thr), .n_target_i(8'(nt)), .real_mode_i(mode[0]),
    .irq_i(irq[0]), .rd_en_o(rd_en[0]), .rd_addr_o(ra[0]), .rd_data_i(rdat[0]), .ack_o(ack[0]),
    .cmd_valid_o(cv[0]), .cmd_ready_i(cr[0]), .cmd_o(cmd[0]), .occ_o(occ_out[0]), .n_move_o(nm[0]),
    .n_close_o(nc[0]), .target_ok_o(ok[0]), .target_full_o(tf[0]), .plan_done_o(pd[0]));
  path_planner #(.N_TRAP_P(N)) dut_b (.clk, .rst_n, .thr_i(thr), .n_target_i(8'(nt)), .real_mode_i(mode[1]),
    .irq_i(irq[1]), .rd_en_o(rd_en[1]), .rd_addr_o(ra[1]), .rd_data_i(rdat[1]), .ack_o(ack[1]),
    .cmd_valid_o(cv[1]), .cmd_ready_i(cr[1]), .cmd_o(cmd[1]), .occ_o(occ_out[1]), .n_move_o(nm[1]),
    .n_close_o(nc[1]), .target_ok_o(ok[1]), .target_full_o(tf[1]), .plan_done_o(pd[1]));
  always #2 clk = ~clk;

  // Register model: status at 0, counts at 1..N, occupancy at 0x40.
  for (genvar d = 0; d < 2; d++) begin : g_bus
    always_ff @(posedge clk) begin
      if (rd_en[d]) begin
        if (ra[d] == 8'h40)                 rdat[d] <= 32'(occ);
        else if (ra[d] >= 1 && ra[d] <= N)  rdat[d] <= 32'(cnt[ra[d] - 1]);
        else                                rdat[d] <= 32'h0000_0001;
      end
      if (ack[d]) irq[d] <= 1'b0;
      if (rd_en[d]) n_reads[d] <= n_reads[d] + 1;
    end
  end

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(input logic [N-1:0] o);
    plan_cmd_t exp_q [$];
    plan_cmd_t got [2][$];
    int k, nmove, nclose;
    occ = o;
    for (int c = 0; c < N; c++) begin
      thr[c] = CNT_W'($urandom_range(8, 20));
      cnt[c] = o[c] ? thr[c] + CNT_W'($urandom_range(1, 30)) : CNT_W'($urandom_range(0, thr[c]));
    end
    // Reference list.
    nmove = 0; nclose = 0;
    for (int p = 0; p < N; p++) if (!o[p]) begin
      plan_cmd_t e;
      e.op = OP_CLOSE; e.src = IDX_W'(p); e.dst = IDX_W'(p); e.last = 0;
      exp_q.push_back(e); nclose++;
    end
    k = 0;
    for (int p = 0; p < N; p++) if (o[p]) begin
      if (k < nt && k != p) begin
        plan_cmd_t e;
        e.op = OP_MOVE; e.src = IDX_W'(p); e.dst = IDX_W'(k); e.last = 0;
        exp_q.push_back(e); nmove++;
      end
      k++;
    end
    if (exp_q.size() > 0) exp_q[exp_q.size() - 1].last = 1;
    n_reads[0] = 0; n_reads[1] = 0;
    irq[0] = 1; irq[1] = 1;
    begin
      bit fin [2];
      fin[0] = 0; fin[1] = 0;
      while (!(fin[0] && fin[1])) begin
        @(negedge clk);
        for (int d = 0; d < 2; d++) begin
          if (pd[d]) fin[d] = 1;
          cr[d] = ($urandom_range(3) != 0);
          if (cv[d] && cr[d]) got[d].push_back(cmd[d]);  // accepted at the next edge
        end
      end
    end
    for (int d = 0; d < 2; d++) begin
      `CHECK(got[d].size() == exp_q.size(), $sformatf("mode %0d: %0d commands, expected %0d", d, got[d].size(), exp_q.size()))
      for (int i = 0; i < exp_q.size() && i < got[d].size(); i++)
        `CHECK(got[d][i] == exp_q[i], $sformatf("mode %0d cmd %0d: op %0d %0d->%0d last %0d, expected op %0d %0d->%0d last %0d",
               d, i, got[d][i].op, got[d][i].src, got[d][i].dst, got[d][i].last, exp_q[i].op, exp_q[i].src, exp_q[i].dst, exp_q[i].last))
      `CHECK(occ_out[d] == o, "occupancy read back")
      `CHECK(int'(nm[d]) == nmove && int'(nc[d]) == nclose, "move/close counts")
      `CHECK(ok[d] == ($countones(o) >= nt), "target_ok")
      `CHECK(tf[d] == ((o & ((24'd1 << nt) - 1)) == ((24'd1 << nt) - 1)), "target_full")
      `CHECK(!irq[d], "result acknowledged")
      // Real-value mode reads every count, comparison mode one packed word.
      `CHECK(n_reads[d] == (mode[d] ? N : (N + 31) / 32), $sformatf("mode %0d: %0d reads", mode[d], n_reads[d]))
    end
  endtask

  initial begin
    cr[0] = 1; cr[1] = 1; irq[0] = 0; irq[1] = 0;
    mode[0] = 1; mode[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_one(24'h000000);
    run_one(24'hFFFFFF);
    run_one(24'h0003FF);
    run_one(24'hFFFC00);
    for (int t = 0; t < 60; t++) begin
      logic [N-1:0] o;
      nt = (t < 30) ? 10 : 2 + t % 11;   // target sizes 2..12 as well as 10
      if (t == 30) begin mode[0] = 0; mode[1] = 1; end  // switch modes at run time
      for (int p = 0; p < N; p++) o[p] = ($urandom_range(99) < 60);
      run_one(o);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
