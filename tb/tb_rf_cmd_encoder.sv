// tb_rf_cmd_encoder: sends random MOVE/CLOSE lists through rf_cmd_encoder
// under random back-pressure and compares every frame with the documented
// layout, worked out here from the trap frequency plan F0 + p*DF. Checks
// that a list of N_move moves and N_close closes is 15*N_move + 12*N_close
// frames long (frame_count_o, list_done_o) and that a frame leaves every
// clock when the sink is always ready.
`include "check.svh"
module tb_rf_cmd_encoder;
  import qc_pkg::*;
  localparam int ML = 6, RL = 4;
  logic clk = 0, rst_n = 0;
  logic cv = 0, cr, fv, fr = 1, ld;
  plan_cmd_t cmd;
  logic [31:0] fd;
  logic [15:0] fc;
  int checks = 0, failures = 0;
  logic [31:0] got [$];

  rf_cmd_encoder #(.MOVE_LOG2(ML), .RAMP_LOG2(RL)) dut (.clk, .rst_n, .cmd_valid_i(cv), .cmd_ready_o(cr),
    .cmd_i(cmd), .frm_valid_o(fv), .frm_ready_i(fr), .frm_data_o(fd), .list_done_o(ld), .frame_count_o(fc));
  always #2 clk = ~clk;

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ftw(int p);
    return 32'h51EB_851F + 32'(p) * 32'h0147_AE14;
  endfunction

  task automatic run_list(input int nmove, input int nclose, input bit stall);
    plan_cmd_t lst [$];
    logic [31:0] exp_f [$];
    int n, cycles, done_seen;
    got.delete();
    for (int i = 0; i < nclose + nmove; i++) begin
      plan_cmd_t c;
      c.op = (i < nclose) ? OP_CLOSE : OP_MOVE;
      c.src = IDX_W'($urandom_range(23));
      c.dst = (c.op == OP_MOVE) ? IDX_W'($urandom_range(23)) : c.src;
      c.last = (i == nclose + nmove - 1);
      lst.push_back(c);
    end
    // expected frames
    n = 0;
    foreach (lst[i]) begin
      if (lst[i].op == OP_MOVE) begin
        logic signed [31:0] diff;
        diff = $signed(ftw(lst[i].dst) - ftw(lst[i].src));
        exp_f.push_back({8'h01, lst[i].src, lst[i].dst, 8'(n)});
        exp_f.push_back(ftw(lst[i].src));
        exp_f.push_back(ftw(lst[i].dst));
        exp_f.push_back(32'(diff >>> ML));
        exp_f.push_back(32'h0000_0AAA);
        repeat (10) exp_f.push_back('0);
        n += 15;
      end else begin
        exp_f.push_back({8'h02, lst[i].src, lst[i].src, 8'(n)});
        exp_f.push_back(ftw(lst[i].src));
        exp_f.push_back(32'h0AAA_0000 >> RL);
        repeat (9) exp_f.push_back('0);
        n += 12;
      end
    end
    cycles = 0; done_seen = 0;
    fork
      foreach (lst[i]) begin
        @(negedge clk);
        cv = 1; cmd = lst[i];
        do @(negedge clk); while (!cr);
        // cr was high at the last edge only if the command was taken
        cv = 0;
        while (!cr) @(negedge clk);
      end
      begin
        while (!done_seen) begin
          @(negedge clk);
          if (fv) cycles++;
          fr = stall ? ($urandom_range(2) != 0) : 1'b1;
          if (fv && fr) got.push_back(fd);
          if (ld) done_seen = 1;
        end
      end
    join
    `CHECK(got.size() == 15 * nmove + 12 * nclose, $sformatf("%0d frames, expected %0d", got.size(), 15 * nmove + 12 * nclose))
    `CHECK(int'(fc) == 15 * nmove + 12 * nclose, $sformatf("frame_count %0d", fc))
    for (int i = 0; i < exp_f.size() && i < got.size(); i++)
      `CHECK(got[i] == exp_f[i], $sformatf("frame %0d: %h expected %h", i, got[i], exp_f[i]))
    if (!stall) `CHECK(cycles <= got.size() + 2 * (nmove + nclose), $sformatf("frames took %0d valid clocks", cycles))
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_list(1, 0, 0);
    run_list(0, 1, 0);
    run_list(10, 14, 0);   // 15*10 + 12*14 = 318 frames
    run_list(3, 5, 1);
    run_list(7, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
