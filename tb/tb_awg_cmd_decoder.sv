// tb_awg_cmd_decoder: builds MOVE (15 frames) and CLOSE (12 frames) commands
// with random fields in the documented frame layout, streams them with
// random gaps, and checks each decoded instruction and that it appears in
// the clock after the command's last frame. A frame with an unknown opcode
// must raise err_o and be skipped until the next packet start.
`include "check.svh"
module tb_awg_cmd_decoder;
  import qc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic fv = 0, fsop = 0, cv, err;
  logic [31:0] fd = '0;
  awg_cmd_t cmd;
  int checks = 0, failures = 0;
  awg_cmd_t got [$];
  int n_err = 0;

  awg_cmd_decoder dut (.clk, .rst_n, .frm_valid_i(fv), .frm_sop_i(fsop), .frm_data_i(fd),
    .cmd_valid_o(cv), .cmd_o(cmd), .err_o(err));
  always #2 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (cv) got.push_back(cmd);
    if (err) n_err++;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic frame(input logic [31:0] w, input bit s);
    @(negedge clk) fv = 1; fd = w; fsop = s;
    @(negedge clk) fv = 0; fsop = 0;
    if ($urandom_range(2) == 0) @(negedge clk);
  endtask

  initial begin
    awg_cmd_t exp_q [$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      awg_cmd_t e;
      e = '0;
      e.src = IDX_W'($urandom_range(23));
      if ($urandom_range(1) == 1) begin
        e.op = OP_MOVE; e.dst = IDX_W'($urandom_range(23));
        e.f_start = $urandom; e.f_stop = $urandom; e.f_step = $urandom;
        frame({8'h01, e.src, e.dst, 8'(i)}, i == 0);
        frame(e.f_start, 0); frame(e.f_stop, 0); frame(e.f_step, 0); frame(32'h0AAA, 0);
        for (int k = 5; k < 15; k++) frame('0, 0);
      end else begin
        e.op = OP_CLOSE; e.dst = e.src;
        e.f_start = $urandom; e.f_stop = e.f_start; e.a_step = $urandom;
        frame({8'h02, e.src, e.src, 8'(i)}, i == 0);
        frame(e.f_start, 0); frame(e.a_step, 0);
        for (int k = 3; k < 12; k++) frame('0, 0);
      end
      exp_q.push_back(e);
      @(negedge clk);
      `CHECK(got.size() == i + 1, $sformatf("instruction %0d emitted after its last frame", i))
    end
    foreach (exp_q[i]) if (i < got.size())
      `CHECK(got[i] == exp_q[i], $sformatf("instruction %0d: op %0d src %0d dst %0d", i, got[i].op, got[i].src, got[i].dst))
    // Unknown opcode, then garbage, then a new packet with a CLOSE.
    frame(32'h7700_0000, 1);
    frame(32'h0100_0000, 0);
    for (int k = 0; k < 20; k++) frame($urandom, 0);
    @(negedge clk);
    `CHECK(n_err == 1, "unknown opcode flagged once")
    `CHECK(got.size() == 40, "nothing decoded from a bad command")
    frame({8'h02, 8'd3, 8'd3, 8'd0}, 1);
    frame(32'h1234_5678, 0); frame(32'h0000_1554, 0);
    for (int k = 3; k < 12; k++) frame('0, 0);
    @(negedge clk);
    `CHECK(got.size() == 41 && got[40].op == OP_CLOSE && got[40].src == 3 && got[40].a_step == 32'h1554,
           "decoding resumes at the next packet")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
