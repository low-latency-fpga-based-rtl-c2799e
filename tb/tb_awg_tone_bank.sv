// tb_awg_tone_bank: drives instructions and round phases into a 6-tone bank
// and checks, against values computed here from the frequency plan:
// the static table after reset, phase accumulation, ramp-down of closed
// tones to zero, the linear chirp of moving tones, the commit that hands a
// moved tone (with its phase) to the site it reached and leaves a silent
// tone at home on the site it left, ramp-up back to the static table, a
// chain of moves where one atom's target is another's source, and that
// instructions dropped by discard_i change nothing.
`include "check.svh"
module tb_awg_tone_bank;
  import qc_pkg::*;
  localparam int N = 6, RL = 3, ML = 4;
  logic clk = 0, rst_n = 0;
  logic cv = 0, discard = 0;
  awg_cmd_t cmd;
  round_phase_e ph = PH_IDLE;
  logic [N-1:0][31:0] tph, tfreq;
  logic [N-1:0][15:0] tamp;
  int checks = 0, failures = 0;

  awg_tone_bank #(.N_TONE(N)) dut (.clk, .rst_n, .cmd_valid_i(cv), .cmd_i(cmd), .discard_i(discard),
    .phase_i(ph), .phase_o(tph), .amp_o(tamp), .freq_o(tfreq));
  always #2 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] hf(int p);
    return 32'h51EB_851F + 32'(p) * 32'h0147_AE14;
  endfunction

  task automatic send(input op_e op, input int s, input int d);
    cmd = '0;
    cmd.op = op; cmd.src = IDX_W'(s); cmd.dst = IDX_W'(d);
    cmd.f_start = hf(s); cmd.f_stop = hf(d);
    cmd.f_step = 32'($signed(hf(d) - hf(s)) >>> ML);
    cmd.a_step = 32'h0AAA_0000 >> RL;
    @(negedge clk) cv = 1;
    @(negedge clk) cv = 0;
  endtask

  task automatic static_table(input string what);
    for (int p = 0; p < N; p++)
      `CHECK(tfreq[p] == hf(p) && tamp[p] == 16'h0AAA, $sformatf("%s: tone %0d f %h a %h", what, p, tfreq[p], tamp[p]))
  endtask

  initial begin
    logic [31:0] p0, ph3;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    static_table("after reset");
    p0 = tph[2];
    repeat (5) @(negedge clk);
    `CHECK(tph[2] == p0 + 5 * hf(2), "phase advances by the frequency word each clock")

    // Sites 1 and 2 empty; atoms at 3 and 4 move into them.
    send(OP_CLOSE, 1, 1);
    send(OP_CLOSE, 2, 2);
    send(OP_MOVE, 3, 1);
    send(OP_MOVE, 4, 2);
    ph = PH_RAMP_DOWN;
    repeat (1 << RL) @(negedge clk);
    `CHECK(tamp[1] == 0 && tamp[2] == 0, "closed tones ramped to zero")
    `CHECK(tamp[0] == 16'h0AAA && tamp[3] == 16'h0AAA && tamp[5] == 16'h0AAA, "other tones untouched")
    ph = PH_MOVE;
    repeat (5) @(negedge clk);
    `CHECK(tfreq[3] == hf(3) + 5 * 32'($signed(hf(1) - hf(3)) >>> ML), "linear chirp")
    `CHECK(tfreq[5] == hf(5), "static tone does not chirp")
    repeat ((1 << ML) - 5) @(negedge clk);
    ph3 = tph[3];
    ph = PH_COMMIT;
    @(negedge clk);
    `CHECK(tfreq[1] == hf(1) && tamp[1] == 16'h0AAA, "moved tone now on site 1")
    `CHECK(tph[1] == ph3 + hf(1), "moved tone keeps its phase")
    `CHECK(tfreq[2] == hf(2) && tamp[2] == 16'h0AAA, "moved tone now on site 2")
    `CHECK(tfreq[3] == hf(3) && tamp[3] == 0 && tamp[4] == 0, "vacated sites silent at home")
    ph = PH_RAMP_UP;
    repeat (1 << RL) @(negedge clk);
    ph = PH_IDLE;
    @(negedge clk);
    static_table("after round");

    // Chain: 1 -> 0 and 2 -> 1 at the same time, site 0 closed.
    send(OP_CLOSE, 0, 0);
    send(OP_MOVE, 1, 0);
    send(OP_MOVE, 2, 1);
    ph = PH_RAMP_DOWN; repeat (1 << RL) @(negedge clk);
    ph = PH_MOVE;      repeat (1 << ML) @(negedge clk);
    ph = PH_COMMIT;    @(negedge clk);
    `CHECK(tamp[0] == 16'h0AAA && tamp[1] == 16'h0AAA && tamp[2] == 0, "chain moves: sites 0,1 full, 2 empty")
    `CHECK(tfreq[0] == hf(0) && tfreq[1] == hf(1) && tfreq[2] == hf(2), "chain moves: frequencies")
    ph = PH_RAMP_UP;   repeat (1 << RL) @(negedge clk);
    ph = PH_IDLE;      @(negedge clk);
    static_table("after chain round");

    // Discarded instructions do nothing.
    send(OP_CLOSE, 5, 5);
    send(OP_MOVE, 5, 0);
    @(negedge clk) discard = 1;
    @(negedge clk) discard = 0;
    ph = PH_RAMP_DOWN; repeat (1 << RL) @(negedge clk);
    ph = PH_MOVE;      repeat (1 << ML) @(negedge clk);
    `CHECK(tamp[5] == 16'h0AAA && tfreq[5] == hf(5), "discarded instructions ignored")
    ph = PH_COMMIT;    @(negedge clk);
    ph = PH_IDLE;      @(negedge clk);
    static_table("after discarded round");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
