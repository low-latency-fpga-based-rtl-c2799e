// tb_qc100_top: end-to-end test of the feedback loop at reduced window and
// round lengths (24 traps, 10-site target as in the full design).
//
// The testbench holds its own model of the atom array. For each detection
// it sends SPD pulses, many for a loaded trap and a few background pulses
// for an empty one, raises the timing trigger and waits for the AWG round.
// It then checks the detected occupancy, the numbers of moves and closes
// against its own compaction rule, the frame count 15*N_move + 12*N_close,
// a good backplane packet, the loop latency from the detection-completion
// pulse to the indicator (2*frames + reads + 15 clocks), the
// indicator pulse length, and that the tone
// table is back to one full-amplitude tone per site. The model then moves
// its atoms by the same rule, losing each moved atom with some probability,
// and repeats detection and rearrangement up to MAX_ROUNDS times per
// loading, as the iterative protocol does. Loadings alternate between the
// real-value and the comparison-value readout mode. Each mechanism (closes,
// moves, several rounds in one loading, a loading too small to fill the
// target, a round with nothing to move, a filled target, rounds in either
// readout mode) is counted and must occur. A second part repeats this for
// target sizes 2..12 (the range of the target-size sweep), several loadings
// each with up to five rounds, and prints the fraction of loadings that end
// with a full target; every size must be run. One loading at target size 12
// fills only the reservoir, giving a 324-frame command list.
`include "check.svh"
module tb_qc100_top;
  import qc_pkg::*;
  localparam int N = 24;
  localparam bit SWEEP = 1;
  int NT = N_TARGET;    // target size (10), changed by the sweep
  localparam int WINDOW = 400, RL = 4, ML = 7;
  localparam int MAX_ROUNDS = 5;
  localparam int N_LOADINGS = 8;
  localparam int LOSS_PCT = 10;
  localparam int WATCHDOG = 2000000;
  localparam int LAT_FIXED = 15;   // pipeline clocks of the loop beyond reads and frames

  logic clk = 0, rst_n = 0, trig = 0;
  logic real_mode = 1;
  logic [N-1:0] spd = '0;
  logic [N-1:0][CNT_W-1:0] thr;
  logic det_done, target_ok, tgt_full, plan_done, list_done, pkt_ok, pkt_err, ind, round_done;
  logic [N-1:0] occ;
  logic [7:0] nm, nc;
  logic [15:0] fcount, rounds;
  logic [N-1:0][AMP_W-1:0] tamp;
  logic [N-1:0][FTW_W-1:0] tfreq;
  logic signed [15:0] dac;
  int checks = 0, failures = 0;
  int cyc = 0;

  qc100_top #(.WINDOW_CYCLES(WINDOW), .RAMP_LOG2(RL), .MOVE_LOG2(ML)) dut (
    .clk, .rst_n, .trig_i(trig), .spd_i(spd), .thr_i(thr), .n_target_i(8'(NT)), .real_mode_i(real_mode), .det_done_o(det_done), .occ_o(occ),
    .target_ok_o(target_ok), .target_full_o(tgt_full), .n_move_o(nm), .n_close_o(nc), .plan_done_o(plan_done),
    .frame_count_o(fcount), .list_done_o(list_done), .pkt_ok_o(pkt_ok), .pkt_err_o(pkt_err),
    .rearr_ind_o(ind), .round_done_o(round_done), .rounds_o(rounds), .tone_amp_o(tamp),
    .tone_freq_o(tfreq), .dac_o(dac));

  always #2 clk = ~clk;
  always @(posedge clk) cyc++;

  // Atom array model and SPD pulse generation.
  logic [N-1:0] atoms;
  int ph_cnt [N];
  logic counting = 0;
  always @(negedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (counting) begin
        ph_cnt[c] = ph_cnt[c] + 1;
        // loaded: a pulse every 8..11 clocks; empty: rare background
        if (atoms[c]) spd[c] = (ph_cnt[c] % (8 + c % 4)) < 2;
        else          spd[c] = (ph_cnt[c] % 97) < 2;
      end else begin
        spd[c] = 1'b0;
        ph_cnt[c] = c;
      end
    end
  end

  // Mechanism counters
  int m_close = 0, m_move = 0, m_multi = 0, m_short = 0, m_nomove = 0, m_full = 0;
  int n_list = 0;
  int m_pkt = 0, m_round = 0, pkt_err_seen = 0;
  int m_real = 0, m_cmp = 0, m_f324 = 0;
  int success = 0;
  always @(posedge clk) if (rst_n) begin
    if (pkt_ok) m_pkt++;
    if (list_done) n_list++;
    if (pkt_err) pkt_err_seen++;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int popc(logic [N-1:0] v);
    return $countones(v);
  endfunction

  function automatic bit target_full(logic [N-1:0] v);
    for (int p = 0; p < NT; p++) if (!v[p]) return 0;
    return 1;
  endfunction

  // One detection + rearrangement round; returns 1 if the target is full after it.
  task automatic one_round(input int r, output bit full_after);
    int exp_nm, exp_nc, k, t_det, t_ind, ind_len, n_list0, bad_mid;
    logic [N-1:0] next, mv;
    int mv_dst [N];
    bit lost;
    // expected plan
    exp_nc = N - popc(atoms);
    exp_nm = 0; k = 0; next = '0; mv = '0;
    for (int p = 0; p < N; p++) if (atoms[p]) begin
      if (k < NT) begin
        if (k != p) begin exp_nm++; mv[p] = 1'b1; mv_dst[p] = k; end
        lost = (k != p) && ($urandom_range(99) < LOSS_PCT);
        if (!lost) next[k] = 1'b1;
      end else begin
        next[p] = 1'b1;
      end
      k++;
    end
    // detection
    n_list0 = n_list;
    @(negedge clk) trig = 1;
    @(negedge clk) trig = 0; counting = 1;
    wait (det_done);
    t_det = cyc;
    @(negedge clk) counting = 0;
    wait (plan_done);
    @(negedge clk);
    `CHECK(occ == atoms, $sformatf("round %0d: detected %h, loaded %h", r, occ, atoms))
    `CHECK(int'(nm) == exp_nm && int'(nc) == exp_nc, $sformatf("moves %0d closes %0d, expected %0d %0d", nm, nc, exp_nm, exp_nc))
    `CHECK(target_ok == (popc(atoms) >= NT), "target_ok flag")
    `CHECK(tgt_full == target_full(atoms), "target_full flag")
    if (exp_nm == 0 && exp_nc == 0) begin
      `CHECK(!ind, "nothing to do, no round")
      full_after = target_full(atoms);
      return;
    end
    wait (n_list > n_list0);
    `CHECK(int'(fcount) == 15 * exp_nm + 12 * exp_nc, $sformatf("frame count %0d", fcount))
    wait (ind);
    t_ind = cyc;
    ind_len = 0;
    @(negedge clk);
    // Middle of the move: empty traps silent, moving tones part-way along
    // their chirp, all other tones static.
    repeat ((1 << RL) + (1 << (ML - 1)) - 1) begin ind_len++; @(negedge clk); end
    bad_mid = 0;
    for (int p = 0; p < N; p++) begin
      if (!atoms[p]) begin
        if (tamp[p] != 0) bad_mid++;
      end else if (mv[p]) begin
        if (tamp[p] != AMP_FULL || !(tfreq[p] < trap_ftw(IDX_W'(p)) && tfreq[p] > trap_ftw(IDX_W'(mv_dst[p])))) bad_mid++;
      end else begin
        if (tamp[p] != AMP_FULL || tfreq[p] != trap_ftw(IDX_W'(p))) bad_mid++;
      end
    end
    `CHECK(bad_mid == 0, $sformatf("round %0d: %0d tones wrong in the middle of the move", r, bad_mid))
    while (ind) begin ind_len++; @(negedge clk); end
    `CHECK(ind_len == 2 * (1 << RL) + (1 << ML) + 1, $sformatf("indicator %0d clocks", ind_len))
    repeat (2) @(negedge clk);
    for (int p = 0; p < N; p++)
      `CHECK(tamp[p] == AMP_FULL && tfreq[p] == trap_ftw(IDX_W'(p)), $sformatf("tone %0d restored", p))
    // Loop latency: read (N counts or one packed word), plan, encode one
    // frame per clock, then send the packet (header + frames + checksum),
    // plus a fixed pipeline delay.
    `CHECK(t_ind - t_det == 2 * int'(fcount) + (real_mode ? N : (N + 31) / 32) + LAT_FIXED,
           $sformatf("latency %0d clocks for %0d frames, mode %0d", t_ind - t_det, fcount, real_mode))
    $display("round %0d: atoms %0d moves %0d closes %0d frames %0d, trigger-to-rearrangement %0d clocks",
             r, popc(atoms), exp_nm, exp_nc, fcount, t_ind - t_det);
    if (exp_nc > 0) m_close++;
    if (exp_nm > 0) m_move++;
    else            m_nomove++;
    m_round++;
    if (int'(fcount) == 324) m_f324++;
    if (real_mode) m_real++;
    else           m_cmp++;
    atoms = next;
    full_after = target_full(atoms);
  endtask

  initial begin
    bit full;
    for (int c = 0; c < N; c++) thr[c] = CNT_W'(15);
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    for (int l = 0; l < N_LOADINGS; l++) begin
      int r;
      // stochastic loading, ~60%; one sparse loading and one pre-filled target
      for (int p = 0; p < N; p++) atoms[p] = ($urandom_range(99) < 60);
      if (l == 2) atoms = 24'h000F0F;                // 8 atoms: cannot fill 10 sites
      if (l == 3) atoms = 24'h0F03FF | atoms;         // target already full
      real_mode = (l % 2 == 0);                       // readout mode switch
      r = 0; full = 0;
      while (r < MAX_ROUNDS && !full) begin
        one_round(r, full);
        r++;
      end
      if (popc(atoms) < NT) m_short++;
      if (full) begin m_full++; success++; end
      if (r > 1) m_multi++;
      $display("loading %0d: %0d round(s), target %s", l, r, full ? "full" : "not full");
    end
    `CHECK(pkt_err_seen == 0, "no bad packets")
    `CHECK(m_close > 0, "closes exercised")
    `CHECK(m_move > 0, "moves exercised")
    `CHECK(m_multi > 0, "several rounds in one loading")
    `CHECK(m_short > 0, "loading too small for the target")
    `CHECK(m_nomove > 0, "round with nothing to move")
    `CHECK(m_full > 0, "target filled")
    `CHECK(m_real > 0, "rounds in real-value readout mode")
    `CHECK(m_cmp > 0, "rounds in comparison-value readout mode")
    if (SWEEP) begin
      int sizes_run = 0;
      for (int t = 2; t <= 12; t++) begin
        int n_full;
        n_full = 0;
        NT = t;
        for (int l = 0; l < 4; l++) begin
          int r;
          for (int p = 0; p < N; p++) atoms[p] = ($urandom_range(99) < 60);
          // 12 atoms all in the reservoir: 12 moves + 12 closes = 324 frames,
          // the list size of the published latency budget
          if (t == 12 && l == 0) atoms = 24'hFFF000;
          real_mode = (l % 2 == 0);
          r = 0; full = 0;
          while (r < MAX_ROUNDS && !full) begin
            one_round(r, full);
            r++;
          end
          if (full) n_full++;
        end
        $display("target size %0d: %0d of 4 loadings full", t, n_full);
        sizes_run++;
      end
      `CHECK(sizes_run == 11, "all target sizes 2..12 run")
      `CHECK(m_f324 > 0, "a 324-frame command list")
    end
    `CHECK(m_pkt == m_round, "one good packet per round")
    $display("mechanisms: close %0d move %0d multi-round %0d short %0d no-move %0d full %0d packets %0d real %0d comparison %0d",
             m_close, m_move, m_multi, m_short, m_nomove, m_full, m_pkt, m_real, m_cmp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
