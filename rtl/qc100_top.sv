// qc100_top: detection-to-rearrangement feedback loop of an atom-array
// control system, from SPD pulses to the AOD drive samples.
//
// Counter card: trigger_unit opens the 5 ms counting window on a timing
// trigger; photon_counter counts SPD pulses per trap; threshold_compare
// binarises the counts; readout_regs holds both results for the processor.
// Planning: path_planner reads the result (raw counts when real_mode_i is
// high, the published setting; packed occupancy bits otherwise), decides
// which atoms move where and which traps close; rf_cmd_encoder compiles that
// into RF-command frames (15 per move, 12 per close), which collect in the
// counter card's sync_fifo. Backplane: once the list is complete,
// backplane_tx sends it as one checked packet to backplane_rx on the AWG
// card. AWG card: awg_cmd_decoder rebuilds the instructions, awg_tone_bank
// holds one tone per site, awg_sequencer runs ramp-down / chirped move /
// ramp-up when a good packet has arrived, and dds_mixer produces the RF
// samples for the DAC. rearr_ind_o is high for the whole round, the square
// wave used to measure the loop latency from det_done_o.
//
// In the published system the planning runs as software on the counter
// card's ARM core and the two cards sit in separate chassis slots with their
// own clocks; here everything is logic on one clock. The SPDs, the DAC and
// the host PC are outside this module: SPD pulses enter on spd_i, samples
// leave on dac_o, and the thresholds, target size and readout mode set by
// the host enter on thr_i, n_target_i and real_mode_i.
// rst_n is the asynchronous reset of every block; it also disables the
// packet-overlap assertion during reset, which lint reports as a net used
// both synchronously and asynchronously.
module qc100_top
  import qc_pkg::*;
#(
  parameter int unsigned N_TRAP_P      = N_TRAP,
  parameter int unsigned WINDOW_CYCLES = 1_250_000,
  parameter int unsigned RAMP_LOG2     = 15,
  parameter int unsigned MOVE_LOG2     = 17,
  parameter int unsigned FIFO_DEPTH    = 512
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           trig_i,
  input  logic [N_TRAP_P-1:0]            spd_i,
  input  logic [N_TRAP_P-1:0][CNT_W-1:0] thr_i,
  input  logic [7:0]                     n_target_i,
  input  logic                           real_mode_i,
  output logic                           det_done_o,
  output logic [N_TRAP_P-1:0]            occ_o,
  output logic                           target_ok_o,
  output logic                           target_full_o,
  output logic [7:0]                     n_move_o,
  output logic [7:0]                     n_close_o,
  output logic                           plan_done_o,
  output logic [15:0]                    frame_count_o,
  output logic                           list_done_o,
  output logic                           pkt_ok_o,
  output logic                           pkt_err_o,
  output logic                           rearr_ind_o,
  output logic                           round_done_o,
  output logic [15:0]                    rounds_o,
  output logic [N_TRAP_P-1:0][AMP_W-1:0] tone_amp_o,
  output logic [N_TRAP_P-1:0][FTW_W-1:0] tone_freq_o,
  output logic signed [15:0]             dac_o
);
  // Counter card
  logic start, gate, busy;
  logic [N_TRAP_P-1:0][CNT_W-1:0] counts;
  logic counts_valid, occ_valid;
  logic [N_TRAP_P-1:0] occ_pl;
  logic rd_en, ack, irq;
  logic [7:0]  rd_addr;
  logic [31:0] rd_data;

  trigger_unit #(.WINDOW_CYCLES(WINDOW_CYCLES)) u_trig (
    .clk, .rst_n, .trig_i, .start_o(start), .gate_o(gate), .done_o(det_done_o), .busy_o(busy));

  photon_counter #(.N_CH(N_TRAP_P), .CNT_W(CNT_W)) u_cnt (
    .clk, .rst_n, .spd_i, .start_i(start), .gate_i(gate), .done_i(det_done_o),
    .counts_o(counts), .valid_o(counts_valid));

  threshold_compare #(.N_CH(N_TRAP_P), .CNT_W(CNT_W)) u_thr (
    .clk, .rst_n, .counts_i(counts), .valid_i(counts_valid), .thr_i,
    .occ_o(occ_pl), .valid_o(occ_valid));

  readout_regs #(.N_CH(N_TRAP_P), .CNT_W(CNT_W)) u_regs (
    .clk, .rst_n, .counts_i(counts), .counts_valid_i(counts_valid),
    .occ_i(occ_pl), .occ_valid_i(occ_valid),
    .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_data_o(rd_data), .ack_i(ack), .irq_o(irq));

  // Planning and command compilation
  logic      cmd_valid, cmd_ready;
  plan_cmd_t cmd;

  path_planner #(.N_TRAP_P(N_TRAP_P)) u_plan (
    .clk, .rst_n, .thr_i, .n_target_i, .real_mode_i, .irq_i(irq), .rd_en_o(rd_en), .rd_addr_o(rd_addr), .rd_data_i(rd_data),
    .ack_o(ack), .cmd_valid_o(cmd_valid), .cmd_ready_i(cmd_ready), .cmd_o(cmd),
    .occ_o, .n_move_o, .n_close_o, .target_ok_o, .target_full_o, .plan_done_o);

  logic               frm_valid, frm_ready;
  logic [FRAME_W-1:0] frm_data;

  rf_cmd_encoder #(.MOVE_LOG2(MOVE_LOG2), .RAMP_LOG2(RAMP_LOG2)) u_enc (
    .clk, .rst_n, .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd),
    .frm_valid_o(frm_valid), .frm_ready_i(frm_ready), .frm_data_o(frm_data),
    .list_done_o, .frame_count_o);

  logic               fifo_full, fifo_empty, fifo_pop;
  logic [FRAME_W-1:0] fifo_dout;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;

  assign frm_ready = !fifo_full;

  sync_fifo #(.WIDTH(FRAME_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push_i(frm_valid && !fifo_full), .din_i(frm_data), .full_o(fifo_full),
    .pop_i(fifo_pop), .dout_o(fifo_dout), .empty_o(fifo_empty), .count_o(fifo_count));

  // Backplane
  logic        bp_valid, bp_sop, bp_eop, tx_busy;
  logic [31:0] bp_data;

  backplane_tx u_bptx (
    .clk, .rst_n, .commit_i(list_done_o), .len_i(frame_count_o),
    .fifo_empty_i(fifo_empty), .fifo_data_i(fifo_dout), .fifo_pop_o(fifo_pop),
    .bp_valid_o(bp_valid), .bp_sop_o(bp_sop), .bp_eop_o(bp_eop), .bp_data_o(bp_data), .busy_o(tx_busy));

  logic        rx_valid, rx_sop;
  logic [31:0] rx_data;

  backplane_rx u_bprx (
    .clk, .rst_n, .bp_valid_i(bp_valid), .bp_sop_i(bp_sop), .bp_eop_i(bp_eop), .bp_data_i(bp_data),
    .frm_valid_o(rx_valid), .frm_sop_o(rx_sop), .frm_data_o(rx_data),
    .pkt_ok_o, .pkt_err_o);

  // AWG card
  logic         awg_cmd_valid, dec_err;
  awg_cmd_t     awg_cmd;
  round_phase_e phase;
  logic [N_TRAP_P-1:0][FTW_W-1:0] tone_phase;

  awg_cmd_decoder u_dec (
    .clk, .rst_n, .frm_valid_i(rx_valid), .frm_sop_i(rx_sop), .frm_data_i(rx_data),
    .cmd_valid_o(awg_cmd_valid), .cmd_o(awg_cmd), .err_o(dec_err));

  awg_sequencer #(.RAMP_LOG2(RAMP_LOG2), .MOVE_LOG2(MOVE_LOG2)) u_seq (
    .clk, .rst_n, .start_i(pkt_ok_o), .phase_o(phase), .rearr_ind_o, .done_o(round_done_o),
    .rounds_o);

  awg_tone_bank #(.N_TONE(N_TRAP_P)) u_tones (
    .clk, .rst_n, .cmd_valid_i(awg_cmd_valid), .cmd_i(awg_cmd), .discard_i(pkt_err_o || dec_err),
    .phase_i(phase), .phase_o(tone_phase), .amp_o(tone_amp_o), .freq_o(tone_freq_o));

  dds_mixer #(.N_TONE(N_TRAP_P)) u_dds (
    .clk, .rst_n, .phase_i(tone_phase), .amp_i(tone_amp_o), .sample_o(dac_o));

  a_no_tx_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(list_done_o && tx_busy));
endmodule
