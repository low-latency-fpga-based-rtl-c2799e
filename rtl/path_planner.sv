// path_planner: reads one detection result and plans the rearrangement.
//
// In the published system this step is software on the counter card's ARM
// core; here it is a small state machine so that the whole loop is in logic.
// It follows the rule the system uses for a 1D array with the target zone on
// the left: the k-th occupied trap counted from the left (k < n_target_i) is
// moved to target site k, atoms further right stay where they are, and every
// empty trap is closed (its tone ramped down) for the duration of the round.
//
// Index, address and count fields are 8 bits wide for any array size up to
// the register map's limit, so at 24 traps their top bits are constant.
//
// Sequence: wait for irq_i; read the result over the read port, either the
// N_TRAP raw counts (real_mode_i=1, the real-value mode used for the
// published results; each count is compared with thr_i here) or the
// ceil(N_TRAP/32) packed occupancy words (real_mode_i=0, comparison-value
// mode, which the published system keeps available for lower read latency);
// real_mode_i is sampled with irq_i and holds for that result; acknowledge;
// then stream the commands out: first one CLOSE
// per empty trap in ascending order, then one MOVE per atom whose site
// changes, in ascending order of source. A priority encoder finds the next
// command slot, so one command is offered per clock while the receiver is
// ready, whatever the gaps between them. The final command has last=1. The
// read port returns data one clock after the request. cmd_o is held while
// cmd_valid_o is high and cmd_ready_i low. A result with no empty trap and
// no atom to move produces no commands (plan_done_o still pulses).
// target_full_o reports that the result read shows every target site
// occupied, the defect-free condition a verifying detection looks for;
// target_ok_o that at least n_target_i atoms were detected. Both, with the
// move and close counts, are valid from the acknowledge of a result on.
// The target size n_target_i is an input (set by the host, 10 in the main
// configuration) so that target sizes can change without rebuilding.
module path_planner
  import qc_pkg::*;
#(
  parameter int unsigned N_TRAP_P   = N_TRAP
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_TRAP_P-1:0][CNT_W-1:0] thr_i,
  input  logic [7:0]                   n_target_i,
  input  logic                         real_mode_i,
  input  logic                         irq_i,
  output logic                         rd_en_o,
  output logic [7:0]                   rd_addr_o,
  input  logic [31:0]                  rd_data_i,
  output logic                         ack_o,
  output logic                         cmd_valid_o,
  input  logic                         cmd_ready_i,
  output plan_cmd_t                    cmd_o,
  output logic [N_TRAP_P-1:0]          occ_o,
  output logic [7:0]                   n_move_o,
  output logic [7:0]                   n_close_o,
  output logic                         target_ok_o,
  output logic                         target_full_o,
  output logic                         plan_done_o
);
  localparam int unsigned N_OW   = (N_TRAP_P + 31) / 32;
  localparam int unsigned SW     = $clog2(2 * N_TRAP_P + 1);
  localparam int unsigned AW     = (N_TRAP_P > 1) ? $clog2(N_TRAP_P) : 1;

  typedef enum logic [2:0] {S_IDLE, S_READ, S_WAIT, S_ACK, S_EMIT, S_DONE} state_e;
  state_e state;

  logic [7:0]          rd_cnt;     // reads issued
  logic [7:0]          rx_cnt;     // read data received
  logic                rd_pend;
  logic                real_q;     // mode of the result being read
  logic [7:0]          n_rd;       // reads needed in that mode
  logic [N_TRAP_P-1:0] occ;
  logic [SW-1:0]       slot;

  // Plan derived combinationally from the occupancy vector.
  logic [N_TRAP_P-1:0][7:0] rank;     // atoms strictly left of each trap
  logic [N_TRAP_P-1:0]      move_m;
  logic [2*N_TRAP_P-1:0]    emit_m;   // slot s<N: close s; slot N+p: move p
  logic [7:0]               n_atoms;
  logic                     tgt_full;

  assign n_rd = real_q ? 8'(N_TRAP_P) : 8'(N_OW);

  always_comb begin
    logic [7:0] r;
    r = '0;
    for (int p = 0; p < N_TRAP_P; p++) begin
      rank[p]   = r;
      move_m[p] = occ[p] && (r < n_target_i) && (r != 8'(p));
      r = r + 8'(occ[p]);
    end
    n_atoms = r;
    // Target full: every site below n_target_i holds an atom.
    tgt_full = 1'b1;
    for (int p = 0; p < N_TRAP_P; p++)
      if (p < int'(n_target_i) && !occ[p]) tgt_full = 1'b0;
    emit_m  = {move_m, ~occ};
  end

  // Priority encoder: lowest slot at or above `slot` that holds a command.
  logic [SW-1:0] nxt;
  logic          have_nxt;
  always_comb begin
    nxt      = '0;
    have_nxt = 1'b0;
    for (int i = 2 * N_TRAP_P - 1; i >= 0; i--)
      if (i >= int'(slot) && emit_m[i]) begin
        nxt      = SW'(i);
        have_nxt = 1'b1;
      end
  end

  function automatic logic any_above(logic [2*N_TRAP_P-1:0] m, logic [SW-1:0] s);
    logic a;
    a = 1'b0;
    for (int i = 0; i < 2 * N_TRAP_P; i++)
      if (i > int'(s) && m[i]) a = 1'b1;
    return a;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      rd_cnt      <= '0;
      rx_cnt      <= '0;
      rd_pend     <= 1'b0;
      real_q      <= 1'b1;
      occ         <= '0;
      slot        <= '0;
      rd_en_o     <= 1'b0;
      rd_addr_o   <= '0;
      ack_o       <= 1'b0;
      cmd_valid_o <= 1'b0;
      cmd_o       <= '0;
      occ_o       <= '0;
      n_move_o    <= '0;
      n_close_o   <= '0;
      target_ok_o <= 1'b0;
      target_full_o <= 1'b0;
      plan_done_o <= 1'b0;
    end else begin
      rd_en_o     <= 1'b0;
      ack_o       <= 1'b0;
      plan_done_o <= 1'b0;
      rd_pend     <= rd_en_o;
      // Collect read data (one clock after each request).
      if (rd_pend) begin
        if (real_q)
          occ[rx_cnt[AW-1:0]] <= (rd_data_i[CNT_W-1:0] > thr_i[rx_cnt[AW-1:0]]);
        else
          for (int b = 0; b < 32; b++)
            if (32 * int'(rx_cnt) + b < N_TRAP_P) occ[32 * int'(rx_cnt) + b] <= rd_data_i[b];
        rx_cnt <= rx_cnt + 1'b1;
      end
      case (state)
        S_IDLE: if (irq_i) begin
          state  <= S_READ;
          real_q <= real_mode_i;
          rd_cnt <= '0;
          rx_cnt <= '0;
        end
        S_READ: begin
          rd_en_o   <= 1'b1;
          rd_addr_o <= real_q ? 8'(rd_cnt + 8'd1) : 8'(8'h40 + rd_cnt);
          rd_cnt    <= rd_cnt + 1'b1;
          if (rd_cnt == n_rd - 8'd1) state <= S_WAIT;
        end
        S_WAIT: if (rx_cnt == n_rd) begin
          state <= S_ACK;
          ack_o <= 1'b1;
        end
        S_ACK: begin
          occ_o       <= occ;
          n_move_o    <= 8'($countones(move_m));
          n_close_o   <= 8'($countones(~occ));
          target_ok_o <= (n_atoms >= n_target_i);
          target_full_o <= tgt_full;
          slot        <= '0;
          state       <= S_EMIT;
        end
        S_EMIT: begin
          // One command per accepted handshake; nxt jumps straight to the
          // next slot that holds a command, so empty slots cost no clocks.
          if (!cmd_valid_o || cmd_ready_i) begin
            cmd_valid_o <= 1'b0;
            if (!have_nxt) begin
              state <= S_DONE;
            end else begin
              slot        <= nxt + 1'b1;
              cmd_valid_o <= 1'b1;
              if (int'(nxt) < N_TRAP_P) begin
                cmd_o.op  <= OP_CLOSE;
                cmd_o.src <= IDX_W'(nxt);
                cmd_o.dst <= IDX_W'(nxt);
              end else begin
                cmd_o.op  <= OP_MOVE;
                cmd_o.src <= IDX_W'(int'(nxt) - N_TRAP_P);
                cmd_o.dst <= IDX_W'(rank[int'(nxt) - N_TRAP_P]);
              end
              cmd_o.last <= !any_above(emit_m, nxt);
            end
          end
        end
        S_DONE: if (!cmd_valid_o || cmd_ready_i) begin
          cmd_valid_o <= 1'b0;
          plan_done_o <= 1'b1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
