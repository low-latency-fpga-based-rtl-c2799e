// rf_cmd_encoder: compiles planner commands into RF-command frames.
//
// Every MOVE becomes FRAMES_PER_MOVE (15) 32-bit frames and every CLOSE
// FRAMES_PER_CLOSE (12), so a list of N_move moves and N_close closes is
// f = 15*N_move + 12*N_close frames long, the frame count of the published
// system. What the frames contain is not published; this design uses
//
//   MOVE : 0 header {OP_MOVE, src, dst, frame#[7:0]}   1 f_start = FTW(src)
//          2 f_stop = FTW(dst)   3 f_step = (f_stop-f_start) >>> MOVE_LOG2
//          4 amplitude (AMP_FULL)   5..14 reserved, zero
//   CLOSE: 0 header {OP_CLOSE, trap, trap, frame#[7:0]}  1 f_home = FTW(trap)
//          2 a_step = AMP_FULL*2^16 >> RAMP_LOG2 (16.16 fixed point)
//          3..11 reserved, zero
//
// with FTW(p) = F0_FTW + p*DF_FTW. f_step is the signed per-clock increment of
// a linear chirp lasting 2^MOVE_LOG2 clocks; a_step ramps a tone between zero
// and AMP_FULL in 2^RAMP_LOG2 clocks. Both handshakes are valid/ready; one
// frame leaves per clock when frm_ready_i is high, and the next command is
// taken in the clock the last frame of the current one leaves, so
// back-to-back commands give an unbroken stream. list_done_o pulses when the
// final frame of a command marked last has been accepted, and frame_count_o
// then holds the length of that list.
module rf_cmd_encoder
  import qc_pkg::*;
#(
  parameter int unsigned MOVE_LOG2 = 17,
  parameter int unsigned RAMP_LOG2 = 15
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid_i,
  output logic               cmd_ready_o,
  input  plan_cmd_t          cmd_i,
  output logic               frm_valid_o,
  input  logic               frm_ready_i,
  output logic [FRAME_W-1:0] frm_data_o,
  output logic               list_done_o,
  output logic [15:0]        frame_count_o
);
  plan_cmd_t   cur;
  logic        busy;
  logic [3:0]  idx;      // frame index within the command
  logic [15:0] fcount;   // frames of the current list so far

  logic [FTW_W-1:0] f_a, f_b, f_step;
  logic [31:0]      a_step;
  logic [3:0]       n_frames;

  always_comb begin
    f_a      = trap_ftw(cur.src);
    f_b      = trap_ftw(cur.dst);
    f_step   = FTW_W'($signed(f_b - f_a) >>> MOVE_LOG2);
    a_step   = {AMP_FULL, 16'h0000} >> RAMP_LOG2;
    n_frames = (cur.op == OP_MOVE) ? 4'(FRAMES_PER_MOVE) : 4'(FRAMES_PER_CLOSE);
    frm_data_o = '0;
    if (cur.op == OP_MOVE) begin
      case (idx)
        4'd0: frm_data_o = hdr_frame(OP_MOVE, cur.src, cur.dst, fcount[7:0]);
        4'd1: frm_data_o = f_a;
        4'd2: frm_data_o = f_b;
        4'd3: frm_data_o = f_step;
        4'd4: frm_data_o = 32'(AMP_FULL);
        default: frm_data_o = '0;
      endcase
    end else begin
      case (idx)
        4'd0: frm_data_o = hdr_frame(OP_CLOSE, cur.src, cur.src, fcount[7:0]);
        4'd1: frm_data_o = f_a;
        4'd2: frm_data_o = a_step;
        default: frm_data_o = '0;
      endcase
    end
  end

  assign frm_valid_o = busy;
  // Ready while idle and also in the clock the last frame of a command
  // leaves, so back-to-back commands give an unbroken frame stream.
  logic last_frm;
  assign last_frm    = busy && frm_ready_i && (idx == n_frames - 1'b1);
  assign cmd_ready_o = !busy || last_frm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur           <= '0;
      busy          <= 1'b0;
      idx           <= '0;
      fcount        <= '0;
      list_done_o   <= 1'b0;
      frame_count_o <= '0;
    end else begin
      list_done_o <= 1'b0;
      if (busy && frm_ready_i) begin
        fcount <= fcount + 1'b1;
        if (last_frm) begin
          busy <= 1'b0;
          if (cur.last) begin
            list_done_o   <= 1'b1;
            frame_count_o <= fcount + 1'b1;
            fcount        <= '0;
          end
        end else begin
          idx <= idx + 1'b1;
        end
      end
      if (cmd_ready_o && cmd_valid_i && (cmd_i.op == OP_MOVE || cmd_i.op == OP_CLOSE)) begin
        cur  <= cmd_i;
        busy <= 1'b1;
        idx  <= '0;
      end
    end
  end
endmodule
