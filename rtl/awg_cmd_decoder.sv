// awg_cmd_decoder: turns the RF-command frame stream into AWG instructions.
//
// Frames arrive in the layout written by rf_cmd_encoder: a header frame
// {opcode, src, dst, frame#} followed by the command's parameters and zero
// padding, 15 frames for a MOVE and 12 for a CLOSE. The decoder counts the
// frames of each command, collects f_start/f_stop/f_step (MOVE) or the home
// frequency and amplitude step (CLOSE), and emits one instruction in the
// clock after the command's final frame. An unknown opcode raises err_o and
// skips frames until sop_i marks the start of the next packet, which also
// resynchronises the frame counter.
module awg_cmd_decoder
  import qc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               frm_valid_i,
  input  logic               frm_sop_i,
  input  logic [FRAME_W-1:0] frm_data_i,
  output logic               cmd_valid_o,
  output awg_cmd_t           cmd_o,
  output logic               err_o
);
  logic [3:0] idx;
  awg_cmd_t   cur;
  logic       skip;
  op_e        op_now;
  logic [3:0] idx_now;

  always_comb begin
    idx_now = frm_sop_i ? 4'd0 : idx;
    op_now  = (idx_now == 4'd0) ? op_e'(frm_data_i[31:24]) : cur.op;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx         <= '0;
      cur         <= '0;
      skip        <= 1'b0;
      cmd_valid_o <= 1'b0;
      cmd_o       <= '0;
      err_o       <= 1'b0;
    end else begin
      cmd_valid_o <= 1'b0;
      err_o       <= 1'b0;
      if (frm_valid_i && (frm_sop_i || !skip)) begin
        skip <= 1'b0;
        idx  <= idx_now + 1'b1;
        if (idx_now == 4'd0) begin
          if (op_now != OP_MOVE && op_now != OP_CLOSE) begin
            err_o <= 1'b1;
            skip  <= 1'b1;
            idx   <= '0;
          end
          cur.op  <= op_now;
          cur.src <= frm_data_i[23:16];
          cur.dst <= frm_data_i[15:8];
        end else if (op_now == OP_MOVE) begin
          case (idx_now)
            4'd1: cur.f_start <= frm_data_i;
            4'd2: cur.f_stop  <= frm_data_i;
            4'd3: cur.f_step  <= frm_data_i;
            default: ;
          endcase
          if (idx_now == 4'(FRAMES_PER_MOVE - 1)) begin
            cmd_valid_o  <= 1'b1;
            cmd_o        <= cur;
            cmd_o.a_step <= '0;
            idx          <= '0;
          end
        end else begin
          case (idx_now)
            4'd1: begin cur.f_start <= frm_data_i; cur.f_stop <= frm_data_i; end
            4'd2: cur.a_step <= frm_data_i;
            default: ;
          endcase
          if (idx_now == 4'(FRAMES_PER_CLOSE - 1)) begin
            cmd_valid_o  <= 1'b1;
            cmd_o        <= cur;
            cmd_o.f_step <= '0;
            idx          <= '0;
          end
        end
      end
    end
  end
endmodule
