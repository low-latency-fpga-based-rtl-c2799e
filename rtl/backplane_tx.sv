// backplane_tx: counter-card end of the backplane link to the AWG card.
//
// The counter card forwards a complete RF-command list to the AWG card over
// the chassis backplane. The physical protocol of the chassis is not
// published, so this design uses a simple 32-bit word link, one word per
// clock: a header word {16'hA55A, length} with bp_sop_o=1, `length` frame
// words taken from the command FIFO, then the XOR of all frame words with
// bp_eop_o=1. commit_i (with len_i, the frame count) starts a packet once the
// whole list is in the FIFO; the FIFO must then hold at least len_i words.
// The link cannot be stalled by the receiver. A commit while a packet is
// being sent is not accepted (busy_o).
//
// Timing: header in the clock after commit_i, then one frame per clock,
// checksum after the last frame: len_i + 2 words in len_i + 2 clocks.
module backplane_tx #(
  parameter logic [15:0] MAGIC = 16'hA55A
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        commit_i,
  input  logic [15:0] len_i,
  input  logic        fifo_empty_i,
  input  logic [31:0] fifo_data_i,
  output logic        fifo_pop_o,
  output logic        bp_valid_o,
  output logic        bp_sop_o,
  output logic        bp_eop_o,
  output logic [31:0] bp_data_o,
  output logic        busy_o
);
  typedef enum logic [1:0] {T_IDLE, T_HDR, T_DATA, T_SUM} tstate_e;
  tstate_e     state;
  logic [15:0] len_q, remain;
  logic [31:0] sum;

  assign busy_o     = (state != T_IDLE);
  assign fifo_pop_o = (state == T_DATA) && !fifo_empty_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= T_IDLE;
      len_q      <= '0;
      remain     <= '0;
      sum        <= '0;
      bp_valid_o <= 1'b0;
      bp_sop_o   <= 1'b0;
      bp_eop_o   <= 1'b0;
      bp_data_o  <= '0;
    end else begin
      bp_valid_o <= 1'b0;
      bp_sop_o   <= 1'b0;
      bp_eop_o   <= 1'b0;
      case (state)
        T_IDLE: if (commit_i) begin
          len_q <= len_i;
          state <= T_HDR;
        end
        T_HDR: begin
          bp_valid_o <= 1'b1;
          bp_sop_o   <= 1'b1;
          bp_data_o  <= {MAGIC, len_q};
          sum        <= '0;
          remain     <= len_q;
          state      <= (len_q == '0) ? T_SUM : T_DATA;
        end
        T_DATA: if (!fifo_empty_i) begin
          bp_valid_o <= 1'b1;
          bp_data_o  <= fifo_data_i;
          sum        <= sum ^ fifo_data_i;
          remain     <= remain - 1'b1;
          if (remain == 16'd1) state <= T_SUM;
        end
        T_SUM: begin
          bp_valid_o <= 1'b1;
          bp_eop_o   <= 1'b1;
          bp_data_o  <= sum;
          state      <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
