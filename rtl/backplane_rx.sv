// backplane_rx: AWG-card end of the backplane link.
//
// Receives packets in the format sent by backplane_tx: header {magic, length}
// with sop, `length` frame words, then an XOR checksum word with eop. Frame
// words are forwarded one clock after they arrive (frm_valid_o/frm_data_o)
// so the AWG can decode while the packet is still arriving; frm_sop_o marks
// the first frame of a packet. When the checksum word arrives, pkt_ok_o
// pulses if magic, length, checksum and the eop marker all agree, otherwise
// pkt_err_o pulses; a wrong magic, a missing eop or an unexpected sop also end
// the packet with pkt_err_o. The AWG starts a round only on pkt_ok_o.
module backplane_rx #(
  parameter logic [15:0] MAGIC = 16'hA55A
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bp_valid_i,
  input  logic        bp_sop_i,
  input  logic        bp_eop_i,
  input  logic [31:0] bp_data_i,
  output logic        frm_valid_o,
  output logic        frm_sop_o,
  output logic [31:0] frm_data_o,
  output logic        pkt_ok_o,
  output logic        pkt_err_o
);
  typedef enum logic [1:0] {R_IDLE, R_DATA, R_SUM} rstate_e;
  rstate_e     state;
  logic [15:0] remain;
  logic [31:0] sum;
  logic        first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= R_IDLE;
      remain      <= '0;
      sum         <= '0;
      first       <= 1'b0;
      frm_valid_o <= 1'b0;
      frm_sop_o   <= 1'b0;
      frm_data_o  <= '0;
      pkt_ok_o    <= 1'b0;
      pkt_err_o   <= 1'b0;
    end else begin
      frm_valid_o <= 1'b0;
      frm_sop_o   <= 1'b0;
      pkt_ok_o    <= 1'b0;
      pkt_err_o   <= 1'b0;
      if (bp_valid_i) begin
        case (state)
          R_IDLE: if (bp_sop_i) begin
            if (bp_data_i[31:16] != MAGIC || bp_eop_i) begin
              pkt_err_o <= 1'b1;
            end else begin
              remain <= bp_data_i[15:0];
              sum    <= '0;
              first  <= 1'b1;
              state  <= (bp_data_i[15:0] == '0) ? R_SUM : R_DATA;
            end
          end
          R_DATA: begin
            if (bp_sop_i || bp_eop_i) begin
              pkt_err_o <= 1'b1;
              state     <= R_IDLE;
            end else begin
              frm_valid_o <= 1'b1;
              frm_sop_o   <= first;
              frm_data_o  <= bp_data_i;
              first       <= 1'b0;
              sum         <= sum ^ bp_data_i;
              remain      <= remain - 1'b1;
              if (remain == 16'd1) state <= R_SUM;
            end
          end
          R_SUM: begin
            if (bp_eop_i && !bp_sop_i && bp_data_i == sum) pkt_ok_o <= 1'b1;
            else                                           pkt_err_o <= 1'b1;
            state <= R_IDLE;
          end
          default: state <= R_IDLE;
        endcase
      end
    end
  end
endmodule
