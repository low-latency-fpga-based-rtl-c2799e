// readout_regs: the counter card's result registers as seen by the processor.
//
// After each detection the counter card holds two forms of the result: the
// raw photon count of every channel ("real-value" readout) and the packed
// occupancy bits after thresholding ("comparison-value" readout). Reading the
// raw counts costs one bus read per trap, the packed bits one read per 32
// traps, which is why the comparison mode has a far lower, nearly constant
// read latency. Both are captured every time; the reader picks the mode by
// the addresses it reads. The register map is this design's choice:
//
//   0x00        status: [31:16] detection sequence number, [0] ready
//   0x01..N_CH  count of channel (addr-1), zero-extended
//   0x40+k      occupancy bits of channels 32k .. 32k+31
//
// ready (and irq_o) is set when a new occupancy vector arrives and cleared by
// ack_i. Reads return data one clock after rd_en_i.
module readout_regs #(
  parameter int unsigned N_CH  = 24,
  parameter int unsigned CNT_W = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_CH-1:0][CNT_W-1:0] counts_i,
  input  logic                       counts_valid_i,
  input  logic [N_CH-1:0]            occ_i,
  input  logic                       occ_valid_i,
  input  logic                       rd_en_i,
  input  logic [7:0]                 rd_addr_i,
  output logic [31:0]                rd_data_o,
  input  logic                       ack_i,
  output logic                       irq_o
);
  localparam int unsigned N_OW = (N_CH + 31) / 32;

  logic [N_CH-1:0][CNT_W-1:0] counts_q;
  logic [N_OW*32-1:0]         occ_q;
  logic [15:0]                seq_q;
  logic                       ready_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      counts_q  <= '0;
      occ_q     <= '0;
      seq_q     <= '0;
      ready_q   <= 1'b0;
      rd_data_o <= '0;
    end else begin
      if (counts_valid_i) counts_q <= counts_i;
      if (occ_valid_i) begin
        occ_q   <= (N_OW*32)'(occ_i);
        seq_q   <= seq_q + 1'b1;
        ready_q <= 1'b1;
      end else if (ack_i) begin
        ready_q <= 1'b0;
      end
      if (rd_en_i) begin
        rd_data_o <= '0;
        if (rd_addr_i == 8'h00)
          rd_data_o <= {seq_q, 15'd0, ready_q};
        else if (rd_addr_i >= 8'h40 && rd_addr_i < 8'(8'h40 + N_OW))
          rd_data_o <= occ_q[32*(rd_addr_i - 8'h40) +: 32];
        else if (rd_addr_i <= 8'(N_CH))
          rd_data_o <= 32'(counts_q[rd_addr_i - 8'd1]);
      end
    end
  end

  assign irq_o = ready_q;
endmodule
