// tb_readout_regs: loads random counts and occupancy, then reads the whole
// register map: status (sequence number, ready), every count (real-value
// mode) and the packed occupancy words (comparison mode). Checks the
// one-clock read latency, irq on new data and clearing by ack.
`include "check.svh"
module tb_readout_regs;
  localparam int N = 40, CW = 16;   // 40 channels: two occupancy words
  logic clk = 0, rst_n = 0;
  logic [N-1:0][CW-1:0] counts;
  logic [N-1:0] occ;
  logic cv = 0, ov = 0, rd_en = 0, ack = 0, irq;
  logic [7:0] addr = '0;
  logic [31:0] rdata;
  int checks = 0, failures = 0;

  readout_regs #(.N_CH(N), .CNT_W(CW)) dut (.clk, .rst_n, .counts_i(counts), .counts_valid_i(cv),
    .occ_i(occ), .occ_valid_i(ov), .rd_en_i(rd_en), .rd_addr_i(addr), .rd_data_o(rdata),
    .ack_i(ack), .irq_o(irq));
  always #2 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    rd_en = 1; addr = a;
    @(negedge clk);
    rd_en = 0;
    d = rdata;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(!irq, "no irq after reset")
    for (int r = 1; r <= 3; r++) begin
      for (int c = 0; c < N; c++) counts[c] = CW'($urandom);
      occ = N'({$urandom, $urandom});
      cv = 1; @(negedge clk); cv = 0; ov = 1; @(negedge clk); ov = 0;
      `CHECK(irq, "irq after new occupancy")
      rd(8'h00, d);
      `CHECK(d[0] == 1'b1 && d[31:16] == 16'(r), $sformatf("status %h", d))
      for (int c = 0; c < N; c++) begin
        rd(8'(c + 1), d);
        `CHECK(d == 32'(counts[c]), $sformatf("count %0d read %h", c, d))
      end
      rd(8'h40, d);
      `CHECK(d == occ[31:0], "occupancy word 0")
      rd(8'h41, d);
      `CHECK(d == 32'(occ[N-1:32]), "occupancy word 1")
      ack = 1; @(negedge clk); ack = 0;
      `CHECK(!irq, "ack clears irq")
      rd(8'h00, d);
      `CHECK(d[0] == 1'b0, "status ready cleared")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
