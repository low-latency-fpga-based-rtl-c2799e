// tb_backplane_rx: drives good packets and packets with a wrong checksum,
// a wrong magic, a missing eop and a short packet, and checks that the
// frames come out in order one clock after they arrive, that the first is
// marked frm_sop_o, and that exactly one of pkt_ok_o/pkt_err_o reports
// each packet correctly.
`include "check.svh"
module tb_backplane_rx;
  logic clk = 0, rst_n = 0;
  logic v = 0, sop = 0, eop = 0;
  logic [31:0] d = '0;
  logic fv, fsop, ok, err;
  logic [31:0] fd;
  int checks = 0, failures = 0;
  logic [31:0] rx [$];
  int n_ok = 0, n_err = 0, n_sop = 0;

  backplane_rx dut (.clk, .rst_n, .bp_valid_i(v), .bp_sop_i(sop), .bp_eop_i(eop), .bp_data_i(d),
    .frm_valid_o(fv), .frm_sop_o(fsop), .frm_data_o(fd), .pkt_ok_o(ok), .pkt_err_o(err));
  always #2 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (fv) rx.push_back(fd);
    if (fv && fsop) n_sop++;
    if (ok) n_ok++;
    if (err) n_err++;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // kind: 0 good, 1 bad checksum, 2 bad magic, 3 no eop, 4 eop too early
  task automatic pkt(input int n, input int kind);
    logic [31:0] w [$];
    logic [31:0] sum;
    int ok0, err0;
    ok0 = n_ok; err0 = n_err;
    rx.delete(); n_sop = 0;
    sum = '0;
    for (int i = 0; i < n; i++) begin w.push_back($urandom); sum ^= w[i]; end
    @(negedge clk) v = 1; sop = 1; eop = 0; d = {(kind == 2) ? 16'h1234 : 16'hA55A, 16'(n)};
    for (int i = 0; i < n; i++) begin
      @(negedge clk) sop = 0; d = w[i]; eop = (kind == 4 && i == n - 1);
      if ($urandom_range(3) == 0) begin v = 0; @(negedge clk); v = 1; end
    end
    if (kind != 4) begin
      @(negedge clk) sop = 0; eop = (kind != 3); d = (kind == 1) ? ~sum : sum;
    end
    @(negedge clk) v = 0; sop = 0; eop = 0;
    repeat (3) @(negedge clk);
    if (kind == 0) begin
      `CHECK(n_ok == ok0 + 1 && n_err == err0, "good packet reported ok")
      `CHECK(rx.size() == n, $sformatf("%0d frames forwarded, expected %0d", rx.size(), n))
      for (int i = 0; i < n && i < rx.size(); i++) `CHECK(rx[i] == w[i], "frame data")
      `CHECK(n_sop == (n > 0), "first frame marked")
    end else begin
      `CHECK(n_err == err0 + 1 && n_ok == ok0, $sformatf("bad packet kind %0d reported error", kind))
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    pkt(5, 0);
    pkt(318, 0);
    pkt(7, 1);
    pkt(4, 2);
    pkt(6, 3);
    pkt(6, 4);
    pkt(12, 0);
    pkt(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
