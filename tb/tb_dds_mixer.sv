// tb_dds_mixer: feeds random phases and amplitudes for four tones and
// compares sample_o, three clocks later, with the sum of amp*sin(phase)
// computed with real arithmetic. The tolerance (0.4% of each amplitude
// plus rounding) covers the polynomial sine approximation.
`include "check.svh"
module tb_dds_mixer;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][31:0] ph;
  logic [N-1:0][15:0] amp;
  logic signed [15:0] s;
  int checks = 0, failures = 0;
  real hist [4];

  dds_mixer #(.N_TONE(N)) dut (.clk, .rst_n, .phase_i(ph), .amp_i(amp), .sample_o(s));
  always #2 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real worst;
    worst = 0;
    ph = '0; amp = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      real e, tol;
      e = 0; tol = 3;
      for (int i = 0; i < N; i++) begin
        ph[i]  = $urandom;
        if (t < 8) ph[i] = 32'(t) << 29;   // multiples of 45 degrees
        amp[i] = 16'($urandom_range(0, 16383));
        e += amp[i] * $sin(3.14159265358979 * $itor($signed(ph[i][31:16])) / 32768.0);
        tol += 0.004 * amp[i];
      end
      hist[t % 4] = e / 2.0;
      @(negedge clk);
      if (t >= 3) begin
        real err;
        err = $itor(s) - hist[(t - 2) % 4];
        if (err < 0) err = -err;
        if (err > worst) worst = err;
        `CHECK(err <= tol / 2.0 + 1, $sformatf("sample %0d expected %f", s, hist[(t - 2) % 4]))
      end
    end
    $display("worst error %f LSB", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
