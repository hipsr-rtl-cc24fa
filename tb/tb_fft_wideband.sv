// tb_fft_wideband: checks the lane-parallel FFT of a real signal against a
// direct DFT. Frames of a real tone plus random noise are streamed LANES
// samples per clock, back to back, with every scaling bit set, so output j at
// lane-FFT bin k1 must equal DFT/N at bin k1 + j*N/LANES. Also checked: the
// bit-reversed k1 order on out_bin and the in-to-out latency.
module tb_fft_wideband;
  import hipsr_pkg::*;
  localparam int N = 64, LANES = 4, NL = N / LANES, LOGNL = 4, NFR = 6;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst = 1, in_sync = 0;
  sample_t din [LANES];
  cplx_t dout [LANES/2];
  logic [$clog2(N)-1:0] shift = '1;
  logic [LOGNL-1:0] out_bin;
  logic out_sync, ovf;
  int checks = 0, failures = 0;

  fft_wideband #(.N(N), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int x [NFR][N];
  int cyc = 0, t_in0 = -1, t_out0 = -1;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    int f, pos, k1, k;
    real er, ei, a;
    f = 0; pos = 0;
    wait (!rst);
    forever begin
      @(posedge clk); #1;
      if (out_sync) begin
        if (t_out0 < 0) t_out0 = cyc;
        pos = 0;
      end
      if (t_out0 >= 0 && f < NFR) begin
        k1 = 0;
        for (int b = 0; b < LOGNL; b++) k1 |= ((pos >> b) & 1) << (LOGNL - 1 - b);
        checks++;
        if (out_bin != k1[LOGNL-1:0]) failures++;
        for (int j = 0; j < LANES / 2; j++) begin
          k = k1 + j * NL;
          er = 0; ei = 0;
          for (int n = 0; n < N; n++) begin
            a = -2.0 * PI * k * n / N;
            er += x[f][n] * $cos(a);
            ei += x[f][n] * $sin(a);
          end
          er /= N; ei /= N;
          checks++;
          if ((er - dout[j].re) > 8.0 || (dout[j].re - er) > 8.0 ||
              (ei - dout[j].im) > 8.0 || (dout[j].im - ei) > 8.0) begin
            failures++;
            if (failures < 10)
              $display("FAIL frame %0d bin %0d got (%0d,%0d) exp (%f,%f)", f, k, dout[j].re, dout[j].im, er, ei);
          end
        end
        pos++;
        if (pos == NL) begin pos = 0; f++; end
      end
    end
  end

  initial begin
    int tone;
    for (int q = 0; q < LANES; q++) din[q] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int f = 0; f < NFR; f++) begin
      tone = 3 + 5 * f;
      for (int n = 0; n < N; n++)
        x[f][n] = int'(90000.0 * $cos(2.0 * PI * tone * n / N + 0.3 * f)) + int'($urandom_range(0, 8000)) - 4000;
    end
    for (int f = 0; f < NFR + 2; f++)
      for (int m = 0; m < NL; m++) begin
        in_sync <= (m == 0);
        for (int q = 0; q < LANES; q++) din[q] <= (f < NFR) ? sample_t'(x[f][LANES * m + q]) : '0;
        @(posedge clk);
        #1;
        if (f == 0 && m == 0) t_in0 = cyc;
      end
    checks++;
    if (t_out0 - (t_in0 - 1) != NL - 1 + LOGNL + 2) begin
      failures++;
      $display("FAIL latency %0d", t_out0 - (t_in0 - 1));
    end
    checks++;
    if (ovf) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
