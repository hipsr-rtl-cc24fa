// tb_fft_r2sdf: checks the streaming FFT against a direct DFT.
// Frames of a complex tone plus random noise are streamed back to back with
// every stage halving, so the expected output is DFT/N. Each output bin is
// compared (within a rounding tolerance) against the DFT computed here, the
// bin order against out_bin, and the in-to-out latency against N-1+log2(N).
module tb_fft_r2sdf;
  import hipsr_pkg::*;
  localparam int N = 64, LOGN = 6, NFR = 6;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst = 1, in_sync = 0;
  cplx_t din = '0, dout;
  logic [LOGN-1:0] shift = '1, out_bin;
  logic out_sync, ovf;
  int checks = 0, failures = 0;

  fft_r2sdf #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xr [NFR][N], xi [NFR][N];
  int cyc = 0, t_in0 = -1, t_out0 = -1;
  always @(posedge clk) cyc <= cyc + 1;

  // output checker
  initial begin
    int f, pos, k, maxerr;
    real er, ei, a;
    f = 0; pos = 0; maxerr = 0;
    wait (!rst);
    forever begin
      @(posedge clk); #1;
      if (out_sync) begin
        if (t_out0 < 0) t_out0 = cyc;
        pos = 0;
      end
      if (t_out0 >= 0 && f < NFR) begin
        k = 0;
        for (int b = 0; b < LOGN; b++) k |= ((pos >> b) & 1) << (LOGN - 1 - b);
        checks++;
        if (out_bin != k[LOGN-1:0]) failures++;
        er = 0; ei = 0;
        for (int n = 0; n < N; n++) begin
          a = -2.0 * PI * k * n / N;
          er += xr[f][n] * $cos(a) - xi[f][n] * $sin(a);
          ei += xr[f][n] * $sin(a) + xi[f][n] * $cos(a);
        end
        er /= N; ei /= N;
        checks++;
        if ((er - dout.re) > 8.0 || (dout.re - er) > 8.0 || (ei - dout.im) > 8.0 || (dout.im - ei) > 8.0) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d bin %0d got (%0d,%0d) exp (%f,%f)", f, k, dout.re, dout.im, er, ei);
        end
        pos++;
        if (pos == N) begin pos = 0; f++; end
      end
    end
  end

  initial begin
    int tone;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int f = 0; f < NFR; f++) begin
      tone = 3 + 7 * f;
      for (int n = 0; n < N; n++) begin
        xr[f][n] = int'(60000.0 * $cos(2.0 * PI * tone * n / N)) + int'($urandom_range(0, 8000)) - 4000;
        xi[f][n] = int'(60000.0 * $sin(2.0 * PI * tone * n / N)) + int'($urandom_range(0, 8000)) - 4000;
      end
    end
    for (int f = 0; f < NFR + 2; f++)
      for (int n = 0; n < N; n++) begin
        in_sync <= (n == 0);
        din.re  <= (f < NFR) ? sample_t'(xr[f][n]) : '0;
        din.im  <= (f < NFR) ? sample_t'(xi[f][n]) : '0;
        @(posedge clk);
        #1;
        if (f == 0 && n == 0) t_in0 = cyc;
      end
    checks++;
    // t_in0 is the cycle after the one in which in_sync was on the input
    if (t_out0 - (t_in0 - 1) != N - 1 + LOGN) begin
      failures++;
      $display("FAIL latency %0d", t_out0 - t_in0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
