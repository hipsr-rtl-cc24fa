// tb_pfb_fir: checks the 4-tap polyphase FIR against a reference model.
// The reference recomputes the Hamming-windowed sinc prototype and the
// weighted sum of TAPS frames for every output sample, and expects each
// result exactly one cycle after its input. Random 8-bit samples.
// An alternating full-scale burst is included. A second set of LANES = 4
// lane instances (LANE = 0..3) takes a stream four samples per clock and is
// checked against the same reference, sample 4c+q on lane q in clock c.
module tb_pfb_fir;
  import hipsr_pkg::*;
  localparam int N = 16, TAPS = 4, M = N * TAPS, SHIFT = 8;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst = 1, in_sync = 0;
  logic signed [7:0] din = 0;
  logic out_sync, ovf;
  sample_t dout;
  int checks = 0, failures = 0, novf = 0;

  pfb_fir #(.N(N), .LANES(1), .TAPS(TAPS)) dut (.*);

  localparam int LANES = 4, NCLK = 30 * N / LANES;
  logic lsync = 0;
  logic signed [7:0] ldin [LANES];
  sample_t ldout [LANES];
  logic [LANES-1:0] lsync_o, lovf;
  int lx [NCLK * LANES];
  bit ldone = 0;

  for (genvar q = 0; q < LANES; q++) begin : g_lane
    pfb_fir #(.N(N), .LANES(LANES), .LANE(q), .TAPS(TAPS)) u_lane (
      .clk, .rst, .in_sync(lsync), .din(ldin[q]), .out_sync(lsync_o[q]), .dout(ldout[q]), .ovf(lovf[q])
    );
  end

  function automatic int fir_ref(input int i);
    longint acc;
    acc = 0;
    for (int t = 0; t < TAPS; t++)
      acc += longint'(lx[i - t * N]) * longint'(h[(TAPS - 1 - t) * N + i % N]);
    acc = (acc + (1 <<< (SHIFT - 1))) >>> SHIFT;
    if (acc > 131071) acc = 131071;
    if (acc < -131072) acc = -131072;
    return int'(acc);
  endfunction

  initial begin
    foreach (lx[i]) lx[i] = int'($signed(8'($urandom)));
    for (int q = 0; q < LANES; q++) ldin[q] = 0;
    wait (!rst);
    @(posedge clk);
    for (int c = 0; c < NCLK; c++) begin
      lsync <= ((c % (N / LANES)) == 0);
      for (int q = 0; q < LANES; q++) ldin[q] <= 8'(lx[LANES * c + q]);
      @(posedge clk); #1;
      if (LANES * c >= M)
        for (int q = 0; q < LANES; q++) begin
          checks++;
          if (ldout[q] != sample_t'(fir_ref(LANES * c + q))) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d clock %0d got %0d exp %0d", q, c, ldout[q], fir_ref(LANES * c + q));
          end
          checks++;
          if (lsync_o[q] != ((c % (N / LANES)) == 0)) failures++;
        end
    end
    ldone = 1;
  end
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int h [M];
  initial begin
    for (int k = 0; k < M; k++) begin
      real w, x, s, v;
      w = 0.54 - 0.46 * $cos(2.0 * PI * k / (M - 1));
      x = (k - M / 2.0) / N;
      s = (x == 0.0) ? 1.0 : $sin(PI * x) / (PI * x);
      v = w * s * 131071.0;
      h[k] = (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
    end
  end

  int hist [$];   // every input sample, oldest first
  initial begin
    int n, exp_v, p;
    longint acc;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    n = 0;
    for (int i = 0; i < 40 * N; i++) begin
      p = i % N;
      in_sync <= (p == 0);
      if (i >= 20 * N && i < 22 * N) din <= (p[0]) ? 8'sd127 : -8'sd128;
      else din <= 8'($urandom);
      @(posedge clk);
      hist.push_back(int'(din));
      #1;
      if (i >= M) begin
        // output now belongs to sample i
        acc = 0;
        for (int t = 0; t < TAPS; t++)
          acc += longint'(hist[i - t * N]) * longint'(h[(TAPS - 1 - t) * N + p]);
        acc = (acc + (1 <<< (SHIFT - 1))) >>> SHIFT;
        if (acc > 131071) acc = 131071;
        if (acc < -131072) acc = -131072;
        checks++;
        if (dout != sample_t'(acc)) begin
          failures++;
          if (failures < 10) $display("FAIL i=%0d got %0d exp %0d", i, dout, acc);
        end
        checks++;
        if (out_sync != (p == 0)) failures++;
        if (ovf) novf++;
      end
    end
    wait (ldone);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
