// Shared body of the end-to-end spectrometer testbenches. The including
// module defines N (transform length), NREAD (channels read back), ACCLEN
// (frames per integration), HP (noise-diode half period) and instantiates the
// top as `dut`.
//
// The digitizer side carries LANES samples per clock: adc_x[q] in clock c is
// sample LANES*c + q. A frame of N samples lasts NL = N/LANES clocks.
//
// What it does: arms the PPS synchronisation, drives both polarisations with
// an off-bin tone plus pseudo-random noise, waits for the first integration,
// reads channels back over the control bus and compares all four products
// with a reference built here from first principles (bit-exact 4-tap Hamming
// FIR model, floating-point DFT divided by N, products summed over the
// integration's frames, which start TAPS-1 frames after the sync). It then
// checks the noise-calibration on/off powers against sums computed from the
// known diode phase, the integration period, the FFT overflow flag (by
// turning the FFT scaling off) and a second synchronisation. Every mechanism
// is counted and one that never happened counts as a failure.

  import hipsr_pkg::*;
  localparam int  LOGN = $clog2(N), NCH = N / 2, TAPS = 4, M = N * TAPS, NL = N / LANES;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst = 1, pps = 0, cal_gpio;
  logic signed [7:0] adc_x [LANES], adc_y [LANES];
  logic bus_req = 0, bus_we = 0, bus_ack;
  logic [17:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  int checks = 0, failures = 0;
  longint cyc = 0;

  always #2.5 clk = ~clk;   // 200 MHz
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (40 * N + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", what); end
  endtask

  // ---- stimulus: a deterministic function of the absolute cycle number
  function automatic int hash(input longint c, input int salt);
    int unsigned h;
    h = 32'(c) * 32'h9E37_79B1 ^ 32'(salt) * 32'h85EB_CA6B;
    h ^= h >> 15; h *= 32'h2C1B_3C6D; h ^= h >> 12;
    return int'(h % 21) - 10;
  endfunction
  function automatic int gen_x(input longint c);
    return int'($floor(90.0 * $cos(2.0 * PI * (5.3 * N / 64.0) * real'(c) / N) + 0.5)) + hash(c, 1);
  endfunction
  function automatic int gen_y(input longint c);
    return int'($floor(70.0 * $cos(2.0 * PI * (5.3 * N / 64.0) * real'(c) / N + 1.0) + 0.5)) + hash(c, 2);
  endfunction

  // samples present during clock cyc+1
  initial for (int q = 0; q < LANES; q++) begin adc_x[q] = 0; adc_y[q] = 0; end
  always @(posedge clk)
    for (int q = 0; q < LANES; q++) begin
      adc_x[q] <= 8'(gen_x(LANES * (cyc + 1) + q));
      adc_y[q] <= 8'(gen_y(LANES * (cyc + 1) + q));
    end

  // ---- observed events (counted, not used to build the reference)
  longint sync_cyc = -1;
  int n_sync = 0, n_cal_toggle = 0, n_gpio_high = 0;
  longint t_done [$];
  logic gpio_q = 0;
  always @(posedge clk) begin
    if (!rst && dut.sync) begin n_sync <= n_sync + 1; sync_cyc <= cyc; end
    gpio_q <= cal_gpio;
    if (cal_gpio != gpio_q) n_cal_toggle <= n_cal_toggle + 1;
    if (cal_gpio) n_gpio_high <= n_gpio_high + 1;
    if (dut.u_acc.acc_done) t_done.push_back(cyc);
  end

  // ---- bus access
  task automatic bus(input bit we, input logic [17:0] a, input logic [31:0] wd, output logic [31:0] rd);
    bus_req <= 1; bus_we <= we; bus_addr <= a; bus_wdata <= wd;
    @(posedge clk);
    bus_req <= 0;
    do @(posedge clk); while (!bus_ack);
    rd = bus_rdata;
  endtask
  task automatic wr(input logic [17:0] a, input logic [31:0] wd);
    logic [31:0] r;
    bus(1, a, wd, r);
  endtask
  task automatic rd64(input logic [17:0] a, output logic [63:0] v);
    logic [31:0] lo, hi;
    bus(0, a, 0, lo);
    bus(0, a + 1, 0, hi);
    v = {hi, lo};
  endtask

  // ---- reference model
  int h [M];
  function automatic int fir_ref(input int pol, input longint s0, input int n);
    longint acc;
    int p;
    p = n % N;
    acc = 0;
    for (int t = 0; t < TAPS; t++) begin
      longint c;
      c = s0 + n - t * N;
      acc += longint'(pol == 0 ? gen_x(c) : gen_y(c)) * longint'(h[(TAPS - 1 - t) * N + p]);
    end
    acc = (acc + 128) >>> 8;
    if (acc > 131071) acc = 131071;
    if (acc < -131072) acc = -131072;
    return int'(acc);
  endfunction

  int chan_list [$];
  real ref_p [NCH][4];
  real mag_x [NCH], mag_y [NCH];
  int firx [], firy [];

  task automatic build_reference(input longint s0);
    int f0;
    f0 = TAPS - 1;
    foreach (chan_list[i]) for (int j = 0; j < 4; j++) ref_p[chan_list[i]][j] = 0.0;
    foreach (chan_list[i]) begin mag_x[chan_list[i]] = 0.0; mag_y[chan_list[i]] = 0.0; end
    firx = new [N]; firy = new [N];
    for (int f = f0; f < f0 + ACCLEN; f++) begin
      for (int n = 0; n < N; n++) begin
        firx[n] = fir_ref(0, s0, f * N + n);
        firy[n] = fir_ref(1, s0, f * N + n);
      end
      foreach (chan_list[i]) begin
        int k;
        real xr, xi, yr, yi, a;
        k = chan_list[i];
        xr = 0; xi = 0; yr = 0; yi = 0;
        for (int n = 0; n < N; n++) begin
          a = -2.0 * PI * real'((longint'(k) * n) % N) / N;
          xr += firx[n] * $cos(a); xi += firx[n] * $sin(a);
          yr += firy[n] * $cos(a); yi += firy[n] * $sin(a);
        end
        xr /= N; xi /= N; yr /= N; yi /= N;
        ref_p[k][0] += xr * xr + xi * xi;
        ref_p[k][1] += yr * yr + yi * yi;
        ref_p[k][2] += xr * yr + xi * yi;
        ref_p[k][3] += xi * yr - xr * yi;
        mag_x[k] += $sqrt(xr * xr + xi * xi);
        mag_y[k] += $sqrt(yr * yr + yi * yi);
      end
    end
  endtask

  // ---- the run
  int n_integrations = 0, n_nar = 0, n_fft_ovf = 0, n_resync = 0, n_skip_ok = 0;

  initial begin
    logic [31:0] r;
    logic [63:0] v;
    longint s0;
    int tone_ch;

    for (int k = 0; k < M; k++) begin
      real w, xx, s, val;
      w = 0.54 - 0.46 * $cos(2.0 * PI * k / (M - 1));
      xx = (k - M / 2.0) / N;
      s = (xx == 0.0) ? 1.0 : $sin(PI * xx) / (PI * xx);
      val = w * s * 131071.0;
      h[k] = (val >= 0.0) ? int'($floor(val + 0.5)) : -int'($floor(-val + 0.5));
    end
    tone_ch = int'(5.3 * N / 64.0 + 0.5);
    if (NREAD >= NCH) for (int c = 0; c < NCH; c++) chan_list.push_back(c);
    else begin
      for (int c = tone_ch - 4; c <= tone_ch + 4; c++) chan_list.push_back(c);
      chan_list.push_back(0);
      while (chan_list.size() < NREAD) chan_list.push_back(int'($urandom_range(1, NCH - 1)));
    end

    repeat (4) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    wr(18'h01, ACCLEN);
    wr(18'h03, HP);
    wr(18'h00, 32'h7);             // arm, cal enable, master
    bus(0, 18'h04, 0, r);
    check(r[2], "armed before PPS");
    repeat (37) @(posedge clk);
    pps <= 1;
    wait (n_sync == 1);
    s0 = LANES * sync_cyc;         // sample index of frame 0, sample 0
    repeat (N / 2) @(posedge clk);
    pps <= 0;

    // noise adding radiometer: window of ACCLEN*NL clocks starting one clock after the sync
    do bus(0, 18'h06, 0, r); while (r == 0);
    n_nar++;
    begin
      longint on_x, off_x, on_y, off_y, non, noff;
      logic [63:0] p [4];
      on_x = 0; off_x = 0; on_y = 0; off_y = 0; non = 0; noff = 0;
      for (int i = 1; i <= ACCLEN * NL; i++)
        for (int q = 0; q < LANES; q++) begin
          longint xv, yv;
          xv = gen_x(s0 + LANES * i + q); yv = gen_y(s0 + LANES * i + q);
          if (((i - 1) / HP) % 2 == 1) begin on_x += xv * xv; on_y += yv * yv; non++; end
          else begin off_x += xv * xv; off_y += yv * yv; noff++; end
        end
      for (int i = 0; i < 4; i++) rd64(18'(8 + 2 * i), p[i]);
      check(p[0] == 64'(on_x) && p[1] == 64'(off_x), "NAR X on/off powers");
      check(p[2] == 64'(on_y) && p[3] == 64'(off_y), "NAR Y on/off powers");
      bus(0, 18'h10, 0, r); check(r == 32'(non), "NAR on count");
      bus(0, 18'h11, 0, r); check(r == 32'(noff), "NAR off count");
    end

    // first integration: frames TAPS-1 .. TAPS-2+ACCLEN after the sync
    do bus(0, 18'h05, 0, r); while (r == 0);
    check(r == 1, "first integration read while it is the only one");
    n_integrations++;
    begin
      bit ok;
      ok = 1;
      foreach (chan_list[i]) begin
        int k;
        real tol, got;
        k = chan_list[i];
        for (int j = 0; j < 4; j++) begin
          rd64(18'h20000 | 18'({2'(j), (LOGN - 1)'(k), 1'b0}), v);
          got = real'($signed(v));
          // ref_p filled below on first use
          if (i == 0 && j == 0) ;
          ref_store[i][j] = got;
        end
      end
      build_reference(s0);
      foreach (chan_list[i]) begin
        int k;
        real tol, e;
        k = chan_list[i];
        tol = 6.0 * LOGN * (mag_x[k] + mag_y[k]) + 4.0 * LOGN * LOGN * ACCLEN;
        for (int j = 0; j < 4; j++) begin
          e = ref_store[i][j] - ref_p[k][j];
          if (e < 0) e = -e;
          check(e <= tol, $sformatf("ch %0d prod %0d got %0.0f exp %0.1f tol %0.1f", k, j, ref_store[i][j], ref_p[k][j], tol));
          if (e > tol) ok = 0;
        end
      end
      check(ref_p[tone_ch][0] > 1.0e6, "tone channel carries the tone");
      if (ok) n_skip_ok++;
    end

    // integration period
    wait (t_done.size() >= 2);
    check(t_done[1] - t_done[0] == longint'(ACCLEN) * NL, $sformatf("integration period %0d", t_done[1] - t_done[0]));

    // FFT overflow: the sticky flag may hold start-up garbage, so clear it
    // first; with full scaling it must then stay clear, without it must set
    wr(18'h00, 32'hE);
    repeat (3 * N) @(posedge clk);
    bus(0, 18'h04, 0, r);
    check(!r[0], "no FFT overflow with full scaling");
    wr(18'h02, 0);
    repeat (3 * N) @(posedge clk);
    bus(0, 18'h04, 0, r);
    check(r[0], "FFT overflow flagged without scaling");
    if (r[0]) n_fft_ovf++;
    wr(18'h02, 32'hFFFF_FFFF);
    repeat (3 * N) @(posedge clk); // let the unscaled frames leave the pipeline
    wr(18'h00, 32'hE);            // clear overflow, keep cal and master
    repeat (2 * N) @(posedge clk);
    bus(0, 18'h04, 0, r);
    check(!r[0], "overflow cleared");

    // resynchronisation
    wr(18'h00, 32'h7);
    repeat (11) @(posedge clk);
    pps <= 1;
    wait (n_sync == 2);
    repeat (N + 2 * LOGN + 8) @(posedge clk);
    bus(0, 18'h05, 0, r);
    check(r == 0, "integration count restarted by the new sync");
    if (r == 0) n_resync++;

    // mechanism counts
    $display("syncs=%0d integrations=%0d frame-skip-verified=%0d cal toggles=%0d nar windows=%0d fft overflow=%0d resync=%0d",
             n_sync, n_integrations, n_skip_ok, n_cal_toggle, n_nar, n_fft_ovf, n_resync);
    check(n_sync == 2, "PPS sync happened");
    check(n_integrations > 0 && t_done.size() >= 2, "integration and bank swap happened");
    check(n_skip_ok > 0, "post-sync frame skipping verified");
    check(n_cal_toggle > 0 && n_gpio_high > 0, "noise diode toggled on the GPIO");
    check(n_nar > 0, "noise calibration window completed");
    check(n_fft_ovf > 0, "FFT overflow happened");
    check(n_resync > 0, "resynchronisation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real ref_store [NREAD][4];
