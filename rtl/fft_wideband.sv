// fft_wideband: N-point FFT of a real signal arriving LANES samples per clock.
//
// The digitizer delivers 800 Msample/s to a 200 MHz fabric, so each clock
// carries four consecutive samples. This block splits the N-point transform
// Cooley-Tukey style into N/LANES-point transforms along each lane and a
// LANES-point transform across the lanes. With n = LANES*m + q (lane q) and
// k = k1 + (N/LANES)*k2:
//   Z_q[k1] = sum_m x[LANES*m + q] * W_{N/LANES}^(m*k1)   (lane FFT, fft_r2sdf)
//   X[k]    = sum_q ( Z_q[k1] * W_N^(q*k1) ) * W_LANES^(q*k2)
// Each clock, once the lane FFTs emit bin k1 (bit-reversed order, as
// `out_bin`), the block multiplies lane q by the twiddle W_N^(q*k1) and forms
// the LANES-point sums. Because the input is real only bins k < N/2 are
// needed, i.e. k2 < LANES/2: `dout[j]` is bin `out_bin` + j*N/LANES. For
// N = 16384 and LANES = 4 that is channels k1 and k1+4096, two per clock,
// covering all 8192 channels in one 4096-clock frame.
//
// Scaling: `shift` bits [log2(N/LANES)-1:0] drive the lane FFT stages; the
// remaining log2(LANES) bits each halve the cross-lane sum (with all bits set
// the output is DFT/N). Saturation anywhere raises `ovf` for that cycle.
//
// Timing: `in_sync` marks the clock holding samples 0..LANES-1 of a frame;
// `out_sync` marks the first output clock, N/LANES - 1 + log2(N/LANES) + 2
// cycles later (lane FFT, then one register each for the twiddle and the
// sum). This lane-parallel structure is this design's choice for meeting the
// sample rate; the source names only the PFB and its size. LANES >= 2.
module fft_wideband #(
  parameter int unsigned N     = hipsr_pkg::FFT_N,
  parameter int unsigned LANES = hipsr_pkg::LANES
) (
  input  logic                              clk,
  input  logic                              rst,
  input  logic                              in_sync,
  input  hipsr_pkg::sample_t                din   [LANES],
  input  logic [$clog2(N)-1:0]              shift,
  output logic                              out_sync,
  output hipsr_pkg::cplx_t                  dout  [LANES/2],
  output logic [$clog2(N/LANES)-1:0]        out_bin,
  output logic                              ovf
);
  import hipsr_pkg::*;

  localparam int unsigned NL    = N / LANES;
  localparam int unsigned LOGNL = $clog2(NL);
  localparam int unsigned LOGP  = $clog2(LANES);
  localparam int unsigned NOUT  = LANES / 2;

  // twiddles W_N^(q*k1) for every lane, and W_LANES^(q*k2) for the sums
  logic signed [TW_W-1:0] tw_re [LANES][NL];
  logic signed [TW_W-1:0] tw_im [LANES][NL];
  logic signed [TW_W-1:0] cw_re [LANES][NOUT];
  logic signed [TW_W-1:0] cw_im [LANES][NOUT];

  initial begin
    real PI, a;
    PI = 3.14159265358979323846;
    for (int q = 0; q < int'(LANES); q++) begin
      for (int k = 0; k < int'(NL); k++) begin
        a = 2.0 * PI * real'(q * k) / real'(N);
        tw_re[q][k] = TW_W'($rtoi($floor($cos(a) * real'(1 << TW_FRAC) + 0.5)));
        tw_im[q][k] = TW_W'($rtoi($floor(-$sin(a) * real'(1 << TW_FRAC) + 0.5)));
      end
      for (int j = 0; j < int'(NOUT); j++) begin
        a = 2.0 * PI * real'(q * j) / real'(LANES);
        cw_re[q][j] = TW_W'($rtoi($floor($cos(a) * real'(1 << TW_FRAC) + 0.5)));
        cw_im[q][j] = TW_W'($rtoi($floor(-$sin(a) * real'(1 << TW_FRAC) + 0.5)));
      end
    end
  end

  // lane FFTs
  cplx_t            z      [LANES];
  logic             zsync  [LANES];
  logic [LOGNL-1:0] zbin   [LANES];
  logic [LANES-1:0] zovf;

  for (genvar q = 0; q < int'(LANES); q++) begin : g_lane
    fft_r2sdf #(.N(NL)) u_fft (
      .clk, .rst, .in_sync, .din('{re: din[q], im: '0}), .shift(shift[LOGNL-1:0]),
      .out_sync(zsync[q]), .dout(z[q]), .out_bin(zbin[q]), .ovf(zovf[q])
    );
  end

  // stage 1: twiddle each lane
  cplx_t            t1      [LANES];
  logic             t1_sync, t1_ovf;
  logic [LOGNL-1:0] t1_bin;

  always_ff @(posedge clk) begin
    logic o1, o2, ov;
    ov = 1'b0;
    for (int q = 0; q < int'(LANES); q++) begin
      logic signed [47:0] m_re, m_im;
      m_re = (48'(z[q].re) * 48'(tw_re[q][zbin[0]]) - 48'(z[q].im) * 48'(tw_im[q][zbin[0]])
              + (48'sd1 <<< (TW_FRAC - 1))) >>> TW_FRAC;
      m_im = (48'(z[q].re) * 48'(tw_im[q][zbin[0]]) + 48'(z[q].im) * 48'(tw_re[q][zbin[0]])
              + (48'sd1 <<< (TW_FRAC - 1))) >>> TW_FRAC;
      t1[q].re <= sat_dw(m_re, o1);
      t1[q].im <= sat_dw(m_im, o2);
      ov |= o1 | o2;
    end
    if (rst) begin
      t1_sync <= 1'b0;
      t1_ovf  <= 1'b0;
      t1_bin  <= '0;
    end else begin
      t1_sync <= zsync[0];
      t1_ovf  <= ov | (|zovf);
      t1_bin  <= zbin[0];
    end
  end

  // stage 2: LANES-point sums for the kept outputs
  int unsigned nshift;
  always_comb begin
    nshift = 0;
    for (int b = int'(LOGNL); b < int'(LOGNL + LOGP); b++) nshift += 32'(shift[b]);
  end

  always_ff @(posedge clk) begin
    logic o1, o2, ov;
    ov = 1'b0;
    for (int j = 0; j < int'(NOUT); j++) begin
      logic signed [47:0] s_re, s_im;
      s_re = '0;
      s_im = '0;
      for (int q = 0; q < int'(LANES); q++) begin
        s_re += 48'(t1[q].re) * 48'(cw_re[q][j]) - 48'(t1[q].im) * 48'(cw_im[q][j]);
        s_im += 48'(t1[q].re) * 48'(cw_im[q][j]) + 48'(t1[q].im) * 48'(cw_re[q][j]);
      end
      s_re = s_re >>> (TW_FRAC + nshift);
      s_im = s_im >>> (TW_FRAC + nshift);
      dout[j].re <= sat_dw(s_re, o1);
      dout[j].im <= sat_dw(s_im, o2);
      ov |= o1 | o2;
    end
    if (rst) begin
      out_sync <= 1'b0;
      out_bin  <= '0;
      ovf      <= 1'b0;
    end else begin
      out_sync <= t1_sync;
      out_bin  <= t1_bin;
      ovf      <= ov | t1_ovf;
    end
  end

endmodule
