// pfb_fir: polyphase FIR front end of the polyphase filterbank (PFB).
//
// A PFB spectrometer weights TAPS consecutive frames of N samples with a long
// windowed-sinc prototype filter and sums them before the FFT; this gives the
// flat channel response and ~50 dB isolation between neighbouring channels
// that the spectral-line modes rely on. The source fixes TAPS = 4 and a
// Hamming window, and N = 16384 samples per frame for the 8192-channel mode.
//
// Prototype filter (this design's formulation of the Hamming-windowed sinc):
//   M = TAPS*N,  k = 0..M-1
//   h[k] = round( (0.54 - 0.46 cos(2 pi k/(M-1))) * sinc((k - M/2)/N) * (2^(COEF_W-1)-1) )
// Output for input phase p (position of the sample in its frame):
//   y[n] = sat( (sum_{t=0}^{TAPS-1} h[(TAPS-1-t)*N + p] * x[n - t*N] + 2^(SHIFT-1)) >>> SHIFT )
// so the newest frame meets the last section of the prototype.
//
// Structure: TAPS-1 delay lines of N samples, one per earlier frame, each a
// RAM addressed by the phase, so x[n-t*N] is read back at the same address
// it was written. The coefficient ROMs are filled at elaboration time from
// the formula above.
//
// Lanes: the fabric clock is a quarter of the sample rate, so the top runs
// LANES = 4 instances side by side. Instance LANE sees samples
// n = LANES*m + LANE, i.e. phase p = LANES*m' + LANE of the frame, keeps
// N/LANES-deep delay lines, and its ROM holds only the coefficients of its
// own phases. LANES = 1 gives a plain one-sample-per-clock filter.
//
// Interface and timing: one sample per clock per instance. `in_sync` marks
// the clock holding phase 0 of the frame (phase LANE for this lane). Output
// (and `out_sync`) follow the input by one cycle. `ovf` pulses when the output
// saturates. The first TAPS-1 frames after a resynchronisation mix old and new
// phases and are discarded downstream.
module pfb_fir #(
  parameter int unsigned N      = hipsr_pkg::FFT_N,
  parameter int unsigned LANES  = hipsr_pkg::LANES,
  parameter int unsigned LANE   = 0,
  parameter int unsigned TAPS   = hipsr_pkg::PFB_TAPS,
  parameter int unsigned IN_W   = hipsr_pkg::ADC_W,
  parameter int unsigned COEF_W = hipsr_pkg::COEF_W,
  parameter int unsigned SHIFT  = 8
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          in_sync,
  input  logic signed [IN_W-1:0]        din,
  output logic                          out_sync,
  output hipsr_pkg::sample_t            dout,
  output logic                          ovf
);
  import hipsr_pkg::*;

  localparam int unsigned NL    = N / LANES;      // phases handled by this lane
  localparam int unsigned AW    = (NL > 1) ? $clog2(NL) : 1;
  localparam int unsigned M     = TAPS * N;
  localparam int unsigned SUM_W = IN_W + COEF_W + $clog2(TAPS) + 1;

  function automatic logic signed [COEF_W-1:0] coef(input int unsigned k);
    real PI, w, xs, s;
    PI = 3.14159265358979323846;
    w  = 0.54 - 0.46 * $cos(2.0 * PI * real'(k) / real'(M - 1));
    xs = (real'(k) - real'(M) / 2.0) / real'(N);
    s  = (xs == 0.0) ? 1.0 : $sin(PI * xs) / (PI * xs);
    return COEF_W'($rtoi(w * s * real'((1 << (COEF_W - 1)) - 1) + ((w * s >= 0.0) ? 0.5 : -0.5)));
  endfunction

  logic signed [COEF_W-1:0] coef_rom [TAPS][NL];
  logic signed [IN_W-1:0]   dline    [TAPS-1][NL];

  initial begin
    for (int t = 0; t < int'(TAPS); t++)
      for (int p = 0; p < int'(NL); p++)
        coef_rom[t][p] = coef(32'((int'(TAPS) - 1 - t) * int'(N) + int'(LANES) * p + int'(LANE)));
  end

  logic [AW-1:0]           cnt, ph;
  logic signed [IN_W-1:0]  tap [TAPS];
  logic signed [SUM_W-1:0] acc;
  logic signed [47:0]      rounded;
  sample_t                 y;
  logic                    y_ovf;

  assign ph = in_sync ? '0 : cnt;

  always_comb begin
    tap[0] = din;
    for (int t = 1; t < int'(TAPS); t++) tap[t] = dline[t-1][ph];
    acc = '0;
    for (int t = 0; t < int'(TAPS); t++)
      acc += SUM_W'(tap[t]) * SUM_W'(coef_rom[t][ph]);
    rounded = (48'(acc) + (48'sd1 <<< (SHIFT - 1))) >>> SHIFT;
    y = sat_dw(rounded, y_ovf);
  end

  always_ff @(posedge clk) begin
    for (int t = 0; t < int'(TAPS) - 1; t++) dline[t][ph] <= tap[t];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt      <= '0;
      out_sync <= 1'b0;
      dout     <= '0;
      ovf      <= 1'b0;
    end else begin
      cnt      <= (32'(ph) == NL - 1) ? '0 : ph + 1'b1;
      out_sync <= in_sync;
      dout     <= y;
      ovf      <= y_ovf;
    end
  end

endmodule
