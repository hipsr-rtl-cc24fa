// fft_sdf_stage: one radix-2 decimation-in-frequency stage of a single-path
// delay-feedback (SDF) pipeline FFT, for sub-transforms of length L.
//
// During the first L/2 samples of each length-L block the input is parked in
// a feedback RAM of L/2 words while the RAM's previous contents (the
// differences of the last block) leave the stage multiplied by the twiddle
// W_L^i = exp(-2 pi j i/L). During the second L/2 samples each input b meets
// its partner a from the RAM: a+b leaves the stage at once and a-b goes back
// into the RAM for the next half. With `shift` set both results are halved
// (arithmetic shift right) to prevent growth; results that still exceed the
// DW-bit range saturate and pulse `ovf`.
//
// Timing: one sample per clock; `in_sync` marks the first sample of a frame
// (a frame holds one or more blocks of L). Output is registered; `out_sync`
// marks the first output of the frame, L/2+1 cycles after `in_sync`, and is
// not repeated for the frame's later blocks. Twiddles are 18-bit with 16 fraction bits, filled at
// elaboration time. The SDF structure and the per-stage shift follow common
// radio-astronomy FFT practice; the source names only the FFT.
module fft_sdf_stage #(
  parameter int unsigned L = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_sync,
  input  hipsr_pkg::cplx_t din,
  input  logic             shift,
  output logic             out_sync,
  output hipsr_pkg::cplx_t dout,
  output logic             ovf
);
  import hipsr_pkg::*;

  localparam int unsigned D  = L / 2;
  localparam int unsigned CW = $clog2(L);
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1;

  logic signed [TW_W-1:0] tw_re [D];
  logic signed [TW_W-1:0] tw_im [D];

  initial begin
    real PI, a;
    PI = 3.14159265358979323846;
    for (int i = 0; i < int'(D); i++) begin
      a = 2.0 * PI * real'(i) / real'(L);
      tw_re[i] = TW_W'($rtoi($floor($cos(a) * real'(1 << TW_FRAC) + 0.5)));
      tw_im[i] = TW_W'($rtoi($floor(-$sin(a) * real'(1 << TW_FRAC) + 0.5)));
    end
  end

  cplx_t         fb [D];
  logic [CW-1:0] cnt, idx;
  logic [AW-1:0] addr;
  logic          upper;
  cplx_t         fo, fb_in, y;
  logic          y_ovf;
  logic          pend;     // a frame started; its first output is still to come

  assign idx   = in_sync ? '0 : cnt;
  assign upper = idx[CW-1];
  assign addr  = (D > 1) ? AW'(idx % CW'(D)) : '0;
  assign fo    = fb[addr];

  always_comb begin
    logic signed [47:0] s_re, s_im, d_re, d_im, m_re, m_im;
    logic o1, o2, o3, o4;
    s_re = 48'(fo.re) + 48'(din.re);
    s_im = 48'(fo.im) + 48'(din.im);
    d_re = 48'(fo.re) - 48'(din.re);
    d_im = 48'(fo.im) - 48'(din.im);
    if (shift) begin
      s_re = s_re >>> 1; s_im = s_im >>> 1;
      d_re = d_re >>> 1; d_im = d_im >>> 1;
    end
    m_re = (48'(fo.re) * 48'(tw_re[addr]) - 48'(fo.im) * 48'(tw_im[addr])
            + (48'sd1 <<< (TW_FRAC - 1))) >>> TW_FRAC;
    m_im = (48'(fo.re) * 48'(tw_im[addr]) + 48'(fo.im) * 48'(tw_re[addr])
            + (48'sd1 <<< (TW_FRAC - 1))) >>> TW_FRAC;
    if (upper) begin
      y.re     = sat_dw(s_re, o1);
      y.im     = sat_dw(s_im, o2);
      fb_in.re = sat_dw(d_re, o3);
      fb_in.im = sat_dw(d_im, o4);
    end else begin
      y.re     = sat_dw(m_re, o1);
      y.im     = sat_dw(m_im, o2);
      fb_in    = din;
      o3 = 1'b0;
      o4 = 1'b0;
    end
    y_ovf = o1 | o2 | o3 | o4;
  end

  always_ff @(posedge clk) fb[addr] <= fb_in;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt      <= '0;
      pend     <= 1'b0;
      out_sync <= 1'b0;
      dout     <= '0;
      ovf      <= 1'b0;
    end else begin
      cnt      <= idx + 1'b1;
      out_sync <= (pend | in_sync) && (32'(idx) == D);
      if (in_sync)                  pend <= 1'b1;
      else if (32'(idx) == D)       pend <= 1'b0;
      dout     <= y;
      ovf      <= y_ovf;
    end
  end

endmodule
