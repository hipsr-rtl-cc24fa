// fft_r2sdf: streaming N-point complex FFT, radix-2 single-path delay feedback.
//
// Samples go in one per clock and the N-point spectrum comes out one bin per
// clock. In the spectrometer four of these, of N/4 = 4096 points, form the
// lane transforms of fft_wideband, which takes the 4 samples per clock of
// the 800 Msample/s stream; each lane FFT gets one FIR lane's real output on
// its real input.
//
// Structure: log2(N) fft_sdf_stage instances of lengths N, N/2, ..., 2. Bit s
// of `shift` halves the results of stage s (stage 0 is the longest); with
// all bits set the output is the DFT divided by N. `ovf` is high in any cycle
// in which some stage saturated.
//
// Timing and order: `out_sync` marks the first bin of a frame and follows
// `in_sync` by N-1+log2(N) cycles. Bins leave in bit-reversed order: the
// output at position p of the frame is bin bitrev(p), which `out_bin` gives.
// Keeping the bit-reversed order (and undoing it in the accumulator's
// addressing) rather than adding a reorder buffer is this design's choice.
module fft_r2sdf #(
  parameter int unsigned N = hipsr_pkg::FFT_N
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_sync,
  input  hipsr_pkg::cplx_t       din,
  input  logic [$clog2(N)-1:0]   shift,
  output logic                   out_sync,
  output hipsr_pkg::cplx_t       dout,
  output logic [$clog2(N)-1:0]   out_bin,
  output logic                   ovf
);
  import hipsr_pkg::*;

  localparam int unsigned LOGN = $clog2(N);

  cplx_t           d    [LOGN+1];
  logic            s    [LOGN+1];
  logic [LOGN-1:0] sovf;

  assign d[0] = din;
  assign s[0] = in_sync;

  for (genvar g = 0; g < int'(LOGN); g++) begin : g_stage
    fft_sdf_stage #(.L(N >> g)) u_stage (
      .clk      (clk),
      .rst      (rst),
      .in_sync  (s[g]),
      .din      (d[g]),
      .shift    (shift[g]),
      .out_sync (s[g+1]),
      .dout     (d[g+1]),
      .ovf      (sovf[g])
    );
  end

  logic [LOGN-1:0] pos, p;
  assign p = s[LOGN] ? '0 : pos;

  always_ff @(posedge clk) begin
    if (rst) pos <= '0;
    else     pos <= p + 1'b1;
  end

  always_comb
    for (int i = 0; i < int'(LOGN); i++) out_bin[i] = p[LOGN-1-i];

  assign out_sync = s[LOGN];
  assign dout     = d[LOGN];
  assign ovf      = |sovf;

endmodule
