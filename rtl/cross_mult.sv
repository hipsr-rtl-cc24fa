// cross_mult: auto- and cross-correlation of the two polarisations.
//
// For every channel the full-Stokes spectrometer forms the auto products XX*
// and YY* (the power in each polarisation) and the cross product XY*, from
// which all four Stokes parameters follow. XY* is complex and is carried as
// its real and imaginary parts; YX* is its conjugate and is not formed.
//   XX*      = Xr^2 + Xi^2
//   YY*      = Yr^2 + Yi^2
//   Re(XY*)  = Xr*Yr + Xi*Yi
//   Im(XY*)  = Xi*Yr - Xr*Yi
// Products are exact (PW = 2*DW+1 bits). One channel per clock; outputs and
// `out_sync` follow the inputs by one registered cycle, and `out_bin` carries
// the channel index along.
module cross_mult #(
  parameter int unsigned BIN_W = $clog2(hipsr_pkg::FFT_N)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_sync,
  input  logic [BIN_W-1:0] in_bin,
  input  hipsr_pkg::cplx_t x,
  input  hipsr_pkg::cplx_t y,
  output logic             out_sync,
  output logic [BIN_W-1:0] out_bin,
  output hipsr_pkg::corr_t prod
);
  import hipsr_pkg::*;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_sync <= 1'b0;
      out_bin  <= '0;
      prod     <= '0;
    end else begin
      out_sync   <= in_sync;
      out_bin    <= in_bin;
      prod.xx    <= PW'(x.re) * PW'(x.re) + PW'(x.im) * PW'(x.im);
      prod.yy    <= PW'(y.re) * PW'(y.re) + PW'(y.im) * PW'(y.im);
      prod.xy_re <= PW'(x.re) * PW'(y.re) + PW'(x.im) * PW'(y.im);
      prod.xy_im <= PW'(x.im) * PW'(y.re) - PW'(x.re) * PW'(y.im);
    end
  end

endmodule
