// hipsr_pkg: shared constants and types of the HISPEC spectrometer datapath.
//
// The numbers that come from the design description are the spectrometer
// geometry (8192 output channels from 800 Msample/s real sampling, hence a
// 16384-point transform), the 4-tap polyphase filter, the 8-bit digitizer, the
// 200 MHz fabric clock (one clock cycle = 5 ns), hence four samples per clock,
// and the 128 Hz noise-diode switching rate. Word widths inside the datapath (18-bit samples and
// coefficients, 64-bit accumulators) are this design's own choice, sized for
// the 18x25 hardware multipliers of the FPGA family the spectrometer ran on.
package hipsr_pkg;

  // Spectrometer geometry (HISPEC_400_8192)
  localparam int unsigned N_CHAN   = 8192;          // output channels
  localparam int unsigned FFT_N    = 2 * N_CHAN;    // real-input transform length
  localparam int unsigned PFB_TAPS = 4;             // polyphase filter taps

  // Digitizer and fabric clock
  localparam int unsigned ADC_W    = 8;             // iADC sample width
  localparam int unsigned SAMPLE_HZ = 800_000_000;  // Nyquist sampling of 400 MHz
  localparam int unsigned CLK_HZ   = 200_000_000;   // 5 ns fabric clock
  localparam int unsigned CAL_HZ   = 128;           // noise diode switching rate
  localparam int unsigned CAL_HALF = CLK_HZ / (2 * CAL_HZ); // cycles per on or off half
  localparam int unsigned LANES    = SAMPLE_HZ / CLK_HZ;    // samples per clock (4)

  // Datapath widths (design choice)
  localparam int unsigned DW       = 18;            // complex component width
  localparam int unsigned COEF_W   = 18;            // PFB coefficient width
  localparam int unsigned TW_W     = 18;            // FFT twiddle width
  localparam int unsigned TW_FRAC  = 16;            // twiddle fraction bits (1.0 = 65536)
  localparam int unsigned PW       = 2 * DW + 1;    // correlation product width
  localparam int unsigned ACC_W    = 64;            // accumulator width

  typedef logic signed [DW-1:0] sample_t;

  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  // Correlation products of one channel: XX*, YY*, Re(XY*), Im(XY*).
  // YX* is the conjugate of XY* and needs no hardware of its own.
  typedef struct packed {
    logic signed [PW-1:0] xx;
    logic signed [PW-1:0] yy;
    logic signed [PW-1:0] xy_re;
    logic signed [PW-1:0] xy_im;
  } corr_t;

  typedef enum logic [1:0] {
    PROD_XX    = 2'd0,
    PROD_YY    = 2'd1,
    PROD_XY_RE = 2'd2,
    PROD_XY_IM = 2'd3
  } prod_e;

  // Saturate a wide signed value to DW bits.
  function automatic sample_t sat_dw(input logic signed [47:0] v, output logic ovf);
    localparam logic signed [47:0] MAXV = (48'sd1 <<< (DW - 1)) - 48'sd1;
    localparam logic signed [47:0] MINV = -(48'sd1 <<< (DW - 1));
    if (v > MAXV) begin
      ovf = 1'b1;
      return MAXV[DW-1:0];
    end else if (v < MINV) begin
      ovf = 1'b1;
      return MINV[DW-1:0];
    end
    ovf = 1'b0;
    return v[DW-1:0];
  endfunction

endpackage
