// hispec_top: one board of the HISPEC_400_8192 full-Stokes spectrometer.
//
// Each of the thirteen boards digitises the two polarisations of one beam of
// the 21-cm multibeam receiver at 800 Msample/s (8 bits) and turns them into
// 8192-channel spectra of the 400 MHz band, integrated for a few seconds:
//
//   adc_x ─ 4x pfb_fir ─ fft_wideband ─┐
//                                      ├─ 2x cross_mult ─ vector_acc ─┐
//   adc_y ─ 4x pfb_fir ─ fft_wideband ─┘                              ├─ ctrl_regs ─ bus
//   adc_x, adc_y ─────────────────────────────────── nar_power ───────┘
//   pps ─ sync_gen (sync, frame_sync) ─ noise_cal_ctrl ─ cal_gpio
//
// The polyphase filterbank (4-tap Hamming FIR plus 16384-point FFT per
// polarisation) channelises; cross_mult forms XX*, YY*, Re/Im XY*; the
// double-buffered vector accumulator integrates them; the noise-adding
// radiometer block measures on/off total power in step with the diode
// switching; and the PPS-armed sync restarts framing, integration and diode
// phase identically on every board. Software reaches everything through the
// ctrl_regs bus.
//
// Timing: the digitizer delivers 800 Msample/s to a 200 MHz fabric, so each
// clock carries LANES = 4 consecutive samples per polarisation (adc_x[q] is
// sample 4m+q). Each polarisation has four pfb_fir lanes and one
// fft_wideband, which emits two channels per clock, so one 8192-channel
// spectrum leaves every N_FFT/4 = 4096 clocks. A spectrum leaves the FFT
// N_FFT/4 + log2(N_FFT/4) + 2 cycles after its first samples entered the
// FIR (PIPE); the accumulator's restart is delayed by that amount so that it
// lines up with the first post-sync frame at the product output. `cal_gpio` drives
// the calibration control unit on the master board only.
module hispec_top #(
  parameter int unsigned N_FFT    = hipsr_pkg::FFT_N,
  parameter int unsigned TAPS     = hipsr_pkg::PFB_TAPS,
  parameter int unsigned ACC_LEN0 = 97656,
  parameter int unsigned CAL_HALF0 = hipsr_pkg::CAL_HALF
) (
  input  logic                             clk,
  input  logic                             rst,
  input  logic signed [hipsr_pkg::ADC_W-1:0] adc_x [hipsr_pkg::LANES],
  input  logic signed [hipsr_pkg::ADC_W-1:0] adc_y [hipsr_pkg::LANES],
  input  logic                             pps,
  output logic                             cal_gpio,
  input  logic                             bus_req,
  input  logic                             bus_we,
  input  logic [17:0]                      bus_addr,
  input  logic [31:0]                      bus_wdata,
  output logic                             bus_ack,
  output logic [31:0]                      bus_rdata
);
  import hipsr_pkg::*;

  localparam int unsigned LOGN  = $clog2(N_FFT);
  localparam int unsigned CHW   = $clog2(N_FFT / 2);
  localparam int unsigned NL    = N_FFT / LANES;   // clocks per frame
  localparam int unsigned LOGNL = $clog2(NL);
  localparam int unsigned NB    = LANES / 2;       // channels per clock
  localparam int unsigned PIPE  = NL + LOGNL + 2;  // sync to first product frame, less one

  // configuration and status
  logic            arm, cal_en, master, armed;
  logic [31:0]     acc_len, cal_half, acc_cnt, nar_cnt, n_on, n_off;
  logic [LOGN-1:0] fft_shift;
  logic            sync, frame_sync, cal_on, cal_toggle;

  sync_gen #(.FRAME_LEN(NL)) u_sync (
    .clk, .rst, .arm, .pps, .sync, .frame_sync, .armed
  );

  noise_cal_ctrl u_cal (
    .clk, .rst, .sync, .enable(cal_en), .master, .half_period(cal_half),
    .cal_on, .toggle(cal_toggle), .cal_gpio
  );

  // polyphase filterbank: LANES FIR lanes per polarisation
  sample_t          fir_x [LANES], fir_y [LANES];
  logic [LANES-1:0] fir_sync_x, fir_sync_y, fir_ovf_x, fir_ovf_y;

  for (genvar q = 0; q < int'(LANES); q++) begin : g_fir
    pfb_fir #(.N(N_FFT), .LANES(LANES), .LANE(q), .TAPS(TAPS)) u_fir_x (
      .clk, .rst, .in_sync(frame_sync), .din(adc_x[q]),
      .out_sync(fir_sync_x[q]), .dout(fir_x[q]), .ovf(fir_ovf_x[q])
    );
    pfb_fir #(.N(N_FFT), .LANES(LANES), .LANE(q), .TAPS(TAPS)) u_fir_y (
      .clk, .rst, .in_sync(frame_sync), .din(adc_y[q]),
      .out_sync(fir_sync_y[q]), .dout(fir_y[q]), .ovf(fir_ovf_y[q])
    );
  end

  cplx_t            fx [NB], fy [NB];
  logic             fsync_x, fsync_y, fovf_x, fovf_y;
  logic [LOGNL-1:0] fbin_x, fbin_y;

  fft_wideband #(.N(N_FFT), .LANES(LANES)) u_fft_x (
    .clk, .rst, .in_sync(fir_sync_x[0]), .din(fir_x), .shift(fft_shift),
    .out_sync(fsync_x), .dout(fx), .out_bin(fbin_x), .ovf(fovf_x)
  );
  fft_wideband #(.N(N_FFT), .LANES(LANES)) u_fft_y (
    .clk, .rst, .in_sync(fir_sync_y[0]), .din(fir_y), .shift(fft_shift),
    .out_sync(fsync_y), .dout(fy), .out_bin(fbin_y), .ovf(fovf_y)
  );

  // correlation and integration, NB channels per clock
  corr_t            prod  [NB];
  logic             psync [NB];
  logic [LOGNL-1:0] pbin  [NB];

  for (genvar j = 0; j < int'(NB); j++) begin : g_xmult
    cross_mult #(.BIN_W(LOGNL)) u_xmult (
      .clk, .rst, .in_sync(fsync_x), .in_bin(fbin_x), .x(fx[j]), .y(fy[j]),
      .out_sync(psync[j]), .out_bin(pbin[j]), .prod(prod[j])
    );
  end

  // restart of the accumulator, delayed to meet the first post-sync frame
  logic [31:0] rs_cnt;
  logic        rs_busy, acc_restart;
  always_ff @(posedge clk) begin
    if (rst) begin
      rs_busy     <= 1'b0;
      rs_cnt      <= '0;
      acc_restart <= 1'b0;
    end else begin
      acc_restart <= 1'b0;
      if (sync) begin
        rs_busy <= 1'b1;
        rs_cnt  <= 32'(PIPE - 1);
      end else if (rs_busy) begin
        if (rs_cnt == 0) begin
          rs_busy     <= 1'b0;
          acc_restart <= 1'b1;
        end else begin
          rs_cnt <= rs_cnt - 1;
        end
      end
    end
  end

  logic [CHW+1:0]   acc_rd_addr;
  logic [ACC_W-1:0] acc_rd_data;
  logic             acc_done;

  vector_acc #(.N_FFT(N_FFT), .LANES(LANES), .SKIP(TAPS - 1)) u_acc (
    .clk, .rst, .restart(acc_restart), .acc_len, .in_sync(psync[0]), .in_bin(pbin[0]),
    .din(prod), .rd_addr(acc_rd_addr), .rd_data(acc_rd_data), .acc_done, .acc_cnt
  );

  // noise adding radiometer
  logic [ACC_W-1:0] nar_p [4];
  logic             nar_done;

  nar_power #(.LANES(LANES)) u_nar (
    .clk, .rst, .restart(sync), .win_len(acc_len << LOGNL), .cal_on,
    .x(adc_x), .y(adc_y),
    .p_on_x(nar_p[0]), .p_off_x(nar_p[1]), .p_on_y(nar_p[2]), .p_off_y(nar_p[3]),
    .n_on, .n_off, .done(nar_done), .nar_cnt
  );

  ctrl_regs #(.CHW(CHW), .SHIFT_W(LOGN), .ACC_LEN_RST(ACC_LEN0), .CAL_HALF_RST(CAL_HALF0)) u_regs (
    .clk, .rst, .bus_req, .bus_we, .bus_addr, .bus_wdata, .bus_ack, .bus_rdata,
    .arm, .cal_en, .master, .acc_len, .fft_shift, .cal_half,
    .fft_ovf(fovf_x | fovf_y), .fir_ovf(|{fir_ovf_x, fir_ovf_y}), .armed, .cal_on,
    .acc_cnt, .nar_cnt, .nar_p, .nar_n_on(n_on), .nar_n_off(n_off),
    .acc_rd_addr, .acc_rd_data
  );

endmodule
