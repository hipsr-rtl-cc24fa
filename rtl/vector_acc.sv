// vector_acc: double-buffered vector accumulator for the four correlation
// products of every channel.
//
// Spectra are integrated for `acc_len` FFT frames (2-5 s in the spectral-line
// modes, about 97,700-244,000 frames of 16384 samples at 800 Msample/s) before
// software reads them. Two banks are kept: one accumulates while the other
// holds the last finished integration for readout, and the banks swap at the
// end of each integration, so software has a whole integration time to read.
//
// Input: NB = LANES/2 channels per clock from the wideband FFT. `in_sync`
// marks the first clock of a frame, `in_bin` is k1 (in the FFT's bit-reversed
// order) and input j carries channel j*(NCH/NB) + k1, NCH = N_FFT/2. Each
// input j has its own memory bank of NCH/NB words per product, so all NB
// channels are written in the same clock at their own channel address and the
// readout is in natural channel order. A frame lasts NCH/NB clocks. The first
// spectrum of an integration overwrites the bank, later ones add.
//
// `restart` (the common sync, delayed by the top to meet the first post-sync
// frame) abandons the running integration, clears the counters and drops the
// next SKIP frames, which still hold samples from before the
// resynchronisation (the PFB needs TAPS-1 frames to refill). `acc_done`
// pulses when a bank is handed over; `acc_cnt` counts handovers.
// Readout: `rd_addr` = {product, channel}; `rd_data` is the sign-extended
// ACC_W-bit sum one cycle later. The double buffering and the frame skipping
// are this design's choices; the source gives the integration lengths.
module vector_acc #(
  parameter int unsigned N_FFT = hipsr_pkg::FFT_N,
  parameter int unsigned LANES = hipsr_pkg::LANES,
  parameter int unsigned SKIP  = hipsr_pkg::PFB_TAPS - 1
) (
  input  logic                                   clk,
  input  logic                                   rst,
  input  logic                                   restart,
  input  logic [31:0]                            acc_len,   // frames per integration, >= 1
  input  logic                                   in_sync,
  input  logic [$clog2(N_FFT/LANES)-1:0]         in_bin,
  input  hipsr_pkg::corr_t                       din [LANES/2],
  input  logic [$clog2(N_FFT/2)+1:0]             rd_addr,
  output logic [hipsr_pkg::ACC_W-1:0]            rd_data,
  output logic                                   acc_done,
  output logic [31:0]                            acc_cnt
);
  import hipsr_pkg::*;

  localparam int unsigned NB  = LANES / 2;          // channels per clock
  localparam int unsigned NF  = N_FFT / LANES;      // clocks per frame
  localparam int unsigned FW  = $clog2(NF);
  localparam int unsigned CHW = $clog2(N_FFT / 2);
  localparam int unsigned JW  = (NB > 1) ? $clog2(NB) : 1;

  typedef logic signed [ACC_W-1:0] acc_t;

  acc_t mem [2][4][NB][NF];

  logic          wbank;        // bank being accumulated
  logic          running;      // an integration is in progress
  logic [31:0]   frame;        // frames done in this integration
  logic [31:0]   skip_left;
  logic [FW-1:0] pos, p;       // clock within the frame
  logic          start;        // this frame begins the first integration
  logic          keep;
  logic          first;
  logic          last_pos;
  logic [JW-1:0] rd_j;
  logic [FW-1:0] rd_k;

  assign p        = in_sync ? '0 : pos;
  assign start    = in_sync && !running && (skip_left == 0);
  assign keep     = running || start;
  assign first    = (frame == 0);
  assign last_pos = (p == FW'(NF - 1));
  assign rd_j     = (NB > 1) ? JW'(rd_addr[CHW-1:0] >> FW) : '0;
  assign rd_k     = rd_addr[FW-1:0];

  always_ff @(posedge clk) begin
    if (keep) begin
      for (int j = 0; j < int'(NB); j++) begin
        mem[wbank][PROD_XX][j][in_bin]    <= (first ? '0 : mem[wbank][PROD_XX][j][in_bin])    + ACC_W'(din[j].xx);
        mem[wbank][PROD_YY][j][in_bin]    <= (first ? '0 : mem[wbank][PROD_YY][j][in_bin])    + ACC_W'(din[j].yy);
        mem[wbank][PROD_XY_RE][j][in_bin] <= (first ? '0 : mem[wbank][PROD_XY_RE][j][in_bin]) + ACC_W'(din[j].xy_re);
        mem[wbank][PROD_XY_IM][j][in_bin] <= (first ? '0 : mem[wbank][PROD_XY_IM][j][in_bin]) + ACC_W'(din[j].xy_im);
      end
    end
    rd_data <= mem[~wbank][rd_addr[CHW+1:CHW]][rd_j][rd_k];
  end

  always_ff @(posedge clk) begin
    if (rst || restart) begin
      wbank     <= 1'b0;
      running   <= 1'b0;
      frame     <= '0;
      skip_left <= SKIP;
      pos       <= '0;
      acc_done  <= 1'b0;
      acc_cnt   <= '0;
    end else begin
      pos      <= p + 1'b1;
      acc_done <= 1'b0;
      // Frames start at in_sync; the first kept frame begins an integration.
      if (start) running <= 1'b1;
      else if (in_sync && !running) skip_left <= skip_left - 1;
      if (keep && last_pos) begin
        if (frame >= acc_len - 1) begin
          frame    <= '0;
          wbank    <= ~wbank;
          acc_done <= 1'b1;
          acc_cnt  <= acc_cnt + 1;
        end else begin
          frame <= frame + 1;
        end
      end
    end
  end

endmodule
