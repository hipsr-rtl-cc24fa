// sync_gen: 1PPS synchronisation and spectrum framing.
//
// Every board in the array receives the same one-pulse-per-second signal so
// that all of them can start their spectra, integrations and noise-diode
// cycles on the same clock edge. Software first arms the block; the next
// rising edge of the PPS input then produces a one-cycle `sync` pulse, which
// the rest of the design uses as its common restart. From that cycle on,
// `frame_sync` pulses once every FRAME_LEN clocks and marks the clock holding
// sample 0 of each transform frame; 16384 samples arrive 4 per clock, so a
// frame is 4096 clocks. The frame counter free-runs from reset before the
// first sync, so the datapath always has framing.
//
// Timing: the PPS input is asynchronous and passes through a two-flop
// synchroniser; `sync` and the first `frame_sync` appear together three clock
// cycles after the PPS edge is sampled. `armed` is high from the arm request
// until the sync has happened. The arm-then-PPS protocol is this design's
// choice; the source only states that the 1PPS lets boards align to within one
// clock cycle.
module sync_gen #(
  parameter int unsigned FRAME_LEN = hipsr_pkg::FFT_N / hipsr_pkg::LANES
) (
  input  logic clk,
  input  logic rst,
  input  logic arm,         // one-cycle request from software
  input  logic pps,         // asynchronous 1PPS input
  output logic sync,        // one-cycle common restart pulse
  output logic frame_sync,  // sample 0 of every transform frame
  output logic armed
);
  localparam int unsigned CW = (FRAME_LEN > 1) ? $clog2(FRAME_LEN) : 1;

  logic [2:0]    pps_sr;
  logic          pps_rise;
  logic [CW-1:0] frame_cnt;

  assign pps_rise = pps_sr[1] & ~pps_sr[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      pps_sr     <= '0;
      armed      <= 1'b0;
      sync       <= 1'b0;
      frame_sync <= 1'b0;
      frame_cnt  <= '0;
    end else begin
      pps_sr <= {pps_sr[1:0], pps};
      sync   <= 1'b0;
      if (arm) armed <= 1'b1;
      if (armed && pps_rise) begin
        armed      <= 1'b0;
        sync       <= 1'b1;
        frame_sync <= 1'b1;
        frame_cnt  <= CW'(1 % FRAME_LEN);
      end else begin
        frame_sync <= (frame_cnt == '0);
        frame_cnt  <= (32'(frame_cnt) == FRAME_LEN - 1) ? '0 : frame_cnt + 1'b1;
      end
    end
  end

  // A restart is always the first sample of a frame.
  a_sync_frame: assert property (@(posedge clk) disable iff (rst) sync |-> frame_sync);

endmodule
