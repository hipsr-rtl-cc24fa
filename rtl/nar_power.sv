// nar_power: total-power accumulators of the noise adding radiometer.
//
// With the calibration noise source switched on and off, the system
// temperature follows from Tsys = Tc / (Pon/Poff - 1). This block measures
// Pon and Poff for each polarisation as the sum of squared digitizer samples
// taken while `cal_on` is high or low, and counts how many samples fell in
// each state so that software can normalise the two sums before taking
// their ratio.
//
// Samples arrive LANES per clock (all taken with the same diode state). An
// integration window lasts `win_len` clocks (the top sets it to the spectral
// integration, acc_len frames of N/LANES clocks). At the end of the window the four
// sums and two counts are copied to the outputs, `done` pulses and `nar_cnt`
// increments; the running sums restart. `restart` (the common sync) starts a
// fresh window. Measuring total power on the raw samples rather than on the
// spectra, and the explicit sample counts, are this design's choices.
module nar_power #(
  parameter int unsigned IN_W  = hipsr_pkg::ADC_W,
  parameter int unsigned LANES = hipsr_pkg::LANES
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         restart,
  input  logic [31:0]                  win_len,   // clocks per window, >= 1
  input  logic                         cal_on,
  input  logic signed [IN_W-1:0]       x [LANES],
  input  logic signed [IN_W-1:0]       y [LANES],
  output logic [hipsr_pkg::ACC_W-1:0]  p_on_x,
  output logic [hipsr_pkg::ACC_W-1:0]  p_off_x,
  output logic [hipsr_pkg::ACC_W-1:0]  p_on_y,
  output logic [hipsr_pkg::ACC_W-1:0]  p_off_y,
  output logic [31:0]                  n_on,
  output logic [31:0]                  n_off,
  output logic                         done,
  output logic [31:0]                  nar_cnt
);
  import hipsr_pkg::*;

  logic [ACC_W-1:0] s_on_x, s_off_x, s_on_y, s_off_y;
  logic [31:0]      c_on, c_off, cnt;
  logic [ACC_W-1:0] px, py;

  always_comb begin
    px = '0;
    py = '0;
    for (int q = 0; q < int'(LANES); q++) begin
      px += ACC_W'(32'(x[q] * x[q]));
      py += ACC_W'(32'(y[q] * y[q]));
    end
  end

  always_ff @(posedge clk) begin
    if (rst || restart) begin
      s_on_x  <= '0; s_off_x <= '0; s_on_y <= '0; s_off_y <= '0;
      c_on    <= '0; c_off   <= '0; cnt    <= '0;
      done    <= 1'b0;
      if (rst) begin
        p_on_x <= '0; p_off_x <= '0; p_on_y <= '0; p_off_y <= '0;
        n_on   <= '0; n_off   <= '0; nar_cnt <= '0;
      end
    end else begin
      logic [ACC_W-1:0] a_on_x, a_off_x, a_on_y, a_off_y;
      logic [31:0]      a_on, a_off;
      a_on_x  = s_on_x  + (cal_on ? px : '0);
      a_on_y  = s_on_y  + (cal_on ? py : '0);
      a_off_x = s_off_x + (cal_on ? '0 : px);
      a_off_y = s_off_y + (cal_on ? '0 : py);
      a_on    = c_on  + (cal_on ? 32'(LANES) : 32'd0);
      a_off   = c_off + (cal_on ? 32'd0 : 32'(LANES));
      done    <= 1'b0;
      if (cnt >= win_len - 1) begin
        p_on_x  <= a_on_x;  p_off_x <= a_off_x;
        p_on_y  <= a_on_y;  p_off_y <= a_off_y;
        n_on    <= a_on;    n_off   <= a_off;
        nar_cnt <= nar_cnt + 1;
        done    <= 1'b1;
        s_on_x  <= '0; s_off_x <= '0; s_on_y <= '0; s_off_y <= '0;
        c_on    <= '0; c_off   <= '0; cnt    <= '0;
      end else begin
        s_on_x  <= a_on_x;  s_off_x <= a_off_x;
        s_on_y  <= a_on_y;  s_off_y <= a_off_y;
        c_on    <= a_on;    c_off   <= a_off;
        cnt     <= cnt + 1;
      end
    end
  end

endmodule
