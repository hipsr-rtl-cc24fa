// noise_cal_ctrl: noise-adding-radiometer switching of the calibration diode.
//
// The receiver's calibrated noise source is toggled on and off as a square
// wave (128 Hz for the spectral-line modes) so that the total power can be
// measured with the source on and off. One master board drives the
// calibration control unit from a GPIO pin; every board runs this same
// generator, and because all of them restart on the common `sync` pulse their
// cal state agrees to within a clock cycle.
//
// Operation: on `sync` the phase counter restarts with the source off. While
// `enable` is high the state toggles every `half_period` clock cycles
// (CAL_HALF = 781250 at 200 MHz gives 128 Hz); `toggle` pulses on the cycle
// the state changes. With `enable` low the source is held off. `cal_gpio`
// carries the state to the pin only on the master board. Starting each cycle
// in the off state and the runtime-programmable half period are this design's
// choices.
module noise_cal_ctrl (
  input  logic        clk,
  input  logic        rst,
  input  logic        sync,
  input  logic        enable,
  input  logic        master,
  input  logic [31:0] half_period,  // clock cycles per half cycle, >= 1
  output logic        cal_on,
  output logic        toggle,
  output logic        cal_gpio
);
  logic [31:0] cnt;

  always_ff @(posedge clk) begin
    if (rst || sync || !enable) begin
      cnt    <= '0;
      cal_on <= 1'b0;
      toggle <= 1'b0;
    end else if (cnt >= half_period - 1) begin
      cnt    <= '0;
      cal_on <= ~cal_on;
      toggle <= 1'b1;
    end else begin
      cnt    <= cnt + 1;
      toggle <= 1'b0;
    end
  end

  assign cal_gpio = master & cal_on;

endmodule
