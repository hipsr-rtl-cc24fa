// tb_hispec_full: end-to-end test of the spectrometer at its full size
// (16384-point transform, 8192 channels) with the top's default parameters.
// One integration of two frames is checked on 24 channels around the tone
// and at random; see hispec_tb_body.svh for the rest.
module tb_hispec_full;
  localparam int N = 16384, NREAD = 24, ACCLEN = 2, HP = 5000;
  `include "hispec_tb_body.svh"
  hispec_top dut (.*);
endmodule
