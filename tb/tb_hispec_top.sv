// tb_hispec_top: end-to-end test of the spectrometer at a 64-point transform
// (32 channels, all read back). See hispec_tb_body.svh for what is checked.
module tb_hispec_top;
  localparam int N = 64, NREAD = 32, ACCLEN = 100, HP = 37;
  `include "hispec_tb_body.svh"
  hispec_top #(.N_FFT(N)) dut (.*);
endmodule
