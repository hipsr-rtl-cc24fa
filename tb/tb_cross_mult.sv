// tb_cross_mult: checks XX*, YY*, Re(XY*), Im(XY*) for random full-range
// inputs (including the most negative values) one cycle after the inputs.
module tb_cross_mult;
  import hipsr_pkg::*;
  logic clk = 0, rst = 1, in_sync = 0, out_sync;
  logic [13:0] in_bin = 0, out_bin;
  cplx_t x = '0, y = '0;
  corr_t prod;
  int checks = 0, failures = 0;

  cross_mult dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    longint xr, xi, yr, yi;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 500; i++) begin
      xr = (i == 0) ? -131072 : longint'($urandom_range(0, 262143)) - 131072;
      xi = (i == 0) ? -131072 : longint'($urandom_range(0, 262143)) - 131072;
      yr = (i == 1) ? -131072 : longint'($urandom_range(0, 262143)) - 131072;
      yi = longint'($urandom_range(0, 262143)) - 131072;
      x.re <= sample_t'(xr); x.im <= sample_t'(xi);
      y.re <= sample_t'(yr); y.im <= sample_t'(yi);
      in_sync <= (i % 7 == 0);
      in_bin  <= 14'(i);
      @(posedge clk); #1;
      check(longint'(prod.xx) == xr * xr + xi * xi, "xx");
      check(longint'(prod.yy) == yr * yr + yi * yi, "yy");
      check(longint'(prod.xy_re) == xr * yr + xi * yi, "xy_re");
      check(longint'(prod.xy_im) == xi * yr - xr * yi, "xy_im");
      check(out_sync == (i % 7 == 0) && out_bin == 14'(i), "sync and bin");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
