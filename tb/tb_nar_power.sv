// tb_nar_power: checks the noise-adding-radiometer on/off power sums.
// Random samples, LANES = 4 per clock, are fed with a cal state that toggles
// every 5 clocks; the reference accumulates x^2 and y^2 into on and off sums
// and counts, which must appear at the outputs when each window of WIN clocks
// closes.
module tb_nar_power;
  import hipsr_pkg::*;
  localparam int WIN = 37, LANES = 4;
  logic clk = 0, rst = 1, restart = 0, cal_on = 0, done;
  logic [31:0] win_len = WIN, n_on, n_off, nar_cnt;
  logic signed [7:0] x [LANES], y [LANES];
  logic [ACC_W-1:0] p_on_x, p_off_x, p_on_y, p_off_y;
  int checks = 0, failures = 0;

  nar_power #(.LANES(LANES)) dut (.*);
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
    longint ox, fx, oy, fy;
    int con, coff, nwin;
    for (int q = 0; q < LANES; q++) begin x[q] = 0; y[q] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    restart <= 1; @(posedge clk); restart <= 0;
    ox = 0; fx = 0; oy = 0; fy = 0; con = 0; coff = 0; nwin = 0;
    for (int i = 0; i < 6 * WIN; i++) begin
      for (int q = 0; q < LANES; q++) begin x[q] <= 8'($urandom); y[q] <= 8'($urandom); end
      cal_on <= ((i / 5) % 2 == 1);
      @(posedge clk); #1;
      for (int q = 0; q < LANES; q++)
        if (cal_on) begin ox += int'(x[q]) * int'(x[q]); oy += int'(y[q]) * int'(y[q]); con++; end
        else        begin fx += int'(x[q]) * int'(x[q]); fy += int'(y[q]) * int'(y[q]); coff++; end
      if ((i + 1) % WIN == 0) begin
        nwin++;
        check(done, "done at window end");
        check(p_on_x == ACC_W'(ox) && p_off_x == ACC_W'(fx), $sformatf("win %0d X sums", nwin));
        check(p_on_y == ACC_W'(oy) && p_off_y == ACC_W'(fy), $sformatf("win %0d Y sums", nwin));
        check(n_on == 32'(con) && n_off == 32'(coff), "counts");
        check(nar_cnt == 32'(nwin), "window count");
        ox = 0; fx = 0; oy = 0; fy = 0; con = 0; coff = 0;
      end else begin
        check(!done, "no done inside window");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
