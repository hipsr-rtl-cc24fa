// tb_noise_cal_ctrl: checks the diode square wave against a cycle count.
// After sync the diode is off for half_period cycles, then toggles every
// half_period cycles; the GPIO follows only on the master; disable holds off.
module tb_noise_cal_ctrl;
  logic clk = 0, rst = 1, sync = 0, enable = 1, master = 0;
  logic [31:0] half_period = 7;
  logic cal_on, toggle, cal_gpio;
  int checks = 0, failures = 0;

  noise_cal_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, exp_state;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int hp = 1; hp <= 9; hp += 4) begin
      half_period <= hp;
      master <= hp[2];
      sync <= 1; @(posedge clk); sync <= 0;
      // reference: m edges after the sync edge the state is (m / hp) % 2
      for (int k = 0; k < 6 * hp; k++) begin
        @(posedge clk); #1;
        exp_state = ((k + 1) / hp) % 2;  // state after the (k+1)-th edge past the sync edge
        check(cal_on == exp_state[0], $sformatf("hp=%0d k=%0d state", hp, k));
        check(cal_gpio == (master & cal_on), "gpio follows master");
        check(toggle == ((k + 1) % hp == 0), $sformatf("hp=%0d k=%0d toggle", hp, k));
      end
    end
    enable <= 0;
    repeat (20) begin @(posedge clk); #1; check(!cal_on, "disabled is off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
