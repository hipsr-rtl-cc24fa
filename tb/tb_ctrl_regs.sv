// tb_ctrl_regs: checks the register map and bus timing of the control slave.
// Writes and reads back the configuration registers, checks the ARM pulse,
// the sticky overflow flags and their clear, the status words, the 64-bit
// noise-calibration words and the spectrum window (served here by a model
// memory with one cycle of read latency, like the accumulator). Every
// transfer must be acknowledged exactly two cycles after its request.
module tb_ctrl_regs;
  import hipsr_pkg::*;
  logic clk = 0, rst = 1;
  logic bus_req = 0, bus_we = 0, bus_ack;
  logic [17:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic arm, cal_en, master;
  logic [31:0] acc_len, cal_half;
  logic [13:0] fft_shift;
  logic fft_ovf = 0, fir_ovf = 0, armed = 0, cal_on = 0;
  logic [31:0] acc_cnt = 32'h1234, nar_cnt = 32'h55, nar_n_on = 1000, nar_n_off = 1001;
  logic [ACC_W-1:0] nar_p [4];
  logic [14:0] acc_rd_addr;
  logic [ACC_W-1:0] acc_rd_data;
  int checks = 0, failures = 0, narm = 0;

  ctrl_regs dut (.*);
  always #5 clk = ~clk;

  // model spectrum memory: value = f(address), one cycle latency
  function automatic logic [63:0] memval(input logic [14:0] a);
    return {17'h1ABCD, a, 17'h0F0F0, a};
  endfunction
  always_ff @(posedge clk) acc_rd_data <= memval(acc_rd_addr);
  always_ff @(posedge clk) if (arm) narm <= narm + 1;

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

  task automatic xfer(input bit we, input logic [17:0] a, input logic [31:0] wd, output logic [31:0] rd);
    bus_req <= 1; bus_we <= we; bus_addr <= a; bus_wdata <= wd;
    @(posedge clk); #1;
    bus_req <= 0;
    check(!bus_ack, "no ack after 1 cycle");
    @(posedge clk); #1;
    check(bus_ack, $sformatf("ack after 2 cycles, addr %h", a));
    rd = bus_rdata;
    @(posedge clk);
  endtask

  initial begin
    logic [31:0] r;
    nar_p[0] = 64'h0000_0011_2222_3333; nar_p[1] = 64'h0000_0044_5555_6666;
    nar_p[2] = 64'h0000_0077_8888_9999; nar_p[3] = 64'h0000_00AA_BBBB_CCCC;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // reset values
    check(acc_len == 97656 && cal_half == 781250 && fft_shift == '1 && cal_en && !master, "reset values");
    // configuration round trip
    xfer(1, 18'h01, 32'd1234, r);  check(acc_len == 1234, "acc_len written");
    xfer(0, 18'h01, 0, r);         check(r == 1234, "acc_len read");
    xfer(1, 18'h02, 32'h2AAA, r);  check(fft_shift == 14'h2AAA, "fft_shift written");
    xfer(0, 18'h02, 0, r);         check(r == 32'h2AAA, "fft_shift read");
    xfer(1, 18'h03, 32'd99, r);    check(cal_half == 99, "cal_half written");
    xfer(1, 18'h00, 32'h6, r);     check(master && cal_en && narm == 0, "ctrl written, no arm");
    xfer(0, 18'h00, 0, r);         check(r == 32'h6, "ctrl read");
    xfer(1, 18'h00, 32'h7, r);     check(narm == 1, "one arm pulse");
    check(!arm, "arm self-clears");
    // status and counters
    armed <= 1; cal_on <= 1;
    fft_ovf <= 1; @(posedge clk); fft_ovf <= 0;
    xfer(0, 18'h04, 0, r);         check(r == 32'b1101, "status: fft ovf, armed, cal_on");
    fir_ovf <= 1; @(posedge clk); fir_ovf <= 0;
    xfer(0, 18'h04, 0, r);         check(r == 32'b1111, "status: both ovf");
    xfer(1, 18'h00, 32'hE, r);
    xfer(0, 18'h04, 0, r);         check(r == 32'b1100, "ovf cleared");
    xfer(0, 18'h05, 0, r);         check(r == 32'h1234, "acc_cnt");
    xfer(0, 18'h06, 0, r);         check(r == 32'h55, "nar_cnt");
    for (int i = 0; i < 8; i++) begin
      xfer(0, 18'(8 + i), 0, r);
      check(r == (i[0] ? nar_p[i / 2][63:32] : nar_p[i / 2][31:0]), $sformatf("nar word %0d", i));
    end
    xfer(0, 18'h10, 0, r);         check(r == 1000, "n_on");
    xfer(0, 18'h11, 0, r);         check(r == 1001, "n_off");
    xfer(0, 18'h40, 0, r);         check(r == 32'hDEAD_BEEF, "unmapped");
    // spectrum window
    for (int i = 0; i < 40; i++) begin
      logic [14:0] a;
      logic [63:0] v;
      a = 15'($urandom);
      v = memval(a);
      xfer(0, {1'b1, 1'b0, a, 1'b0}, 0, r); check(r == v[31:0],  "spectrum low word");
      xfer(0, {1'b1, 1'b0, a, 1'b1}, 0, r); check(r == v[63:32], "spectrum high word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
