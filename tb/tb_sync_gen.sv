// tb_sync_gen: checks PPS arming, the sync pulse and the frame pulses.
// A PPS edge without arming must produce no sync; after arming, the sync
// and a frame pulse appear 3 cycles after the edge, and frame pulses repeat
// every FRAME_LEN cycles from there.
module tb_sync_gen;
  localparam int unsigned FL = 16;
  logic clk = 0, rst = 1, arm = 0, pps = 0;
  logic sync, frame_sync, armed;
  int checks = 0, failures = 0;

  sync_gen #(.FRAME_LEN(FL)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nsync = 0;
  int last_sync = -1, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (sync) begin nsync <= nsync + 1; last_sync <= cyc; end
  end

  initial begin
    int t_edge, gap, prev;
    repeat (3) @(posedge clk);
    rst <= 0;
    // frame pulses free-run every FL cycles
    prev = -1;
    for (int i = 0; i < 3 * FL; i++) begin
      @(posedge clk); #1;
      if (frame_sync) begin
        if (prev >= 0) check(cyc - prev == FL, "free-running frame period");
        prev = cyc;
      end
    end
    // unarmed PPS does nothing
    pps <= 1; repeat (10) @(posedge clk); pps <= 0; repeat (10) @(posedge clk);
    check(nsync == 0, "no sync without arm");
    // arm, then PPS edge
    arm <= 1; @(posedge clk); arm <= 0; @(posedge clk); #1;
    check(armed, "armed after arm");
    repeat (5) begin  // phase the edge away from the free-running frame
      @(posedge clk);
    end
    pps <= 1; t_edge = cyc + 1;
    for (int i = 0; i < 6; i++) begin
      @(posedge clk); #1;
      if (sync) begin
        check(frame_sync, "frame pulse with sync");
        check(cyc - t_edge == 3, $sformatf("sync latency %0d", cyc - t_edge));
      end
    end
    check(nsync == 1, "one sync");
    check(!armed, "armed cleared");
    // frames aligned to the sync
    prev = last_sync;
    for (int i = 0; i < 3 * FL; i++) begin
      @(posedge clk); #1;
      if (frame_sync) begin
        gap = cyc - prev;
        check(gap == FL, $sformatf("frame period after sync %0d", gap));
        prev = cyc;
      end
    end
    pps <= 0;
    repeat (4) @(posedge clk);
    pps <= 1; repeat (8) @(posedge clk);
    check(nsync == 1, "PPS after sync without re-arm ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
