// tb_vector_acc: checks integration, bank swapping, frame skipping after a
// restart and readout of the double-buffered accumulator.
// Frames of random products arrive two channels per clock as from the
// 4-lane FFT: in clock p of a frame, input j carries channel j*NCH/2 + k1
// with k1 the bit-reversed p. A reference sum per channel and product is kept
// for the kept frames of each integration; after every acc_done the finished
// bank is read back through rd_addr and compared, while the next
// integration is already running.
module tb_vector_acc;
  import hipsr_pkg::*;
  localparam int N = 32, LANES = 4, NL = N / LANES, LOGNL = 3, NB = LANES / 2, NCH = 16, SKIP = 3;
  localparam int ACCLEN = 20;  // an integration (160 cycles) outlasts a full readout (128)

  logic clk = 0, rst = 1, restart = 0, in_sync = 0, acc_done;
  logic [31:0] acc_len = ACCLEN, acc_cnt;
  logic [LOGNL-1:0] in_bin = 0;
  corr_t din [NB];
  logic [5:0] rd_addr = 0;
  logic [ACC_W-1:0] rd_data;
  int checks = 0, failures = 0;

  vector_acc #(.N_FFT(N), .LANES(LANES), .SKIP(SKIP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint ref_sum [2][4][NCH];   // [integration parity][product][channel]
  longint done_ref [4][NCH];
  int ndone = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // driver: frames after a restart; frame f >= SKIP is integration (f-SKIP)/ACCLEN
  initial begin
    int k, k1, integ, kept;
    longint v [4];
    for (int j = 0; j < NB; j++) din[j] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    restart <= 1; @(posedge clk); restart <= 0;
    for (int f = 0; f < SKIP + 4 * ACCLEN; f++) begin
      kept  = (f >= SKIP);
      integ = (f - SKIP) / ACCLEN;
      for (int p = 0; p < NL; p++) begin
        k1 = 0;
        for (int b = 0; b < LOGNL; b++) k1 |= ((p >> b) & 1) << (LOGNL - 1 - b);
        in_sync <= (p == 0);
        in_bin  <= LOGNL'(k1);
        for (int l = 0; l < NB; l++) begin
          k = l * NL + k1;
          for (int j = 0; j < 4; j++) v[j] = longint'($urandom_range(0, 1 << 30)) - (j >= 2 ? (1 << 29) : 0);
          din[l].xx <= PW'(v[0]); din[l].yy <= PW'(v[1]); din[l].xy_re <= PW'(v[2]); din[l].xy_im <= PW'(v[3]);
          if (kept)
            for (int j = 0; j < 4; j++) begin
              if ((f - SKIP) % ACCLEN == 0) ref_sum[integ % 2][j][k] = v[j];
              else ref_sum[integ % 2][j][k] += v[j];
            end
        end
        @(posedge clk);
      end
    end
    in_sync <= 0;
    repeat (200) @(posedge clk);
    // framing free-runs after the last input frame, so more integrations may close
    check(ndone >= 4, $sformatf("integrations done %0d", ndone));
    check(acc_cnt >= 4, "acc_cnt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader: after each acc_done read the finished bank
  initial begin
    forever begin
      @(posedge clk); #1;
      if (acc_done && ndone >= 4) ndone++;   // free-running frames after the input: not checked
      else if (acc_done) begin
        int par;
        par = ndone % 2;
        ndone++;
        check(acc_cnt == 32'(ndone), "acc_cnt increments");
        for (int j = 0; j < 4; j++)
          for (int c = 0; c < NCH; c++) begin
            rd_addr <= {2'(j), 4'(c)};
            @(posedge clk); @(posedge clk); #1;
            check($signed(rd_data) == ref_sum[par][j][c],
                  $sformatf("int %0d prod %0d ch %0d got %0d exp %0d", ndone, j, c, $signed(rd_data), ref_sum[par][j][c]));
          end
      end
    end
  end
endmodule
