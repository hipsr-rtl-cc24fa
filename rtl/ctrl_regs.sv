// ctrl_regs: register file and memory window seen by the board's control
// processor.
//
// On the target board an embedded PowerPC reaches registers and memories in
// the FPGA fabric over its On-chip Peripheral Bus; it configures the
// spectrometer, arms the PPS synchronisation and reads the integrated
// spectra and noise-calibration powers. This block is that slave. Its bus is
// a simplified single-transfer, 32-bit word-addressed request/acknowledge
// protocol (this design's choice; the OPB signal set itself is not modelled):
// `bus_req` is held for one cycle with `bus_we`, `bus_addr` and `bus_wdata`;
// `bus_ack` (with `bus_rdata` for reads) follows exactly two cycles later. A
// new request may be issued in the cycle after `bus_ack`.
//
// Word address map (all 32-bit words; 64-bit values are low word first):
//   0x00 CTRL       W: bit0 ARM (pulse), bit3 CLR_OVF (pulse); R/W: bit1 CAL_EN, bit2 MASTER
//   0x01 ACC_LEN    R/W frames per integration (reset value ACC_LEN_RST)
//   0x02 FFT_SHIFT  R/W per-stage halving mask (reset: all stages)
//   0x03 CAL_HALF   R/W noise-diode half period in clock cycles (reset CAL_HALF_RST)
//   0x04 STATUS     R   bit0 FFT overflow seen, bit1 PFB FIR overflow seen, bit2 armed, bit3 cal_on
//   0x05 ACC_CNT    R   integrations completed since sync
//   0x06 NAR_CNT    R   noise-calibration windows completed since reset
//   0x08-0x0F NAR   R   Pon_X, Poff_X, Pon_Y, Poff_Y (64-bit each)
//   0x10 NAR_NON    R   samples with cal on in the last window
//   0x11 NAR_NOFF   R   samples with cal off in the last window
//   0x20000 +       R   spectrum window: offset = {product[1:0], channel, word}
//                       product 0 XX*, 1 YY*, 2 Re XY*, 3 Im XY*
module ctrl_regs #(
  parameter int unsigned CHW          = $clog2(hipsr_pkg::N_CHAN),
  parameter int unsigned SHIFT_W      = $clog2(hipsr_pkg::FFT_N),
  parameter int unsigned ACC_LEN_RST  = 97656,  // 2 s at 48828 spectra/s
  parameter int unsigned CAL_HALF_RST = hipsr_pkg::CAL_HALF
) (
  input  logic                         clk,
  input  logic                         rst,
  // bus
  input  logic                         bus_req,
  input  logic                         bus_we,
  input  logic [17:0]                  bus_addr,
  input  logic [31:0]                  bus_wdata,
  output logic                         bus_ack,
  output logic [31:0]                  bus_rdata,
  // configuration
  output logic                         arm,
  output logic                         cal_en,
  output logic                         master,
  output logic [31:0]                  acc_len,
  output logic [SHIFT_W-1:0]           fft_shift,
  output logic [31:0]                  cal_half,
  // status
  input  logic                         fft_ovf,
  input  logic                         fir_ovf,
  input  logic                         armed,
  input  logic                         cal_on,
  input  logic [31:0]                  acc_cnt,
  input  logic [31:0]                  nar_cnt,
  input  logic [hipsr_pkg::ACC_W-1:0]  nar_p [4],
  input  logic [31:0]                  nar_n_on,
  input  logic [31:0]                  nar_n_off,
  // spectrum memory
  output logic [CHW+1:0]               acc_rd_addr,
  input  logic [hipsr_pkg::ACC_W-1:0]  acc_rd_data
);
  logic        pend;       // stage 1 of a read or write
  logic        pend_we;
  logic [17:0] pend_addr;
  logic        fft_ovf_s, fir_ovf_s;

  assign acc_rd_addr = bus_addr[CHW+2:1];

  always_ff @(posedge clk) begin
    if (rst) begin
      pend      <= 1'b0;
      pend_we   <= 1'b0;
      pend_addr <= '0;
      bus_ack   <= 1'b0;
      bus_rdata <= '0;
      arm       <= 1'b0;
      cal_en    <= 1'b1;
      master    <= 1'b0;
      acc_len   <= ACC_LEN_RST;
      fft_shift <= '1;
      cal_half  <= CAL_HALF_RST;
      fft_ovf_s <= 1'b0;
      fir_ovf_s <= 1'b0;
    end else begin
      arm       <= 1'b0;
      bus_ack   <= 1'b0;
      pend      <= bus_req;
      pend_we   <= bus_we;
      pend_addr <= bus_addr;
      if (fft_ovf) fft_ovf_s <= 1'b1;
      if (fir_ovf) fir_ovf_s <= 1'b1;

      if (bus_req && bus_we && bus_addr[17:6] == '0) begin
        unique case (bus_addr[5:0])
          6'h00: begin
            arm    <= bus_wdata[0];
            cal_en <= bus_wdata[1];
            master <= bus_wdata[2];
            if (bus_wdata[3]) begin
              fft_ovf_s <= 1'b0;
              fir_ovf_s <= 1'b0;
            end
          end
          6'h01:   acc_len   <= bus_wdata;
          6'h02:   fft_shift <= bus_wdata[SHIFT_W-1:0];
          6'h03:   cal_half  <= bus_wdata;
          default: ;
        endcase
      end

      if (pend) begin
        bus_ack <= 1'b1;
        if (pend_we) begin
          bus_rdata <= '0;
        end else if (pend_addr[17]) begin
          bus_rdata <= pend_addr[0] ? acc_rd_data[63:32] : acc_rd_data[31:0];
        end else if (pend_addr[16:6] != '0) begin
          bus_rdata <= 32'hDEAD_BEEF;
        end else begin
          unique case (pend_addr[5:0])
            6'h00:   bus_rdata <= {29'd0, master, cal_en, 1'b0};
            6'h01:   bus_rdata <= acc_len;
            6'h02:   bus_rdata <= 32'(fft_shift);
            6'h03:   bus_rdata <= cal_half;
            6'h04:   bus_rdata <= {28'd0, cal_on, armed, fir_ovf_s, fft_ovf_s};
            6'h05:   bus_rdata <= acc_cnt;
            6'h06:   bus_rdata <= nar_cnt;
            6'h08, 6'h09, 6'h0A, 6'h0B, 6'h0C, 6'h0D, 6'h0E, 6'h0F:
              bus_rdata <= pend_addr[0] ? nar_p[pend_addr[2:1]][63:32]
                                        : nar_p[pend_addr[2:1]][31:0];
            6'h10:   bus_rdata <= nar_n_on;
            6'h11:   bus_rdata <= nar_n_off;
            default: bus_rdata <= 32'hDEAD_BEEF;
          endcase
        end
      end
    end
  end

  // Single outstanding transfer: no request while one is in flight.
  a_one_outstanding: assert property (@(posedge clk) disable iff (rst)
    bus_req |-> !pend);

endmodule
