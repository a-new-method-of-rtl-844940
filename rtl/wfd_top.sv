// wfd_top: FPGA part of a 12-bit 1 Gsps time-interleaved waveform digitizer.
//
// Two dual-core 250 Msps ADCs sample the same input 90 degrees apart, which
// interleaves into 1 Gsps. Gain, offset and sampling-time mismatches between
// the four cores would show up as spurs, so the samples are corrected in real
// time before they are buffered for the PCI Express link:
//   adc_sync_reset   releases the two ADCs' resets in a fixed order so the
//                    cores always sample in the order ADC1_core1,
//                    ADC2_core1, ADC1_core2, ADC2_core2
//   adc_receiver x2  1:2 capture of each ADC's 500 Mwords/s bus (clk_500)
//   deserializer     4 cores x 250 Msps -> 16 lanes x 62.5 Msps (clk_250)
//   gain_offset_corr per-lane offset and gain correction (clk_62m5)
//   filter_matrix    16x16 poly-phase time-skew correction, 2 multipliers
//                    per cell at 187.5 MHz (clk_187m5)
//   output_mux       16 lanes -> one 64-bit word of 4 samples per clk_250
//   async_fifo       buffer to the PCI Express core's user clock (pcie_clk)
// The chain and its rates are the paper's. The PCI Express endpoint, the
// ADCs and the clock synthesizer are outside: their signals are ports here.
//
// Clocks: clk_500, clk_250, clk_62m5 and clk_187m5 are taken as coming from
// one clock manager with rising edges aligned every 16 ns; transfers between
// them are synchronous. adc1_clk / adc2_clk are the ADCs' 500 MHz sample
// clocks (180 degrees apart) and clock only the reset sequencer. pcie_clk is
// asynchronous to the rest. rst is synchronous and active high; hold it for
// at least 2 clk_62m5 cycles.
// Configuration (clk_62m5 domain, write before data matter): per-channel
// gain (unsigned Q2.16) and offset (1/16 LSB), and filter coefficients
// (signed Q2.16, address {row, column, tap}).
module wfd_top
  import wfd_pkg::*;
#(
  parameter int unsigned FIFO_AW = 10
) (
  input  logic                  clk_500,
  input  logic                  clk_250,
  input  logic                  clk_62m5,
  input  logic                  clk_187m5,
  input  logic                  rst,
  // ADC reset sequencing
  input  logic                  adc1_clk,
  input  logic                  adc2_clk,
  input  logic                  adc_reset,
  output logic                  adc1_resetn,
  output logic                  adc2_resetn,
  // ADC data buses
  input  logic [ADC_W-1:0]      adc1_d,
  input  logic                  adc1_clkout,
  input  logic [ADC_W-1:0]      adc2_d,
  input  logic                  adc2_clkout,
  // configuration
  input  logic signed [DW-1:0]  offset [M],
  input  logic        [GW-1:0]  gain   [M],
  input  logic                  coef_we,
  input  logic [2*$clog2(MN)+$clog2(TAPS)-1:0] coef_addr,
  input  logic signed [CW-1:0]  coef_wdata,
  // to the PCI Express endpoint
  input  logic                  pcie_clk,
  input  logic                  pcie_rst,
  input  logic                  pcie_rd_en,
  output logic [4*DW-1:0]       pcie_rdata,
  output logic                  pcie_empty,
  output logic                  fifo_full,
  output logic                  fifo_overflow
);

  sample_t adc1_core1, adc1_core2, adc2_core1, adc2_core2;
  sample_t cores   [M];
  sample_t lanes   [MN];
  sample_t go_out  [MN];
  sample_t fm_out  [MN];
  logic    des_tog, go_tog, fm_tog;
  logic [4*DW-1:0] word;
  logic            word_valid;

  adc_sync_reset u_sync_reset (
    .adc1_clk    (adc1_clk),
    .adc2_clk    (adc2_clk),
    .adc_reset   (adc_reset),
    .adc1_resetn (adc1_resetn),
    .adc2_resetn (adc2_resetn)
  );

  adc_receiver u_rx1 (
    .clk_500 (clk_500), .clk_250 (clk_250), .rst (rst),
    .adc_d (adc1_d), .adc_flag (adc1_clkout),
    .core1 (adc1_core1), .core2 (adc1_core2)
  );

  adc_receiver u_rx2 (
    .clk_500 (clk_500), .clk_250 (clk_250), .rst (rst),
    .adc_d (adc2_d), .adc_flag (adc2_clkout),
    .core1 (adc2_core1), .core2 (adc2_core2)
  );

  // Sampling order of the four cores (sequence I of the reset scheme).
  assign cores[0] = adc1_core1;
  assign cores[1] = adc2_core1;
  assign cores[2] = adc1_core2;
  assign cores[3] = adc2_core2;

  deserializer u_des (
    .clk_250 (clk_250), .rst (rst),
    .din (cores), .dout (lanes), .dout_tog (des_tog)
  );

  gain_offset_corr u_gain_offset (
    .clk (clk_62m5), .rst (rst),
    .din (lanes), .din_tog (des_tog),
    .offset (offset), .gain (gain),
    .dout (go_out), .dout_tog (go_tog)
  );

  filter_matrix u_matrix (
    .clk (clk_187m5), .rst (rst),
    .cfg_clk (clk_62m5), .coef_we (coef_we), .coef_addr (coef_addr), .coef_wdata (coef_wdata),
    .din (go_out), .din_tog (go_tog),
    .dout (fm_out), .dout_tog (fm_tog)
  );

  output_mux u_mux (
    .clk_250 (clk_250), .rst (rst),
    .din (fm_out), .din_tog (fm_tog),
    .dout (word), .dout_valid (word_valid)
  );

  async_fifo #(.W(4*DW), .AW(FIFO_AW)) u_fifo (
    .wclk (clk_250), .wrst (rst), .wr_en (word_valid), .wdata (word),
    .full (fifo_full), .overflow (fifo_overflow),
    .rclk (pcie_clk), .rrst (pcie_rst), .rd_en (pcie_rd_en),
    .rdata (pcie_rdata), .empty (pcie_empty)
  );

endmodule
