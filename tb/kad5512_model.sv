// kad5512_model: behavioural model of one dual-core 12-bit ADC chip
// (KAD5512P50-style data clocking), for simulation only.
//
// A divide-by-two clock manager, held while RESETN is low, runs from the
// 500 MHz sample clock. When its output rises core 1 samples, when it falls
// core 2 samples; the divider therefore starts in whatever phase the release
// of RESETN gives it. Each result is driven onto the shared 12-bit output
// bus 250 ps after the sampling edge together with CLKOUT, which is 1 with
// core 1's words and 0 with core 2's. The analog input and the per-core
// gain, offset and time skew come from tb_signal_pkg. Pipeline latency of the
// real part is not modelled.
`timescale 1ps/1ps
module kad5512_model #(
  parameter int CHIP = 0          // 0: ADC1, 1: ADC2
) (
  input  logic        clk,
  input  logic        resetn,
  output logic [11:0] d,
  output logic        clkout
);
  logic div = 1'b0;
  int   code;

  always @(posedge clk) begin
    if (!resetn) begin
      div <= 1'b0;
    end else begin
      div  <= ~div;
      // divider rising: core 1 (channel CHIP); falling: core 2 (channel 2+CHIP)
      code = tb_signal_pkg::sample(div ? 2 + CHIP : CHIP, $time);
      d      <= #250 12'(code);
      clkout <= #250 ~div;
    end
  end
endmodule
