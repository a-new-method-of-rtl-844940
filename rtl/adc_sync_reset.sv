// adc_sync_reset: sequential release of the two ADC chips' resets.
//
// Each dual-core ADC divides its 500 MHz clock by two to clock its cores,
// and the divider starts in whatever phase its reset release happens to hit.
// To make the four cores sample in the order ADC1_core1, ADC2_core1,
// ADC1_core2, ADC2_core2 (90 degrees apart), ADC1 is released first, on its
// own clock, and ADC2 only after that, on its clock, which is 180 degrees
// away from ADC1's. The circuit is the paper's: two flip-flops with D tied
// high; the first is cleared by ADC_Reset, and its inverted output clears the
// second. Both flip-flops are taken as falling-edge clocked (the paper's
// drawing has an inversion bubble on their clock pins) with an asynchronous,
// active-high clear; those two readings are this design's.
//
// Interface: adc_reset (active high) in, adc1_resetn / adc2_resetn (active
// low, to the ADC RESETN pins) out.
// Timing: adc1_resetn rises at the first falling edge of adc1_clk after
// adc_reset falls; adc2_resetn rises at the first falling edge of adc2_clk
// after that.
module adc_sync_reset (
  input  logic adc1_clk,
  input  logic adc2_clk,
  input  logic adc_reset,
  output logic adc1_resetn,
  output logic adc2_resetn
);

  logic ff2_clear;

  always_ff @(negedge adc1_clk or posedge adc_reset) begin
    if (adc_reset) adc1_resetn <= 1'b0;
    else           adc1_resetn <= 1'b1;
  end

  assign ff2_clear = ~adc1_resetn;

  always_ff @(negedge adc2_clk or posedge ff2_clear) begin
    if (ff2_clear) adc2_resetn <= 1'b0;
    else           adc2_resetn <= 1'b1;
  end

endmodule
