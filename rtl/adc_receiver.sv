// adc_receiver: 1:2 input deserializer for one dual-core ADC chip.
//
// The ADC drives its two cores' 12-bit results alternately onto one bus at
// 500 Mwords/s together with an output clock that is high while core 1's
// word is on the bus. Every 500 MHz cycle this block captures the bus and
// that clock level as a 13-bit word; every 250 MHz cycle it takes the last
// two words and uses the captured clock level to pair them as
// (core1, core2). When the pair straddles a boundary, core 1's word is the
// newer word of the previous pair. The 12-bit two's-complement code is
// left-justified into the 16-bit sample (code * 16), leaving 4 fractional
// bits for the corrections that follow. The paper gives the 1:2 ratio, the
// clocks and the widths; the word pairing by the output clock and the
// justification are this design's.
//
// Interface: adc_d / adc_flag in the clk_500 domain; core1 / core2 registered
// in the clk_250 domain. clk_250 must be clk_500 / 2, rising edges aligned.
// Latency: a word appears on core1/core2 two to three clk_250 cycles after
// its capture.
module adc_receiver #(
  parameter int unsigned ADC_W = wfd_pkg::ADC_W,
  parameter int unsigned DW    = wfd_pkg::DW
) (
  input  logic                 clk_500,
  input  logic                 clk_250,
  input  logic                 rst,
  input  logic [ADC_W-1:0]     adc_d,
  input  logic                 adc_flag,
  output logic signed [DW-1:0] core1,
  output logic signed [DW-1:0] core2
);

  typedef struct packed {
    logic             flag;
    logic [ADC_W-1:0] code;
  } word_t;

  word_t w_new, w_old;       // clk_500 capture shift register
  logic [ADC_W-1:0] b_prev;  // newer word of the previous pair

  always_ff @(posedge clk_500) begin
    if (rst) begin
      w_new <= '0;
      w_old <= '0;
    end else begin
      w_new <= '{flag: adc_flag, code: adc_d};
      w_old <= w_new;
    end
  end

  function automatic logic signed [DW-1:0] widen(input logic [ADC_W-1:0] code);
    return {code, {(DW-ADC_W){1'b0}}};
  endfunction

  always_ff @(posedge clk_250) begin
    if (rst) begin
      b_prev <= '0;
      core1  <= '0;
      core2  <= '0;
    end else begin
      b_prev <= w_new.code;
      if (w_old.flag) begin
        core1 <= widen(w_old.code);
        core2 <= widen(w_new.code);
      end else begin
        core1 <= widen(b_prev);
        core2 <= widen(w_old.code);
      end
    end
  end

endmodule
