// fir_cell: one 5-tap FIR cell F(q,p) of the poly-phase filter matrix.
//
// The cell computes acc = sum_t coef[t] * x[t] over TAPS taps with only
// NMULT multipliers, reusing them over ceil(TAPS/NMULT) cycles of the fast
// clock per 62.5 MHz sample: with the paper's 5 taps, 2 multipliers and a
// 187.5 MHz (3 x 62.5 MHz) clock, slot 0 does taps 0 and 1, slot 1 taps 2
// and 3, slot 2 tap 4. The tap count, multiplier count and clock ratio are
// the paper's; the slot schedule is this design's.
//
// Interface: x[t] is x_p[l-i0-t] from the column's delay line and coef[t] the
// cell's coefficients; both are held during the slots. run is high for the
// NSLOT cycles of a sample with slot counting 0..NSLOT-1. acc holds the full
// precision result from the cycle after slot NSLOT-1 until the next slot 0.
module fir_cell #(
  parameter int unsigned TAPS  = wfd_pkg::TAPS,
  parameter int unsigned NMULT = wfd_pkg::NMULT,
  parameter int unsigned DW    = wfd_pkg::DW,
  parameter int unsigned CW    = wfd_pkg::CW,
  parameter int unsigned ACCW  = wfd_pkg::ACCW,
  localparam int unsigned NSLOT = (TAPS + NMULT - 1) / NMULT
) (
  input  logic                          clk,
  input  logic                          run,
  input  logic [$clog2(NSLOT+1)-1:0]    slot,
  input  logic signed [DW-1:0]          x    [TAPS],
  input  logic signed [CW-1:0]          coef [TAPS],
  output logic signed [ACCW-1:0]        acc
);

  logic signed [ACCW-1:0] slot_sum;

  // NMULT products of the current slot.
  always_comb begin
    slot_sum = '0;
    for (int k = 0; k < NMULT; k++) begin
      if (32'(slot) * NMULT + k < TAPS)
        slot_sum += ACCW'(x[32'(slot) * NMULT + k]) * ACCW'(coef[32'(slot) * NMULT + k]);
    end
  end

  always_ff @(posedge clk) begin
    if (run) acc <= (slot == '0) ? slot_sum : acc + slot_sum;
  end

endmodule
