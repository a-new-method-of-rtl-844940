// gain_offset_corr: offset and gain mismatch correction of the 16 lanes.
//
// Lane p carries ADC channel p mod M. Every 62.5 MHz cycle each lane is
// corrected with its channel's constants as
//   y = sat16( ((x - offset) * gain + 2^(GFRAC-1)) >>> GFRAC )
// i.e. one subtractor and one multiplier per lane. The paper states that gain
// and offset are corrected with adders and multipliers; the order of the two
// operations, the unsigned Q2.16 gain, the offset in sample units (1/16 LSB
// of the 12-bit code) and the saturation are this design's.
//
// Interface: din / din_tog from the deserializer (din_tog toggles once per
// vector); offset[M], gain[M] are quasi-static configuration. dout / dout_tog
// are registered: one cycle of latency, dout_tog follows din_tog.
module gain_offset_corr #(
  parameter int unsigned LANES = wfd_pkg::MN,
  parameter int unsigned M     = wfd_pkg::M,
  parameter int unsigned DW    = wfd_pkg::DW,
  parameter int unsigned GW    = wfd_pkg::GW,
  parameter int unsigned GFRAC = wfd_pkg::GFRAC
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [DW-1:0] din    [LANES],
  input  logic                 din_tog,
  input  logic signed [DW-1:0] offset [M],
  input  logic        [GW-1:0] gain   [M],
  output logic signed [DW-1:0] dout   [LANES],
  output logic                 dout_tog
);

  localparam int unsigned PW = DW + 1 + GW + 1;

  function automatic logic signed [DW-1:0] correct(input logic signed [DW-1:0] x,
                                                   input logic signed [DW-1:0] off,
                                                   input logic [GW-1:0] g);
    logic signed [DW:0]   diff;
    logic signed [PW-1:0] prod;
    diff = (DW+1)'(x) - (DW+1)'(off);
    prod = PW'(diff) * PW'($signed({1'b0, g}));
    prod = (prod + (PW'(1) <<< (GFRAC - 1))) >>> GFRAC;
    if (prod > PW'(2**(DW-1) - 1)) return (DW)'(2**(DW-1) - 1);
    if (prod < -PW'(2**(DW-1)))    return (DW)'(-(2**(DW-1)));
    return DW'(prod);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      dout_tog <= 1'b0;
      for (int p = 0; p < LANES; p++) dout[p] <= '0;
    end else begin
      dout_tog <= din_tog;
      for (int p = 0; p < LANES; p++) dout[p] <= correct(din[p], offset[p % M], gain[p % M]);
    end
  end

endmodule
