// output_mux: the multiplexer that puts the 16 corrected lanes back into
// time order for the 250 MHz output path.
//
// Each new vector from the filter matrix holds 16 consecutive samples of the
// 1 Gsps output stream (lane q = sample MN*l + q). The block latches the
// vector and sends it as LANES/OUT_LANES = 4 words of OUT_LANES = 4 samples,
// one word per clk_250 cycle, the earliest sample in bits 15:0. A vector
// arrives every 16 ns, so at 250 MHz the words follow each other without
// gaps. The 16-to-4 ratio and the 250 MHz clock are the paper's; the packing
// is this design's.
//
// Interface: din / din_tog from the filter matrix (187.5 MHz domain, held 3
// of its cycles; din_tog toggles per vector); clk_250 has rising edges
// aligned with the 62.5 MHz sample clock. dout / dout_valid are driven from
// registers. Latency: word 0 is valid the cycle after the toggle is seen.
module output_mux #(
  parameter int unsigned LANES     = wfd_pkg::MN,
  parameter int unsigned OUT_LANES = 4,
  parameter int unsigned DW        = wfd_pkg::DW,
  localparam int unsigned NWORD    = LANES / OUT_LANES
) (
  input  logic                      clk_250,
  input  logic                      rst,
  input  logic signed [DW-1:0]      din [LANES],
  input  logic                      din_tog,
  output logic [OUT_LANES*DW-1:0]   dout,
  output logic                      dout_valid
);

  logic                        tog_q;
  logic [DW-1:0]               buffer [LANES];
  logic [$clog2(NWORD)-1:0]    word;
  logic                        active;

  always_ff @(posedge clk_250) begin
    if (rst) begin
      tog_q  <= din_tog;
      word   <= '0;
      active <= 1'b0;
      for (int i = 0; i < LANES; i++) buffer[i] <= '0;
    end else begin
      tog_q <= din_tog;
      if (din_tog != tog_q) begin
        for (int i = 0; i < LANES; i++) buffer[i] <= din[i];
        word   <= '0;
        active <= 1'b1;
      end else if (active) begin
        if (32'(word) == NWORD - 1) active <= 1'b0;
        else                        word   <= word + 1'b1;
      end
    end
  end

  // Rate rule: a vector arrives every NWORD cycles of clk_250, so a new one
  // may only come once the last word of the previous one is on the output.
  always_ff @(posedge clk_250)
    if (!rst && din_tog != tog_q)
      assert (!active || 32'(word) == NWORD - 1)
        else $error("output_mux: new vector before the previous one was sent");

  always_comb begin
    for (int k = 0; k < OUT_LANES; k++) dout[k*DW +: DW] = buffer[32'(word)*OUT_LANES + k];
    dout_valid = active;
  end

endmodule
