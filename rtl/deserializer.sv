// deserializer: four 250 Msps core streams to sixteen 62.5 Msps lanes.
//
// Each clk_250 cycle brings one sample of each of the M = 4 cores, already in
// sampling order (ADC1_core1, ADC2_core1, ADC1_core2, ADC2_core2), i.e. four
// consecutive samples of the 1 Gsps stream. The block delays them by 0..N-1
// cycles and keeps every N-th group (z^-1..z^-3 then decimation by 4 in the
// paper), so that the output vector holds N*M = 16 consecutive samples with
// lane N_slot*M + core, which is also the reordering the paper places in
// front of the filter matrix.
//
// Interface: din[c] in; dout[16] plus dout_tog, which toggles each time dout
// takes a new vector. dout is held for N clk_250 cycles, so the 62.5 MHz
// domain (clk_250 / 4, rising edges aligned) reads each vector exactly once.
// Latency: one clk_250 cycle after the last group of a vector.
module deserializer #(
  parameter int unsigned M  = wfd_pkg::M,
  parameter int unsigned N  = wfd_pkg::N,
  parameter int unsigned DW = wfd_pkg::DW
) (
  input  logic                 clk_250,
  input  logic                 rst,
  input  logic signed [DW-1:0] din  [M],
  output logic signed [DW-1:0] dout [M*N],
  output logic                 dout_tog
);

  logic signed [DW-1:0] hold [M*(N-1)];
  logic [$clog2(N)-1:0] slot;

  always_ff @(posedge clk_250) begin
    if (rst) begin
      slot     <= '0;
      dout_tog <= 1'b0;
      for (int i = 0; i < M*(N-1); i++) hold[i] <= '0;
      for (int i = 0; i < M*N; i++)     dout[i] <= '0;
    end else begin
      slot <= slot + 1'b1;
      if (32'(slot) == N-1) begin
        for (int i = 0; i < M*(N-1); i++) dout[i] <= hold[i];
        for (int c = 0; c < M; c++)       dout[M*(N-1)+c] <= din[c];
        dout_tog <= ~dout_tog;
      end else begin
        for (int c = 0; c < M; c++) hold[32'(slot)*M+c] <= din[c];
      end
    end
  end

endmodule
