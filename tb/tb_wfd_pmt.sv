// tb_wfd_pmt: end-to-end workload test of the digitizer at its default
// parameters with a train of PMT-like negative pulses (3.10 ns rise, 9.90 ns
// fall, about 2900 LSB high, one every 256.37 ns) as input, the time skews
// measured on the board (0, -0.0076, -0.0046, -0.0089 sample periods) and
// small assumed gain and offset mismatches. See wfd_e2e for what is checked.
`timescale 1ps/1ps
module tb_wfd_pmt;
  wfd_e2e #(.WORKLOAD(3), .NOUT(4096), .MIN_SNR_DB(60.0)) u_test ();
  // backstop far beyond the test's own watchdog
  initial begin
    #(64'd2_000_000_000);
    $display("FAIL time limit of the workload test");
    $finish;
  end
endmodule
