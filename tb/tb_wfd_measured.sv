// tb_wfd_measured: end-to-end workload test of the digitizer at its default
// parameters with the time skews measured on the board in the paper
// (0, -0.0076, -0.0046, -0.0089 sample periods), small assumed gain and
// offset mismatches and a single near-full-scale tone of 40.13 MHz (the
// frequency of the paper's spectrum plots). See wfd_e2e for what is checked.
`timescale 1ps/1ps
module tb_wfd_measured;
  wfd_e2e #(.WORKLOAD(1), .NOUT(4096), .MIN_SNR_DB(60.0)) u_test ();
  // backstop far beyond the test's own watchdog
  initial begin
    #(64'd2_000_000_000);
    $display("FAIL time limit of the workload test");
    $finish;
  end
endmodule
