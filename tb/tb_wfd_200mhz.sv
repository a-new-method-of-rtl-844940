// tb_wfd_200mhz: end-to-end workload test of the digitizer at its default
// parameters with the time skews measured on the board in the paper
// (0, -0.0076, -0.0046, -0.0089 sample periods), small assumed gain and
// offset mismatches and a single near-full-scale tone of 200 MHz (the top
// of the paper's tested band). See wfd_e2e for what is checked.
`timescale 1ps/1ps
module tb_wfd_200mhz;
  wfd_e2e #(.WORKLOAD(2), .NOUT(4096), .MIN_SNR_DB(60.0)) u_test ();
  // backstop far beyond the test's own watchdog
  initial begin
    #(64'd2_000_000_000);
    $display("FAIL time limit of the workload test");
    $finish;
  end
endmodule
