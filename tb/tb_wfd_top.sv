// tb_wfd_top: end-to-end test of the digitizer at its default parameters
// with the mismatch scenario of the paper's simulation (four tones at
// fs/15 .. 4fs/15, gains 1/1.02/0.97/1.03, offsets 0/-2/1/3 LSB, skews
// 0/-0.04/0.02/-0.01 sample periods). See wfd_e2e for what is checked.
`timescale 1ps/1ps
module tb_wfd_top;
  wfd_e2e #(.WORKLOAD(0), .NOUT(4096), .MIN_SNR_DB(50.0)) u_test ();
endmodule
