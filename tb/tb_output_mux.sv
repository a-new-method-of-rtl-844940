// tb_output_mux: checks the 16-to-4 lane output multiplexer.
//
// Random 16-sample vectors are presented the way the filter matrix does:
// from the 187.5 MHz domain, one every three of its cycles, each marked by a
// toggle. On the aligned 250 MHz clock the testbench collects every valid
// 64-bit word and checks that the samples come out in time order (lane 0 of
// a vector first, four samples per word, earliest in bits 15:0) and that, once
// running, a valid word leaves on every 250 MHz cycle (1 Gsps sustained).
`timescale 1ps/1ps
module tb_output_mux;
  localparam int LANES = 16, NV = 300;
  logic clk_250 = 1'b0, clk_187m5 = 1'b0, rst = 1'b1;
  logic signed [15:0] din [LANES];
  logic din_tog = 1'b0;
  logic [63:0] dout;
  logic dout_valid;
  int checks = 0, failures = 0;

  initial begin #10000; forever begin clk_250 = 1'b1; #2000; clk_250 = 1'b0; #2000; end end
  initial begin #10000; forever begin
    clk_187m5 = 1'b1; #2667; clk_187m5 = 1'b0; #2666;
    clk_187m5 = 1'b1; #2667; clk_187m5 = 1'b0; #2667;
    clk_187m5 = 1'b1; #2667; clk_187m5 = 1'b0; #2666;
  end end

  output_mux dut (.*);

  logic signed [15:0] smp [NV*LANES];
  int nsent = 0, nrecv = 0, gaps = 0;
  bit started = 1'b0;

  initial begin : watchdog
    #(16000 * (NV + 1000));
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk_250) begin
    if (!rst) begin
      if (dout_valid) begin
        started <= 1'b1;
        for (int k = 0; k < 4; k++) begin
          checks++;
          if ($signed(dout[k*16 +: 16]) !== smp[nrecv + k]) begin
            failures++;
            if (failures < 10) $display("FAIL sample %0d: got %h exp %h", nrecv + k, dout[k*16 +: 16], smp[nrecv+k]);
          end
        end
        nrecv += 4;
      end else if (started && nrecv < NV*LANES) gaps++;
    end
  end

  initial begin
    for (int i = 0; i < NV*LANES; i++) smp[i] = 16'($urandom);
    for (int i = 0; i < LANES; i++) din[i] = '0;
    repeat (4) @(posedge clk_250);
    rst = 1'b0;
    repeat (2) @(posedge clk_187m5);
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < LANES; i++) din[i] <= smp[v*LANES + i];
      din_tog <= ~din_tog;
      repeat (3) @(posedge clk_187m5);
    end
    repeat (20) @(posedge clk_250);
    checks++;
    if (nrecv != NV*LANES) begin failures++; $display("FAIL received %0d samples", nrecv); end
    checks++;
    if (gaps != 0) begin failures++; $display("FAIL %0d idle cycles inside the stream", gaps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
