// tb_adc_receiver: checks the 1:2 ADC receiver.
//
// A stream of random 12-bit words is driven at 500 Mwords/s with the ADC's
// output clock level as the flag (1 for core 1's words, 0 for core 2's). The
// stream is started once in each of the two possible phases relative to the
// 250 MHz clock, so that both the direct and the straddling pairing occur.
// Every 250 MHz cycle the outputs must be the next (core1, core2) pair of the
// stream, left-justified into 16 bits, at a constant latency.
`timescale 1ps/1ps
module tb_adc_receiver;
  logic clk_500 = 1'b0, clk_250 = 1'b0, rst = 1'b1;
  logic [11:0] adc_d = '0;
  logic adc_flag = 1'b0;
  logic signed [15:0] core1, core2;
  int checks = 0, failures = 0;
  int straddle_runs = 0, direct_runs = 0;

  initial begin #10000; forever begin clk_500 = 1'b1; #1000; clk_500 = 1'b0; #1000; end end
  initial begin #10000; forever begin clk_250 = 1'b1; #2000; clk_250 = 1'b0; #2000; end end

  adc_receiver dut (.*);

  logic [11:0] stream [4096];
  int widx;          // next word to drive
  int pidx;          // next pair expected
  bit synced;

  initial begin : watchdog
    #(4000 * 20000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drive one word per 500 MHz cycle, changed mid-cycle.
  always @(negedge clk_500) begin
    if (widx >= 0) begin
      adc_d    <= stream[widx % 4096];
      adc_flag <= (widx % 2) == 0;
      widx     <= widx + 1;
    end
  end

  // Check the pairs.
  always @(posedge clk_250) begin
    if (!rst && widx > 8) begin
      if (!synced) begin
        // find which pair is on the outputs
        for (int i = 0; i < widx / 2; i++)
          if (core1 == {stream[2*i], 4'h0} && core2 == {stream[2*i+1], 4'h0}) begin
            pidx   = i + 1;
            synced = 1'b1;
          end
        checks++;
        if (!synced) begin failures++; $display("FAIL no pair found at %0t", $time); end
      end else begin
        checks++;
        if (core1 !== {stream[2*pidx], 4'h0} || core2 !== {stream[2*pidx+1], 4'h0}) begin
          failures++;
          $display("FAIL pair %0d: got %h %h exp %h %h", pidx, core1, core2,
                   {stream[2*pidx], 4'h0}, {stream[2*pidx+1], 4'h0});
        end
        pidx++;
      end
    end
  end

  initial begin
    for (int i = 0; i < 4096; i++) stream[i] = 12'($urandom);
    for (int run = 0; run < 2; run++) begin
      rst = 1'b1; widx = -1; synced = 1'b0;
      repeat (4) @(posedge clk_250);
      rst = 1'b0;
      // start the stream on either phase of clk_250
      @(posedge clk_250);
      if (run == 1) begin @(posedge clk_500); straddle_runs++; end else direct_runs++;
      @(negedge clk_500);
      widx = 0;
      repeat (500) @(posedge clk_250);
    end
    checks++;
    if (straddle_runs == 0 || direct_runs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
