// tb_adc_sync_reset: checks the ADC reset sequencer.
//
// The two 500 MHz ADC clocks are generated 180 degrees apart. adc_reset is
// raised and dropped at pseudo-random instants; each time the testbench
// checks that both RESETN outputs are low while adc_reset is high, that
// ADC1_RESETN rises at the first falling edge of ADC1's clock after the
// release, and that ADC2_RESETN rises at the first falling edge of ADC2's
// clock after that, i.e. half a 500 MHz period later. Expected instants are
// computed from the clock period, not from the design.
`timescale 1ps/1ps
module tb_adc_sync_reset;
  localparam time PER = 2000;   // 500 MHz
  logic adc1_clk = 1'b0, adc2_clk, adc_reset = 1'b1;
  logic adc1_resetn, adc2_resetn;
  int checks = 0, failures = 0;
  time t1, t2;

  always #(PER/2) adc1_clk = ~adc1_clk;
  assign adc2_clk = ~adc1_clk;

  adc_sync_reset dut (.*);

  always @(posedge adc1_resetn) t1 = $time;
  always @(posedge adc2_resetn) t2 = $time;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #(PER * 2000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    time tr, e1;
    int unsigned wait_ps;
    for (int it = 0; it < 40; it++) begin
      adc_reset = 1'b1;
      wait_ps = 32'(PER * 3) + $urandom % 32'(PER);
      repeat (wait_ps) #1;
      check(!adc1_resetn && !adc2_resetn, "both resets low while adc_reset high");
      // release at an instant that is not on a clock edge
      wait_ps = 1 + $urandom % 32'(PER/2 - 2);
      repeat (wait_ps) #1;
      adc_reset = 1'b0;
      tr = $time;
      t1 = 0; t2 = 0;
      #(PER * 4);
      // first falling edge of adc1_clk after tr: adc1_clk falls at PER*k
      e1 = ((tr / PER) + 1) * PER;
      check(t1 == e1, "ADC1_RESETN released on first adc1 falling edge");
      check(t2 == e1 + PER/2, "ADC2_RESETN released half a period later");
      check(adc1_resetn && adc2_resetn, "both resets released");
      if (t1 != e1 || t2 != e1 + PER/2)
        $display("  release %0t: t1=%0t (exp %0t) t2=%0t (exp %0t)", tr, t1, e1, t2, e1 + PER/2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
