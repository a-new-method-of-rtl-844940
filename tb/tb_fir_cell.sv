// tb_fir_cell: checks one time-multiplexed 5-tap FIR cell.
//
// For random taps and coefficients (including full-scale extremes) the
// testbench runs the three multiplier slots of one 62.5 MHz sample on the
// 187.5 MHz clock and checks that the cell result equals the 5-term dot
// product computed here, and that it is ready exactly after the third slot,
// i.e. 3 fast cycles per sample as the 2-multiplier schedule requires.
`timescale 1ps/1ps
module tb_fir_cell;
  localparam int TAPS = 5;
  logic clk = 1'b0, run = 1'b0;
  logic [1:0] slot = '0;
  logic signed [15:0] x [TAPS];
  logic signed [17:0] coef [TAPS];
  logic signed [41:0] acc;
  int checks = 0, failures = 0;

  initial begin #10000; forever begin clk = 1'b1; #2667; clk = 1'b0; #2666; end end

  fir_cell dut (.*);

  initial begin : watchdog
    #(5333 * 40000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e, partial;
    @(negedge clk);
    for (int it = 0; it < 3000; it++) begin
      for (int t = 0; t < TAPS; t++) begin
        x[t]    = (it % 50 == 1) ? 16'sh8000 : 16'($urandom);
        coef[t] = (it % 50 == 1) ? 18'sh20000 : 18'($urandom);
      end
      e = 0;
      for (int t = 0; t < TAPS; t++) e += longint'(x[t]) * longint'(coef[t]);
      partial = longint'(x[0]) * longint'(coef[0]) + longint'(x[1]) * longint'(coef[1]);
      run = 1'b1;
      for (int s = 0; s < 3; s++) begin
        slot = 2'(s);
        @(negedge clk);
        if (s == 0) begin
          checks++;
          if (longint'(acc) != partial) begin failures++; $display("FAIL slot 0 partial sum"); end
        end
      end
      run = 1'b0;
      checks++;
      if (longint'(acc) != e) begin
        failures++;
        if (failures < 10) $display("FAIL it %0d: got %0d exp %0d", it, acc, e);
      end
      // an idle cycle must not disturb the result
      if (it % 7 == 0) begin
        @(negedge clk);
        checks++;
        if (longint'(acc) != e) begin failures++; $display("FAIL result lost while idle"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
