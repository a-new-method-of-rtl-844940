// tb_gain_offset_corr: checks the per-lane gain and offset correction.
//
// Random gains (about 0.9 to 1.1, plus a few large ones that force
// saturation) and offsets are set for the four channels, and random 16-bit
// lanes are applied every 62.5 MHz cycle. One cycle later each lane must
// equal round((x - offset[p mod 4]) * gain / 2^16), clipped to 16 bits, with
// the result computed here in 64-bit integers; the toggle must follow the
// input toggle with the same one-cycle delay.
`timescale 1ps/1ps
module tb_gain_offset_corr;
  localparam int LANES = 16, M = 4;
  logic clk = 1'b0, rst = 1'b1;
  logic signed [15:0] din [LANES], dout [LANES], offset [M];
  logic [17:0] gain [M];
  logic din_tog = 1'b0, dout_tog;
  int checks = 0, failures = 0, saturated = 0;

  initial begin #10000; forever begin clk = 1'b1; #8000; clk = 1'b0; #8000; end end

  gain_offset_corr dut (.*);

  function automatic longint expect_val(input longint x, input longint off, input longint g);
    longint v;
    v = (x - off) * g + 32768;
    v = (v >= 0) ? (v / 65536) : -((-v + 65535) / 65536);   // floor division
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
  endfunction

  initial begin : watchdog
    #(16000 * 10000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [15:0] x_prev [LANES];
    logic tog_prev;
    for (int p = 0; p < LANES; p++) din[p] = '0;
    for (int c = 0; c < M; c++) begin offset[c] = '0; gain[c] = 18'd65536; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int it = 0; it < 2000; it++) begin
      if (it % 100 == 0)
        for (int c = 0; c < M; c++) begin
          offset[c] = 16'(int'($urandom % 1024) - 512);
          gain[c]   = (it % 500 == 0) ? 18'(131072 + $urandom % 100000)
                                      : 18'(58982 + $urandom % 13107);
        end
      for (int p = 0; p < LANES; p++) din[p] = 16'($urandom);
      din_tog = ~din_tog;
      x_prev = din;
      tog_prev = din_tog;
      @(posedge clk);
      #1;
      checks++;
      if (dout_tog !== tog_prev) begin failures++; $display("FAIL toggle"); end
      for (int p = 0; p < LANES; p++) begin
        longint e;
        e = expect_val(longint'(x_prev[p]), longint'(offset[p % M]), longint'(gain[p % M]));
        if (e == 32767 || e == -32768) saturated++;
        checks++;
        if (longint'(dout[p]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d x=%0d off=%0d g=%0d: got %0d exp %0d",
                                      p, x_prev[p], offset[p%M], gain[p%M], dout[p], e);
        end
      end
      @(negedge clk);
    end
    checks++;
    if (saturated == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("saturated results: %0d", saturated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
