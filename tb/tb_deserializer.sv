// tb_deserializer: checks the 4-to-16 lane deserializer.
//
// Random samples are fed four per 250 MHz cycle in sampling order. At every
// rising edge of the aligned 62.5 MHz clock the testbench reads the output
// vector, as the next stage does, and checks that it is new (the toggle
// changed), that it holds 16 consecutive samples with lane 4*slot + core,
// and that each vector follows the previous one by exactly 16 samples.
`timescale 1ps/1ps
module tb_deserializer;
  localparam int M = 4, N = 4;
  logic clk_250 = 1'b0, clk_62m5 = 1'b0, rst = 1'b1;
  logic signed [15:0] din [M];
  logic signed [15:0] dout [M*N];
  logic dout_tog, tog_prev;
  int checks = 0, failures = 0;

  initial begin #10000; forever begin clk_250  = 1'b1; #2000; clk_250  = 1'b0; #2000; end end
  initial begin #10000; forever begin clk_62m5 = 1'b1; #8000; clk_62m5 = 1'b0; #8000; end end

  deserializer dut (.*);

  logic signed [15:0] stream [8192];
  int widx = 0;
  int base = -1;

  initial begin : watchdog
    #(16000 * 5000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk_250) begin
    for (int c = 0; c < M; c++) din[c] <= stream[(widx + c) % 8192];
    if (!rst) widx <= widx + M;
  end

  always @(posedge clk_62m5) begin
    if (!rst && widx > 64) begin
      int found;
      checks++;
      if (dout_tog == tog_prev) begin failures++; $display("FAIL no new vector at %0t", $time); end
      found = -1;
      if (base < 0) begin
        for (int b = 0; b < widx; b++) begin
          bit ok;
          ok = 1'b1;
          for (int i = 0; i < M*N; i++) if (dout[i] !== stream[(b + i) % 8192]) ok = 1'b0;
          if (ok && found < 0) found = b;
        end
        base = found;
        checks++;
        if (found < 0 || found % M != 0) begin failures++; $display("FAIL first vector not found"); end
      end else begin
        base += M*N;
        for (int i = 0; i < M*N; i++) begin
          checks++;
          if (dout[i] !== stream[(base + i) % 8192]) begin
            failures++;
            $display("FAIL lane %0d of vector at %0d: %h exp %h", i, base, dout[i], stream[(base+i)%8192]);
          end
        end
      end
    end
    tog_prev <= dout_tog;
  end

  initial begin
    for (int i = 0; i < 8192; i++) stream[i] = 16'($urandom);
    repeat (3) @(posedge clk_62m5);
    @(negedge clk_250);
    rst = 1'b0;
    repeat (300) @(posedge clk_62m5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
