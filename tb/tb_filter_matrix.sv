// tb_filter_matrix: checks the 16x16 poly-phase filter matrix.
//
// Random coefficients are written to every cell through the configuration
// port, then random 16-lane input vectors are applied, one per 62.5 MHz
// cycle, the way the gain/offset stage drives them. Every output vector must
// arrive one per 62.5 MHz cycle at a constant latency, and output vector k
// must equal, for filter rows q,
//   round(sum_p sum_t c[q][p][t] * x_p[k-i0(q,p)-t] / 2^16), saturated,
// and for the four delay rows the plain sample x_p[k-lag] of the skew-free
// channel. The cell windows i0, the delay-row positions and the reference
// sums are computed here from the index rules, independently of the design.
// Small and full-scale inputs alternate so that saturation also occurs.
`timescale 1ps/1ps
module tb_filter_matrix;
  localparam int M = 4, N = 4, MN = 16, TAPS = 5, L = 40, D = 43;
  localparam int NVEC = 400;
  logic clk_62m5 = 1'b0, clk_187m5 = 1'b0, rst = 1'b1;
  logic coef_we = 1'b0;
  logic [10:0] coef_addr = '0;
  logic signed [17:0] coef_wdata = '0;
  logic signed [15:0] din [MN], dout [MN];
  logic din_tog = 1'b0, dout_tog;
  int checks = 0, failures = 0, saturated = 0, delay_checked = 0;

  initial begin #10000; forever begin clk_62m5 = 1'b1; #8000; clk_62m5 = 1'b0; #8000; end end
  initial begin #10000; forever begin
    clk_187m5 = 1'b1; #2667; clk_187m5 = 1'b0; #2666;
    clk_187m5 = 1'b1; #2667; clk_187m5 = 1'b0; #2667;
    clk_187m5 = 1'b1; #2667; clk_187m5 = 1'b0; #2666;
  end end

  filter_matrix dut (
    .clk (clk_187m5), .rst (rst), .cfg_clk (clk_62m5),
    .coef_we (coef_we), .coef_addr (coef_addr), .coef_wdata (coef_wdata),
    .din (din), .din_tog (din_tog), .dout (dout), .dout_tog (dout_tog)
  );

  int c [MN][MN][TAPS];
  int x [NVEC][MN];

  function automatic int ceil_div(input int a, input int b);
    return int'($ceil(real'(a) / real'(b)));
  endfunction

  function automatic int xv(input int l, input int p);
    return (l < 0) ? 0 : x[l][p];
  endfunction

  function automatic int expected(input int k, input int q);
    longint s;
    int pd;
    pd = ((q - D) % MN + MN) % MN;
    if (pd % M == 0) return xv(k - (D + pd - q) / MN, pd);   // delay row
    s = 0;
    for (int p = 0; p < MN; p++)
      for (int t = 0; t < TAPS; t++)
        s += longint'(c[q][p][t]) * longint'(xv(k - ceil_div(D + p - L - q, MN) - t, p));
    s = s + 32768;
    s = (s >= 0) ? s / 65536 : -((-s + 65535) / 65536);
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return int'(s);
  endfunction

  initial begin : watchdog
    #(16000 * (NVEC + 3000));
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor in the 187.5 MHz domain.
  int nout = 0;
  logic tog_seen = 1'b0;
  time t_first_in, t_first_out, t_last_out;
  always @(posedge clk_187m5) begin
    if (!rst && dout_tog != tog_seen) begin
      tog_seen <= dout_tog;
      if (nout == 0) t_first_out = $time;
      else begin
        checks++;
        if ($time - t_last_out != 16000) begin
          failures++;
          $display("FAIL output spacing %0t", $time - t_last_out);
        end
      end
      t_last_out = $time;
      if (nout < NVEC)
        for (int q = 0; q < MN; q++) begin
          int e;
          e = expected(nout, q);
          if (e == 32767 || e == -32768) saturated++;
          if (((q - D) % MN + MN) % MN % M == 0) delay_checked++;
          checks++;
          if (int'(dout[q]) != e) begin
            failures++;
            if (failures < 40) $display("FAIL vector %0d row %0d: got %0d exp %0d", nout, q, dout[q], e);
          end
        end
      nout++;
    end
  end

  initial begin
    for (int q = 0; q < MN; q++)
      for (int p = 0; p < MN; p++)
        for (int t = 0; t < TAPS; t++) c[q][p][t] = int'($urandom % 65536) - 32768;
    for (int l = 0; l < NVEC; l++)
      for (int p = 0; p < MN; p++)
        x[l][p] = ((l / 50) % 4 == 3) ? int'($signed(16'($urandom)))
                                      : int'($urandom % 2048) - 1024;
    for (int p = 0; p < MN; p++) din[p] = '0;
    // load coefficients
    @(posedge clk_62m5);
    for (int q = 0; q < MN; q++)
      for (int p = 0; p < MN; p++)
        for (int t = 0; t < TAPS; t++) begin
          coef_we    <= 1'b1;
          coef_addr  <= {4'(q), 4'(p), 3'(t)};
          coef_wdata <= 18'(c[q][p][t]);
          @(posedge clk_62m5);
        end
    coef_we <= 1'b0;
    rst <= 1'b0;
    repeat (3) @(posedge clk_62m5);
    // stream the input vectors, one per 62.5 MHz cycle
    for (int l = 0; l < NVEC; l++) begin
      for (int p = 0; p < MN; p++) din[p] <= 16'(x[l][p]);
      din_tog <= ~din_tog;
      if (l == 0) t_first_in = $time;
      @(posedge clk_62m5);
    end
    repeat (4) @(posedge clk_62m5);
    checks++;
    if (nout != NVEC) begin failures++; $display("FAIL %0d outputs for %0d inputs", nout, NVEC); end
    checks++;
    if (saturated == 0 || delay_checked == 0) begin failures++; $display("FAIL saturation/delay rows not exercised"); end
    $display("latency input->output: %0t ps; saturated %0d; delay-row samples %0d",
             t_first_out - t_first_in, saturated, delay_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
