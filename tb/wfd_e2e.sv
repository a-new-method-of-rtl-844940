// wfd_e2e: end-to-end test body for the waveform digitizer, instantiated by
// the workload testbenches (tb_wfd_top, tb_wfd_measured, tb_wfd_200mhz,
// tb_wfd_pmt).
//
// Two ADC models, clocked 180 degrees apart from the 500 MHz clock and reset
// through the design's reset sequencer, sample the workload's input (tones or pulses) with its
// gain, offset and time-skew mismatches. wfd_top, at its default
// parameters, corrects the stream and the testbench reads the FIFO the way
// the PCI Express core would. It then checks:
//   - the four cores sample in the order ADC1_core1, ADC2_core1, ADC1_core2,
//     ADC2_core2 (the order the reset sequencer must establish);
//   - every output sample equals the reference computed here from the
//     recorded ADC codes: gain/offset correction, then the full-rate
//     reconstruction y[N] = sum_n' f_p(n')[N - n' + p(n')] with the filters
//     designed in tb_signal_pkg, rounded to 16 bits (exact match);
//   - delay-row and filter-row outputs both occur;
//   - the error against the ideal delayed input is far below that of the
//     uncorrected interleaved stream (SNR reported for both);
//   - with reads stopped the FIFO fills and reports overflow.
`timescale 1ps/1ps
module wfd_e2e #(
  parameter int WORKLOAD = 0,     // 0: Sec. 3.2 simulation, 1: measured skews 40.13 MHz, 2: 200 MHz, 3: PMT pulses
  parameter int NOUT     = 4096,  // output samples checked
  parameter real MIN_SNR_DB = 55.0
);
  import wfd_pkg::*;
  localparam time T0 = 10000;

  logic clk_500 = 1'b0, clk_250 = 1'b0, clk_62m5 = 1'b0, clk_187m5 = 1'b0, pcie_clk = 1'b0;
  logic rst = 1'b1, pcie_rst = 1'b1, adc_reset = 1'b1;
  logic adc1_clk, adc2_clk, adc1_resetn, adc2_resetn;
  logic [11:0] adc1_d, adc2_d;
  logic adc1_clkout, adc2_clkout;
  logic signed [15:0] offset [4];
  logic [17:0] gain [4];
  logic coef_we = 1'b0;
  logic [10:0] coef_addr = '0;
  logic signed [17:0] coef_wdata = '0;
  logic pcie_rd_en = 1'b0;
  logic [63:0] pcie_rdata;
  logic pcie_empty, fifo_full, fifo_overflow;
  int checks = 0, failures = 0;

  initial begin #T0; forever begin clk_500  = 1'b1; #1000; clk_500  = 1'b0; #1000; end end
  initial begin #T0; forever begin clk_250  = 1'b1; #2000; clk_250  = 1'b0; #2000; end end
  initial begin #T0; forever begin clk_62m5 = 1'b1; #8000; clk_62m5 = 1'b0; #8000; end end
  initial begin #T0; forever begin
    clk_187m5 = 1'b1; #2667; clk_187m5 = 1'b0; #2666;
    clk_187m5 = 1'b1; #2667; clk_187m5 = 1'b0; #2667;
    clk_187m5 = 1'b1; #2667; clk_187m5 = 1'b0; #2666;
  end end
  initial begin #(T0 + 777); forever begin pcie_clk = 1'b1; #2001; pcie_clk = 1'b0; #2001; end end
  assign adc1_clk = clk_500;
  assign adc2_clk = ~clk_500;

  kad5512_model #(.CHIP(0)) u_adc1 (.clk(adc1_clk), .resetn(adc1_resetn), .d(adc1_d), .clkout(adc1_clkout));
  kad5512_model #(.CHIP(1)) u_adc2 (.clk(adc2_clk), .resetn(adc2_resetn), .d(adc2_d), .clkout(adc2_clkout));

  wfd_top u_top (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    #(16000 * (NOUT + 20000));
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- FIFO reader (PCI Express side) ----------------
  int out [];
  int nout = 0;
  bit reading = 1'b1, rd_q = 1'b0;
  int empty_cycles = 0;
  always @(posedge pcie_clk) begin
    if (!pcie_rst) begin
      if (rd_q && nout + 4 <= NOUT)
        for (int k = 0; k < 4; k++) begin out[nout] = int'($signed(pcie_rdata[16*k +: 16])); nout++; end
      rd_q = pcie_rd_en && !pcie_empty;
      if (pcie_empty && nout > 0 && reading) empty_cycles++;
    end
    pcie_rd_en <= reading;
  end

  // ---------------- reference model ----------------
  int gain_cfg [4], off_cfg [4];

  function automatic int corrected(input int n);
    longint v;
    int c;
    if (!tb_signal_pkg::produced.exists(n)) return 0;
    c = tb_signal_pkg::who[n];
    v = (longint'(tb_signal_pkg::produced[n]) * 16 - longint'(off_cfg[c])) * longint'(gain_cfg[c]) + 32768;
    v = (v >= 0) ? v / 65536 : -((-v + 65535) / 65536);
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return int'(v);
  endfunction

  // Reference output for global instant nn, lane 0 at instants = phi mod 16.
  function automatic int ref_y(input int nn, input int phi);
    longint s;
    int p;
    s = 0;
    for (int np = nn - D - L + 1; np <= nn - D + L; np++) begin
      int j;
      p = ((np - phi) % MN + MN) % MN;
      j = nn - np + p;
      if (j >= D + p - L && j < D + p + L)
        s += longint'(tb_signal_pkg::ftab[p][j - (D + p - L)]) * longint'(corrected(np));
    end
    s = s + 32768;
    s = (s >= 0) ? s / 65536 : -((-s + 65535) / 65536);
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return int'(s);
  endfunction

  initial begin
    int first_n, phi_best, delta_best, n_ok;
    int seq_checks, delay_rows, filter_rows;
    int unsigned release_ps;
    real sig, err_after, err_before, ideal, snr_after, snr_before;
    bit found;
    out = new[NOUT];
    // ---- workload ----
    for (int k = 0; k < 4; k++) tb_signal_pkg::amp[k] = 0.0;
    case (WORKLOAD)
      0: begin   // paper Sec. 3.2: four tones fs/15..4fs/15, 12-bit model
        for (int k = 0; k < 4; k++) begin
          tb_signal_pkg::amp[k]  = 450.0;
          tb_signal_pkg::freq[k] = real'(k + 1) / 15.0;
        end
        tb_signal_pkg::gain = '{1.0, 1.02, 0.97, 1.03};
        tb_signal_pkg::offs = '{0.0, -2.0, 1.0, 3.0};
        tb_signal_pkg::skew = '{0.0, -0.04, 0.02, -0.01};
      end
      1: begin   // paper Sec. 3.3 measured skews, 40.13 MHz tone (Fig. 13)
        tb_signal_pkg::amp[0]  = 1900.0;
        tb_signal_pkg::freq[0] = 0.04013;
        tb_signal_pkg::gain = '{1.0, 1.004, 0.997, 1.002};
        tb_signal_pkg::offs = '{0.0, 1.5, -0.8, 2.2};
        tb_signal_pkg::skew = '{0.0, -0.0076, -0.0046, -0.0089};
      end
      3: begin   // measured skews, PMT-like negative pulses (Sec. 4.3)
        tb_signal_pkg::pulse_mode   = 1'b1;
        tb_signal_pkg::pulse_period = 256.37;
        tb_signal_pkg::pulse_base   = 1000.0;
        tb_signal_pkg::amp[0]       = -2900.0;
        tb_signal_pkg::gain = '{1.0, 1.004, 0.997, 1.002};
        tb_signal_pkg::offs = '{0.0, 1.5, -0.8, 2.2};
        tb_signal_pkg::skew = '{0.0, -0.0076, -0.0046, -0.0089};
      end
      default: begin   // measured skews, 200 MHz tone (top of the tested band)
        tb_signal_pkg::amp[0]  = 1900.0;
        tb_signal_pkg::freq[0] = 0.2;
        tb_signal_pkg::gain = '{1.0, 1.004, 0.997, 1.002};
        tb_signal_pkg::offs = '{0.0, 1.5, -0.8, 2.2};
        tb_signal_pkg::skew = '{0.0, -0.0076, -0.0046, -0.0089};
      end
    endcase
    tb_signal_pkg::t0 = T0;
    tb_signal_pkg::design_filters();
    for (int c = 0; c < 4; c++) begin
      gain_cfg[c] = int'($floor(65536.0 / tb_signal_pkg::gain[c] + 0.5));
      off_cfg[c]  = int'($floor(16.0 * tb_signal_pkg::offs[c] + 0.5));
      gain[c]   = 18'(gain_cfg[c]);
      offset[c] = 16'(off_cfg[c]);
    end
    // ---- configuration: every cell address, from the designed filters ----
    @(posedge clk_62m5);
    for (int q = 0; q < MN; q++)
      for (int p = 0; p < MN; p++)
        for (int t = 0; t < TAPS; t++) begin
          int j;
          j = MN * (cell_i0(q, p, D, L, MN) + t) + q;
          coef_we    <= 1'b1;
          coef_addr  <= {4'(q), 4'(p), 3'(t)};
          coef_wdata <= 18'(tb_signal_pkg::ftab[p][j - (D + p - L)]);
          @(posedge clk_62m5);
        end
    coef_we  <= 1'b0;
    rst      <= 1'b0;
    pcie_rst <= 1'b0;
    // ---- release the ADCs at an arbitrary instant ----
    release_ps = 1 + $urandom % 1998;
    repeat (release_ps) #1;
    // samples taken before the reset sequence (random power-up state) are discarded
    tb_signal_pkg::produced.delete();
    tb_signal_pkg::who.delete();
    adc_reset = 1'b0;
    wait (nout >= NOUT);
    // ---- stop reading: the FIFO must fill and overflow ----
    reading = 1'b0;
    repeat (1200) @(posedge clk_250);
    check(fifo_full && fifo_overflow, "FIFO full and overflow after reads stop");

    // ---- sampling order (sequence I) ----
    seq_checks = 0;
    first_n = 1 << 30;
    foreach (tb_signal_pkg::who[n]) if (n < first_n) first_n = n;
    foreach (tb_signal_pkg::who[n])
      if (tb_signal_pkg::who[n] == 0 && tb_signal_pkg::who.exists(n + 3)) begin
        seq_checks++;
        check(tb_signal_pkg::who[n+1] == 1 && tb_signal_pkg::who[n+2] == 2 && tb_signal_pkg::who[n+3] == 3,
              "sampling sequence I");
        if (seq_checks > 200) break;
      end
    check(seq_checks > 0, "sampling order observed");

    // ---- align output stream with the reference ----
    found = 1'b0;
    for (int phi0 = 0; phi0 < MN && !found; phi0++) begin
      if (!tb_signal_pkg::who.exists(phi0 + first_n) || tb_signal_pkg::who[phi0 + first_n] != 0) continue;
      for (int dlt = first_n - 2000; dlt < first_n + 4000 && !found; dlt++) begin
        bit ok;
        ok = 1'b1;
        for (int k = 1000; k < 1300 && ok; k++)   // longer than a pulse period
          if (out[k] != ref_y(k + dlt, phi0 + first_n)) ok = 1'b0;
        if (ok) begin found = 1'b1; phi_best = phi0 + first_n; delta_best = dlt; end
      end
    end
    check(found, "output stream aligned with the reference");
    if (found) begin
      $display("output sample k is instant k+%0d, lane 0 at instants %0d mod 16", delta_best, phi_best % MN);
      n_ok = 0; delay_rows = 0; filter_rows = 0;
      sig = 0.0; err_after = 0.0; err_before = 0.0;
      for (int k = 1000; k < NOUT; k++) begin
        int e, nn;
        nn = k + delta_best;
        e = ref_y(nn, phi_best);
        checks++;
        if (out[k] != e) begin
          failures++;
          if (failures < 10) $display("FAIL output %0d: got %0d exp %0d", k, out[k], e);
        end else n_ok++;
        if ((((nn - phi_best) % MN + MN) % MN) % 4 == 3) delay_rows++; else filter_rows++;
        ideal = 16.0 * tb_signal_pkg::analog(real'(nn - D));
        sig += ideal * ideal;
        err_after += (real'(out[k]) - ideal) ** 2;
        err_before += (16.0 * real'(tb_signal_pkg::produced[nn - D]) - ideal) ** 2;
      end
      snr_after  = 10.0 * $log10(sig / err_after);
      snr_before = 10.0 * $log10(sig / err_before);
      $display("workload %0d: %0d samples exact; SNR before correction %.1f dB, after %.1f dB",
               WORKLOAD, n_ok, snr_before, snr_after);
      $display("delay-row samples %0d, filter-row samples %0d, FIFO empty cycles %0d",
               delay_rows, filter_rows, empty_cycles);
      check(delay_rows > 0 && filter_rows > 0, "delay rows and filter rows exercised");
      check(snr_after >= MIN_SNR_DB, "SNR after correction");
      check(snr_after > snr_before + 3.0, "correction improves SNR");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
