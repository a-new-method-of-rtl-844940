// filter_matrix: the MN x MN poly-phase filter matrix that removes the
// time-skew error of the interleaved ADC channels.
//
// The 1 Gsps stream arrives as MN = 16 lanes at 62.5 Msps, lane p holding
// sample MN*l + p. The time-skew correction of the paper is a perfect-
// reconstruction filter bank: channel p has its own 80-tap filter f_p, built
// offline from the measured skews with the paper's Eq. (2). With lane p
// holding x_p[k] = x[MN*k + p], the output is
// y[n] = sum_p sum_k f_p[n - MN*k] * x_p[k]. Written for the 16 lanes,
// output lane q (y_q[l] = y[MN*l + q]) is
//   y_q[l] = sum_p sum_t f_p[MN*(i0+t)+q] * x_p[l-i0-t],  t = 0..4,
// so each of the 16x16 (row q, column p) pairs is a 5-tap FIR cell. Rows whose
// output instant coincides with a sample of the skew-free reference channel
// reduce to a single delayed copy of that sample; with the delay D = 43 these
// are rows 4, 8, 12 and 16 (q = 3, 7, 11, 15), which hold one delay cell and
// no filters, leaving 192 filter cells and 4 delay cells as in the paper.
// Each filter cell has 2 multipliers used over 3 cycles of the 187.5 MHz
// clock; the 16 cell results of a row are summed by a pipelined adder tree,
// rounded and saturated to 16 bits. The cell structure, counts and clock are
// the paper's; D, the tap window [D+p-L, D+p+L), the coefficient format
// (signed Q2.16) and the rounding are this design's.
//
// Interface:
//   clk (187.5 MHz, three rising edges per 62.5 MHz cycle, aligned).
//   din / din_tog from the 62.5 MHz domain; a change of din_tog marks a new
//   vector, which is captured on the first clk edge that sees the change.
//   Coefficient port (cfg_clk domain, quasi-static while running):
//   coef_addr = {q[3:0], p[3:0], t[2:0]}; cells that are not filter cells
//   ignore their coefficients.
//   dout / dout_tog: dout_tog toggles when dout takes a new vector.
// Timing: one output vector per input vector, i.e. per 62.5 MHz cycle. dout
// for an input vector changes 8 clk cycles (42.7 ns) after the 62.5 MHz edge
// that presents it: capture, 3 multiply slots, 2 adder stages and a rounding
// stage. It then holds for 3 clk cycles.
module filter_matrix #(
  parameter int unsigned M     = wfd_pkg::M,
  parameter int unsigned N     = wfd_pkg::N,
  parameter int unsigned TAPS  = wfd_pkg::TAPS,
  parameter int unsigned NMULT = wfd_pkg::NMULT,
  parameter int unsigned L     = wfd_pkg::L,
  parameter int unsigned D     = wfd_pkg::D,
  parameter int unsigned DW    = wfd_pkg::DW,
  parameter int unsigned CW    = wfd_pkg::CW,
  parameter int unsigned CFRAC = wfd_pkg::CFRAC,
  localparam int unsigned MN   = M * N,
  localparam int unsigned QB   = $clog2(MN),
  localparam int unsigned TB   = $clog2(TAPS),
  localparam int unsigned AW   = 2 * QB + TB
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 cfg_clk,
  input  logic                 coef_we,
  input  logic [AW-1:0]        coef_addr,
  input  logic signed [CW-1:0] coef_wdata,
  input  logic signed [DW-1:0] din  [MN],
  input  logic                 din_tog,
  output logic signed [DW-1:0] dout [MN],
  output logic                 dout_tog
);
  import wfd_pkg::*;

  localparam int unsigned NSLOT = (TAPS + NMULT - 1) / NMULT;
  localparam int unsigned HD    = hist_depth(D, L, M, MN, TAPS);
  localparam int unsigned GRP   = 4;                 // adder tree: groups of 4 cells
  localparam int unsigned NGRP  = (MN + GRP - 1) / GRP;

  // ---------------- coefficient registers ----------------
  logic signed [CW-1:0] coef [MN][MN][TAPS];

  always_ff @(posedge cfg_clk) begin
    if (coef_we && 32'(coef_addr[TB-1:0]) < TAPS)
      coef[coef_addr[AW-1 -: QB]][coef_addr[TB +: QB]][coef_addr[TB-1:0]] <= coef_wdata;
  end

  // ---------------- input capture, column delay lines, slot counter --------
  logic                          tog_q;
  logic                          new_vec;
  logic signed [DW-1:0]          hist [MN][HD];      // hist[p][k] = x_p[l-k]
  logic                          run;
  logic [$clog2(NSLOT+1)-1:0]    slot;
  logic                          cells_done;         // cell results final this cycle

  assign new_vec = (din_tog != tog_q);

  always_ff @(posedge clk) begin
    if (rst) begin
      tog_q      <= din_tog;
      run        <= 1'b0;
      slot       <= '0;
      cells_done <= 1'b0;
      for (int p = 0; p < MN; p++)
        for (int k = 0; k < HD; k++) hist[p][k] <= '0;
    end else begin
      tog_q      <= din_tog;
      cells_done <= run && (32'(slot) == NSLOT - 1);
      if (new_vec) begin
        for (int p = 0; p < MN; p++) begin
          hist[p][0] <= din[p];
          for (int k = 1; k < HD; k++) hist[p][k] <= hist[p][k-1];
        end
        run  <= 1'b1;
        slot <= '0;
      end else if (run) begin
        if (32'(slot) == NSLOT - 1) run <= 1'b0;
        else                        slot <= slot + 1'b1;
      end
    end
  end

  // ---------------- cells ----------------
  logic signed [ACCW-1:0] cell_acc [MN][MN];
  logic signed [DW-1:0]   delay_val [MN];

  for (genvar q = 0; q < MN; q++) begin : g_row
    for (genvar p = 0; p < MN; p++) begin : g_col
      localparam cell_kind_e KIND = cell_kind(q, p, D, M, MN);
      if (KIND == CELL_FILTER) begin : g_filter
        localparam int I0 = cell_i0(q, p, D, L, MN);
        logic signed [DW-1:0] taps_x [TAPS];
        for (genvar t = 0; t < TAPS; t++) begin : g_tap
          assign taps_x[t] = hist[p][I0 + t];
        end
        fir_cell #(.TAPS(TAPS), .NMULT(NMULT), .DW(DW), .CW(CW), .ACCW(ACCW)) u_cell (
          .clk  (clk),
          .run  (run),
          .slot (slot),
          .x    (taps_x),
          .coef (coef[q][p]),
          .acc  (cell_acc[q][p])
        );
      end else begin : g_nofilter
        assign cell_acc[q][p] = '0;
      end
      if (KIND == CELL_DELAY) begin : g_delay
        // Delay cell: the sample x_p[l - lag], no multiplier.
        assign delay_val[q] = hist[p][delay_lag(q, D, MN)];
      end
    end
    if (!is_delay_row(q, D, M, MN)) begin : g_nodelay
      assign delay_val[q] = '0;
    end
  end

  // ---------------- pipelined row adders ----------------
  logic signed [ACCW-1:0] part  [MN][NGRP];
  logic signed [ACCW-1:0] total [MN];
  logic signed [DW-1:0]   dly0  [MN];
  logic signed [DW-1:0]   dly1  [MN];
  logic signed [DW-1:0]   dly2  [MN];
  logic                   st1_v, st2_v;

  always_ff @(posedge clk) begin
    if (rst) begin
      st1_v    <= 1'b0;
      st2_v    <= 1'b0;
      dout_tog <= 1'b0;
      for (int q = 0; q < MN; q++) begin
        dout[q]  <= '0;
        total[q] <= '0;
        dly0[q]  <= '0;
        dly1[q]  <= '0;
        dly2[q]  <= '0;
        for (int g = 0; g < NGRP; g++) part[q][g] <= '0;
      end
    end else begin
      st1_v <= cells_done;
      // delay cells: take the sample while the cells do their last slot,
      // before the next input vector shifts the delay lines
      if (run && 32'(slot) == NSLOT - 1)
        for (int q = 0; q < MN; q++) dly0[q] <= delay_val[q];
      st2_v <= st1_v;
      if (cells_done) begin
        for (int q = 0; q < MN; q++) begin
          dly1[q] <= dly0[q];
          for (int g = 0; g < NGRP; g++) part[q][g] <= part_sum(cell_acc[q], g);
        end
      end
      if (st1_v) begin
        for (int q = 0; q < MN; q++) begin
          dly2[q]  <= dly1[q];
          total[q] <= total_sum(part[q]);
        end
      end
      if (st2_v) begin
        for (int q = 0; q < MN; q++)
          dout[q] <= is_delay_row(q, D, M, MN) ? dly2[q] : round_sat(total[q], CFRAC);
        dout_tog <= ~dout_tog;
      end
    end
  end

  // Sum of the cells of group g of one row.
  function automatic logic signed [ACCW-1:0] part_sum(input logic signed [ACCW-1:0] row [MN],
                                                      input int g);
    logic signed [ACCW-1:0] s;
    s = '0;
    for (int c = 0; c < GRP; c++)
      if (g*GRP + c < MN) s += row[g*GRP + c];
    return s;
  endfunction

  // Sum of the group sums of one row.
  function automatic logic signed [ACCW-1:0] total_sum(input logic signed [ACCW-1:0] grp [NGRP]);
    logic signed [ACCW-1:0] s;
    s = '0;
    for (int g = 0; g < NGRP; g++) s += grp[g];
    return s;
  endfunction

endmodule
