// wfd_pkg: constants, types and index functions shared by the waveform
// digitizer's correction datapath.
//
// The digitizer interleaves M = 4 ADC cores of 250 Msps into one 1 Gsps
// stream. Each core stream is split N = 4 ways, giving M*N = 16 lanes at
// 62.5 Msps that a 16x16 matrix of 5-tap poly-phase FIR cells corrects.
// The channel counts, tap count, multiplier count and data widths follow the
// paper; coefficient width, fractional bits and the reconstruction delay D are
// this design's choices.
//
// Index conventions used by every module:
//   full-rate sample n = MN*l + p, lane p = 0..MN-1 at slow time l
//   ADC channel of lane p = p mod M (channel 0 is the timing reference)
//   reconstruction filter of channel p: 80 = 2L taps f_p[j],
//     j in [D+p-L, D+p+L)
//   cell (q,p) of the matrix: taps f_p[MN*(i0+t)+q], t = 0..TAPS-1, applied
//     to x_p[l-i0-t], i0 = ceil((D+p-L-q)/MN)
//   row q is a pure delay when (q-D) mod MN is a lane of channel 0.
package wfd_pkg;

  localparam int unsigned M      = 4;    // ADC cores (paper)
  localparam int unsigned N      = 4;    // deserialization factor (paper)
  localparam int unsigned MN     = M*N;  // parallel lanes (paper: 16)
  localparam int unsigned ADC_W  = 12;   // ADC resolution (paper)
  localparam int unsigned DW     = 16;   // sample width in the FPGA (paper, Fig. 7)
  localparam int unsigned TAPS   = 5;    // taps per filter cell (paper)
  localparam int unsigned NMULT  = 2;    // multipliers per cell (paper)
  localparam int unsigned L      = 40;   // half filter length, 2L = 80 taps (paper)
  localparam int unsigned D      = 43;   // reconstruction delay (chosen)
  localparam int unsigned CW     = 18;   // coefficient width (chosen)
  localparam int unsigned CFRAC  = 16;   // coefficient fractional bits (chosen)
  localparam int unsigned GW     = 18;   // gain width (chosen)
  localparam int unsigned GFRAC  = 16;   // gain fractional bits (chosen)
  localparam int unsigned ACCW   = 42;   // row accumulator width (chosen)

  typedef logic signed [DW-1:0] sample_t;
  typedef logic signed [CW-1:0] coef_t;

  // Kind of cell at (q,p) of the filter matrix.
  typedef enum logic [1:0] {CELL_EMPTY = 2'd0, CELL_FILTER = 2'd1, CELL_DELAY = 2'd2} cell_kind_e;

  // Positive modulo.
  function automatic int pmod(input int a, input int b);
    int r;
    r = a % b;
    return (r < 0) ? r + b : r;
  endfunction

  // First slow-rate tap index of cell (q,p): ceil((d+p-l-q)/mn).
  function automatic int cell_i0(input int q, input int p, input int d, input int l,
                                 input int mn);
    int num;
    num = d + p - l - q;
    if (num <= 0) return -((-num) / mn);
    return (num + mn - 1) / mn;
  endfunction

  // Row q reproduces a skew-free lane (lane of channel 0) as a pure delay.
  function automatic bit is_delay_row(input int q, input int d, input int m, input int mn);
    return (pmod(q - d, mn) % m) == 0;
  endfunction

  // Column feeding the delay cell of a delay row.
  function automatic int delay_col(input int q, input int d, input int mn);
    return pmod(q - d, mn);
  endfunction

  // Slow-rate lag of the delay cell of a delay row.
  function automatic int delay_lag(input int q, input int d, input int mn);
    return (d + delay_col(q, d, mn) - q) / mn;
  endfunction

  function automatic cell_kind_e cell_kind(input int q, input int p, input int d,
                                           input int m, input int mn);
    if (!is_delay_row(q, d, m, mn)) return CELL_FILTER;
    if (p == delay_col(q, d, mn)) return CELL_DELAY;
    return CELL_EMPTY;
  endfunction

  // Number of past inputs a column must keep: max over cells of i0+taps.
  function automatic int hist_depth(input int d, input int l, input int m, input int mn,
                                    input int taps);
    int h;
    h = 1;
    for (int q = 0; q < mn; q++) begin
      for (int p = 0; p < mn; p++) begin
        if (cell_kind(q, p, d, m, mn) == CELL_FILTER && cell_i0(q, p, d, l, mn) + taps > h)
          h = cell_i0(q, p, d, l, mn) + taps;
        if (cell_kind(q, p, d, m, mn) == CELL_DELAY && delay_lag(q, d, mn) + 1 > h)
          h = delay_lag(q, d, mn) + 1;
      end
    end
    return h;
  endfunction

  // Round a Q.frac accumulator to an integer sample and saturate to DW bits.
  function automatic sample_t round_sat(input logic signed [ACCW-1:0] acc, input int frac);
    logic signed [ACCW-1:0] r;
    r = (acc + (ACCW'(1) <<< (frac - 1))) >>> frac;
    if (r > ACCW'(2**(DW-1) - 1)) return sample_t'(2**(DW-1) - 1);
    if (r < -ACCW'(2**(DW-1))) return sample_t'(-(2**(DW-1)));
    return sample_t'(r);
  endfunction

endpackage
