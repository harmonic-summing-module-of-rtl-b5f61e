// hsum_pkg: types, sizes and geometry shared by the harmonic-summing design.
//
// The design computes, for every point (r, j) of half a filter-output plane
// (FOP), the harmonic sums HP_k(r,j) = sum_{m=1..k} FOP(floor(r/m), floor(j/m))
// for k = 1..N_HP, and records the points that exceed a per-row threshold.
// The FOP arrives reordered ("rFOP"): for each work-group of N_COL columns,
// all FOP points it needs are stored consecutively as N_HP segments, segment
// k holding the block of FOP values that the k-th stretched plane SP_k reads.
// Segment k spans seg_rows(k) rows and seg_cols(k) columns; inside a segment
// the points are stored column by column, rows inner (this layout inside a
// segment is this design's choice; the segment order and sizes follow the
// published work-group layout). The array of each work-group is padded with
// dummy points up to N_LPCC * S_WG points, where S_WG is the number of
// work-items per work-group and N_LPCC the number of points streamed per
// clock, rounded up to a power of two.
//
// With the default geometry (42 rows, 16 columns, 8 planes, 4 points per
// work-item) the segments hold 672, 168, 84, 44, 36, 28, 24 and 12 points,
// 1068 in all; S_WG = 168, N_LPCC = 8 and a work-group occupies 1344 words.
package hsum_pkg;

  typedef logic [31:0] fp32_t;

  // One candidate: CL1 = F*2^24 + H*2^21 + B, CL2 = amplitude.
  typedef struct packed {
    logic [31:0] cl1;
    fp32_t       cl2;
  } cand_t;

  localparam int F_LSB = 24;
  localparam int H_LSB = 21;

  // Rows of segment k (k = 1..n_hp) for a half FOP of n_rows rows.
  function automatic int seg_rows(input int n_rows, input int k);
    return (n_rows - 1) / k + 1;
  endfunction

  // Largest number of FOP columns that N_COL consecutive output columns,
  // starting at a multiple of n_col, touch in stretched plane k.
  function automatic int seg_cols(input int n_col, input int k);
    int best, span, a;
    best = 0;
    for (int w = 0; w < k; w++) begin
      a    = w * n_col;
      span = (a + n_col - 1) / k - a / k + 1;
      if (span > best) best = span;
    end
    return best;
  endfunction

  function automatic int seg_size(input int n_rows, input int n_col, input int k);
    return seg_rows(n_rows, k) * seg_cols(n_col, k);
  endfunction

  // First word of segment k inside a work-group's array.
  function automatic int seg_base(input int n_rows, input int n_col, input int k);
    int s;
    s = 0;
    for (int m = 1; m < k; m++) s += seg_size(n_rows, n_col, m);
    return s;
  endfunction

  // Needed points per work-group (before padding).
  function automatic int wg_needed(input int n_rows, input int n_col, input int n_hp);
    return seg_base(n_rows, n_col, n_hp + 1);
  endfunction

  // Work-items per work-group.
  function automatic int wg_items(input int n_rows, input int n_col, input int n_pwi);
    return n_rows * n_col / n_pwi;
  endfunction

  // Points loaded per clock without the power-of-two rounding.
  function automatic int lpcc_general(input int n_rows, input int n_col, input int n_hp,
                                      input int n_pwi);
    int s;
    s = wg_items(n_rows, n_col, n_pwi);
    return (wg_needed(n_rows, n_col, n_hp) + s - 1) / s;
  endfunction

  // Points loaded per clock, rounded up to a power of two.
  function automatic int lpcc_opt(input int n_rows, input int n_col, input int n_hp,
                                  input int n_pwi);
    int g, p;
    g = lpcc_general(n_rows, n_col, n_hp, n_pwi);
    p = 1;
    while (p < g) p *= 2;
    return p;
  endfunction

endpackage
