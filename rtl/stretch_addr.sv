// stretch_addr: local addresses of the stretched-plane values of one point.
//
// Harmonic plane k at point (r, j) adds SP_k(r, j) = FOP(floor(r/k),
// floor(j/k)). Inside a work-group's buffer the FOP values of stretched plane
// k sit in segment k, which starts at seg_base(k) and holds the FOP columns
// floor(col0/k) .. onwards (col0 = first column of the work-group), each of
// seg_rows(k) rows stored consecutively. So the value for plane k is at
//   seg_base(k) + (floor(j/k) - floor(col0/k)) * seg_rows(k) + floor(r/k).
// The equation and segment order follow the paper; the column-major order
// inside a segment is this design's choice. Divisions are by the constants
// 1..N_HP only.
//
// Interface: purely combinational. col0 = absolute first column of the
// work-group, row = row within the half FOP, col = absolute column j;
// addr[k-1] is the word address for plane k.
module stretch_addr
  import hsum_pkg::*;
#(
  parameter int N_HP     = 8,
  parameter int N_ROWS   = 42,
  parameter int N_COL    = 16,
  parameter int N_CHAN   = 2097152,
  parameter int WG_WORDS = 1344,
  localparam int RW      = $clog2(N_ROWS),
  localparam int CW      = $clog2(N_CHAN),
  localparam int AW      = $clog2(WG_WORDS)
) (
  input  logic [CW-1:0] col0,
  input  logic [RW-1:0] row,
  input  logic [CW-1:0] col,
  output logic [AW-1:0] addr [N_HP]
);

  for (genvar g = 0; g < N_HP; g++) begin : g_plane
    localparam int K    = g + 1;
    localparam int BASE = seg_base(N_ROWS, N_COL, K);
    localparam int ROWS = seg_rows(N_ROWS, K);
    logic [CW-1:0] dcol;
    logic [RW-1:0] srow;
    always_comb begin
      dcol = CW'(col / CW'(K)) - CW'(col0 / CW'(K));
      srow = RW'(row / RW'(K));
      addr[g] = AW'(BASE + int'(dcol) * ROWS + int'(srow));
    end
  end

endmodule
