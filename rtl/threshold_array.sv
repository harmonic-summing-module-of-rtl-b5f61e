// threshold_array: the thresholds of candidate detection, one per row of
// every harmonic plane.
//
// A point HP_k(r, j) is a candidate when it exceeds TA(k, r). The paper keeps
// these N_HP arrays in constant memory and reads the N_HP thresholds of a row
// at once; this block does the same for each of the N_PWI points handled per
// clock. It is a register file written through a single port (by the host,
// before a run; the loading path is this design's choice) and read through
// N_PWI combinational row ports, each returning all N_HP thresholds.
//
// Interface: we/wr_plane/wr_row/wr_data write one threshold (plane index is
// k-1) at the clock edge; rd_row[q] selects the row for lane q and thr[q][k-1]
// returns TA(k, rd_row[q]) in the same cycle. Rows beyond N_ROWS-1 read 0.
module threshold_array #(
  parameter int N_HP   = 8,
  parameter int N_ROWS = 42,
  parameter int N_PWI  = 4,
  localparam int RW    = $clog2(N_ROWS),
  localparam int HW    = (N_HP > 1) ? $clog2(N_HP) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [HW-1:0]     wr_plane,
  input  logic [RW-1:0]     wr_row,
  input  logic [31:0]       wr_data,
  input  logic [RW-1:0]     rd_row [N_PWI],
  output logic [31:0]       thr    [N_PWI][N_HP]
);

  logic [31:0] ta [N_HP][N_ROWS];

  always_ff @(posedge clk) begin
    if (we && int'(wr_row) < N_ROWS && int'(wr_plane) < N_HP)
      ta[wr_plane][wr_row] <= wr_data;
  end

  always_comb begin
    for (int q = 0; q < N_PWI; q++)
      for (int k = 0; k < N_HP; k++)
        thr[q][k] = (int'(rd_row[q]) < N_ROWS) ? ta[k][rd_row[q]] : 32'd0;
  end

endmodule
