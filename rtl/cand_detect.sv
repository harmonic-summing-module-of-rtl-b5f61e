// cand_detect: candidate detection (the single work-item part of the
// MultipleHP-R kernel).
//
// Every clock it can take N_PWI points, each with its N_HP harmonic sums.
// Each sum HP_k(r, j) is compared with the threshold TA(k, r); when it is
// greater, the point becomes a candidate of plane k, packed as in the paper
// into two 32-bit words: CL1 = F*2^24 + H*2^21 + B and CL2 = amplitude, with
// F the row (7 bits), H = k-1 (3 bits) and B the channel j (21 bits). The
// candidates go into one cand_shiftreg per plane, which keeps the last N_CAND
// of them. After a run, send streams the lists out, plane 1 first and the
// oldest candidate of each plane first. The comparison, packing and per-plane
// registers follow the paper; the meaning of F (row within the processed half
// plane) and the output stream are this design's choices.
//
// Interface: clear (one clock) empties all lists. ta_* write the threshold
// array. in_valid/in_row/in_col/in_hp take points; candidates are stored at
// the same clock edge. send (one clock) starts the read-out: out_valid/
// out_ready/out_cand/out_plane form a valid/ready stream, send_busy is high
// until it has ended. count[k-1] and total[k-1] give stored and found
// candidates of plane k.
//
// Reset: rst_n clears the registers asynchronously and also disables the
// assertions while it is low, so lint tools see it used both ways; this is
// intended and no flip-flop takes it as a synchronous input.
module cand_detect
  import hsum_pkg::*;
#(
  parameter int N_HP   = 8,
  parameter int N_ROWS = 42,
  parameter int N_PWI  = 4,
  parameter int N_CAND = 200,
  parameter int N_CHAN = 2097152,
  localparam int RW    = $clog2(N_ROWS),
  localparam int CW    = $clog2(N_CHAN),
  localparam int HW    = (N_HP > 1) ? $clog2(N_HP) : 1,
  localparam int IW    = $clog2(N_CAND + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          ta_we,
  input  logic [HW-1:0] ta_plane,
  input  logic [RW-1:0] ta_row,
  input  logic [31:0]   ta_data,
  input  logic          in_valid,
  input  logic [RW-1:0] in_row [N_PWI],
  input  logic [CW-1:0] in_col [N_PWI],
  input  logic [31:0]   in_hp  [N_PWI][N_HP],
  input  logic          send,
  output logic          send_busy,
  output logic          out_valid,
  input  logic          out_ready,
  output cand_t         out_cand,
  output logic [HW-1:0] out_plane,
  output logic [IW-1:0] count [N_HP],
  output logic [31:0]   total [N_HP]
);

  logic [31:0]   thr [N_PWI][N_HP];
  logic          hit [N_HP][N_PWI];
  cand_t         cand [N_HP][N_PWI];
  cand_t         rd_cand [N_HP];
  logic [IW-1:0] rd_idx;
  logic [HW-1:0] plane;

  threshold_array #(.N_HP(N_HP), .N_ROWS(N_ROWS), .N_PWI(N_PWI))
    u_ta (.clk(clk), .we(ta_we), .wr_plane(ta_plane), .wr_row(ta_row),
          .wr_data(ta_data), .rd_row(in_row), .thr(thr));

  for (genvar k = 0; k < N_HP; k++) begin : g_plane
    for (genvar q = 0; q < N_PWI; q++) begin : g_lane
      logic gt;
      fp32_gt u_gt (.a(in_hp[q][k]), .b(thr[q][k]), .gt(gt));
      assign hit[k][q] = in_valid && gt;
      always_comb begin
        cand[k][q].cl1 = (32'(in_row[q]) << F_LSB) | (32'(k) << H_LSB) |
                         32'(in_col[q]);
        cand[k][q].cl2 = in_hp[q][k];
      end
    end
    cand_shiftreg #(.N_CAND(N_CAND), .N_IN(N_PWI))
      u_sr (.clk(clk), .rst_n(rst_n), .clear(clear), .in_hit(hit[k]),
            .in_cand(cand[k]), .count(count[k]), .total(total[k]),
            .rd_idx(rd_idx), .rd_cand(rd_cand[k]));
  end

  // Read-out sequencer.
  assign out_valid = send_busy && (rd_idx < count[plane]);
  assign out_cand  = rd_cand[plane];
  assign out_plane = plane;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      send_busy <= 1'b0;
      plane     <= '0;
      rd_idx    <= '0;
    end else if (send && !send_busy) begin
      send_busy <= 1'b1;
      plane     <= '0;
      rd_idx    <= '0;
    end else if (send_busy) begin
      if (out_valid && out_ready && (rd_idx + 1'b1 < count[plane])) begin
        rd_idx <= rd_idx + 1'b1;
      end else if (!out_valid || out_ready) begin
        rd_idx <= '0;
        if (int'(plane) == N_HP - 1) send_busy <= 1'b0;
        else                         plane     <= plane + 1'b1;
      end
    end
  end

  a_sizes: assert property (@(posedge clk) (RW <= 7) && (CW <= 21));

endmodule
