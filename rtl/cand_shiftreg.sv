// cand_shiftreg: candidate list of one harmonic plane, keeping the last
// N_CAND candidates.
//
// The paper stores at most N_CAND candidates per harmonic plane and, when
// more are found, keeps the last N_CAND; its detection logic feeds one shift
// register per plane. Here up to N_IN candidates can arrive in one clock
// (one per lane, lane 0 counting as the oldest): the register shifts by the
// number of hits and the hits enter at the young end, so the oldest
// candidates drop out once N_CAND is exceeded.
//
// Interface: clear (one clock) empties the list. in_hit[q]/in_cand[q] offer
// candidates at the clock edge. count = number of stored entries
// (saturates at N_CAND); total = number of candidates seen since clear.
// rd_idx -> rd_cand reads combinationally, index 0 being the oldest stored
// entry.
//
// Reset: rst_n clears the registers asynchronously and also disables the
// assertions while it is low, so lint tools see it used both ways; this is
// intended and no flip-flop takes it as a synchronous input.
module cand_shiftreg
  import hsum_pkg::*;
#(
  parameter int N_CAND = 200,
  parameter int N_IN   = 4,
  localparam int IW    = $clog2(N_CAND + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_hit  [N_IN],
  input  cand_t         in_cand [N_IN],
  output logic [IW-1:0] count,
  output logic [31:0]   total,
  input  logic [IW-1:0] rd_idx,
  output cand_t         rd_cand
);

  cand_t sr [N_CAND];             // sr[0] is the newest entry
  cand_t packed_c [N_IN];
  int    n_hit;

  // Compact this clock's hits, oldest first.
  always_comb begin
    n_hit = 0;
    for (int q = 0; q < N_IN; q++) packed_c[q] = '0;
    for (int q = 0; q < N_IN; q++) begin
      if (in_hit[q]) begin
        packed_c[n_hit] = in_cand[q];
        n_hit++;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_CAND; i++) begin
      if (i < n_hit)       sr[i] <= packed_c[n_hit - 1 - i];
      else if (n_hit != 0) sr[i] <= sr[i - n_hit];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      total <= '0;
    end else if (clear) begin
      count <= '0;
      total <= '0;
    end else if (n_hit != 0) begin
      total <= total + 32'(n_hit);
      count <= (int'(count) + n_hit > N_CAND) ? IW'(N_CAND) : IW'(int'(count) + n_hit);
    end
  end

  assign rd_cand = (rd_idx < count) ? sr[int'(count) - 1 - int'(rd_idx)] : '0;

  a_clear_quiet: assert property (@(posedge clk) disable iff (!rst_n)
                                  clear |-> (n_hit == 0));

endmodule
