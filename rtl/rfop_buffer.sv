// rfop_buffer: double-buffered work-group memory fed by the reordered-FOP
// stream.
//
// In the reordered FOP, every work-group's points (the N_HP stretched-plane
// segments plus padding, WG_WORDS words) are consecutive, so they arrive as a
// plain stream of N_LPCC words per clock. The paper overlaps the loading of a
// work-group with the computing of the previous one; here that is done with
// two banks: the stream fills one bank while the harmonic-plane calculation
// gathers from the other. The bank scheme and the valid/ready handshake are
// this design's choices.
//
// Write side: in_valid/in_ready/in_data, one beat of N_LPCC words per clock
// at word addresses beat*N_LPCC .. beat*N_LPCC+N_LPCC-1; after WG_WORDS/N_LPCC
// beats the bank is marked full and the other bank is filled next. in_ready is
// low while the bank to be filled is still full.
// Read side: rd_avail says the bank being read is full; rd_addr[n] ->
// rd_data[n] are combinational gathers from it; a one-clock rd_release marks
// the bank empty and moves reading to the other bank.
//
// Reset: rst_n clears the registers asynchronously and also disables the
// assertions while it is low, so lint tools see it used both ways; this is
// intended and no flip-flop takes it as a synchronous input.
module rfop_buffer #(
  parameter int N_LPCC   = 8,
  parameter int WG_WORDS = 1344,
  parameter int N_RD     = 32,
  localparam int AW      = $clog2(WG_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [31:0]       in_data [N_LPCC],
  output logic              rd_avail,
  input  logic [AW-1:0]     rd_addr [N_RD],
  output logic [31:0]       rd_data [N_RD],
  input  logic              rd_release
);

  localparam int BEATS = WG_WORDS / N_LPCC;
  localparam int BW    = (BEATS > 1) ? $clog2(BEATS) : 1;

  logic [31:0]   mem [2][WG_WORDS];
  logic [1:0]    full;
  logic          wr_sel, rd_sel;
  logic [BW-1:0] beat;

  assign in_ready = !full[wr_sel];
  assign rd_avail = full[rd_sel];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      for (int l = 0; l < N_LPCC; l++)
        mem[wr_sel][int'(beat) * N_LPCC + l] <= in_data[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full   <= 2'b00;
      wr_sel <= 1'b0;
      rd_sel <= 1'b0;
      beat   <= '0;
    end else begin
      if (rd_release) begin
        full[rd_sel] <= 1'b0;
        rd_sel       <= !rd_sel;
      end
      if (in_valid && in_ready) begin
        if (int'(beat) == BEATS - 1) begin
          beat         <= '0;
          full[wr_sel] <= 1'b1;
          wr_sel       <= !wr_sel;
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int n = 0; n < N_RD; n++)
      rd_data[n] = (int'(rd_addr[n]) < WG_WORDS) ? mem[rd_sel][rd_addr[n]] : 32'd0;
  end

  // A bank may only be released while it holds a work-group.
  a_release_full: assert property (@(posedge clk) disable iff (!rst_n)
                                   rd_release |-> rd_avail);

endmodule
