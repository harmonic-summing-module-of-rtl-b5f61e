// channel_fifo: the channel between the harmonic-plane calculation and the
// candidate detection.
//
// The paper connects its two kernels through an OpenCL channel, "a FIFO
// buffer in essence". This is a synchronous first-in first-out buffer of
// DEPTH words of W bits (DEPTH a power of two; depth 16 is this design's
// choice). push writes din at the clock edge, pop removes the head; dout
// shows the head whenever empty is low. free = DEPTH - stored words, used by
// the producer to stall before the FIFO could overflow. Pushing into a full
// or popping from an empty FIFO is a protocol error caught by assertions.
//
// Reset: rst_n clears the registers asynchronously and also disables the
// assertions while it is low, so lint tools see it used both ways; this is
// intended and no flip-flop takes it as a synchronous input.
module channel_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16,
  localparam int PW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [PW:0]  free
);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;

  assign empty = (cnt == '0);
  assign full  = (int'(cnt) == DEPTH);
  assign free  = (PW+1)'(DEPTH) - cnt;
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
      cnt <= cnt + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
