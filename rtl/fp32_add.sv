// fp32_add: combinational IEEE-754 single-precision adder.
//
// Used for the harmonic sums HP_k = HP_{k-1} + SP_k. The paper only says that
// the module's arithmetic is floating-point addition; the insides here are
// this design's own: the operand with the larger magnitude is taken as the
// reference, the other mantissa is shifted right with guard, round and sticky
// bits, the two are added or subtracted, the result is normalised and rounded
// to nearest, ties to even.
//
// Simplifications (this design's choice): subnormal inputs are read as zero
// and results below the normal range flush to zero of the same sign; an
// infinity or NaN operand gives an infinity or a quiet NaN without further
// distinction; overflow gives infinity.
//
// Interface: a, b in, y = a + b out, no clock (purely combinational; the
// caller registers the result).
//
// The normalised sum keeps a spare top bit so that one datapath serves
// both the carry-out case (shifted right) and the cancellation case
// (shifted left); after normalisation that bit is always zero and is not
// read.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [22:0] ma, mb;
  logic        za, zb, sa_big;
  logic [26:0] ml, msh;          // hidden bit, 23 fraction bits, G, R, S
  logic [26:0] ms_aligned;
  logic [7:0]  d;
  logic [27:0] sum;
  logic [27:0] norm;
  logic signed [9:0] e_res;
  logic [4:0]  lz;
  logic [24:0] rnd;              // 24-bit mantissa plus carry after rounding
  logic        guard, sticky_r, round_up;

  always_comb begin
    sa = a[31]; ea = a[30:23]; ma = a[22:0];
    sb = b[31]; eb = b[30:23]; mb = b[22:0];
    za = (ea == 8'd0);
    zb = (eb == 8'd0);
    sa_big = ({ea, ma} >= {eb, mb});
    sl = sa_big ? sa : sb;
    ss = sa_big ? sb : sa;
    el = sa_big ? ea : eb;
    es = sa_big ? eb : ea;
    ml  = {1'b1, (sa_big ? ma : mb), 3'b000};
    msh = {1'b1, (sa_big ? mb : ma), 3'b000};
    d   = el - es;

    // Align the smaller operand, keeping a sticky bit.
    ms_aligned = '0;
    if (d >= 8'd27) begin
      ms_aligned = 27'd1;
    end else begin
      ms_aligned = msh >> d;
      if ((msh & ((27'd1 << d) - 27'd1)) != 27'd0) ms_aligned[0] = 1'b1;
    end

    if (sl == ss) sum = {1'b0, ml} + {1'b0, ms_aligned};
    else          sum = {1'b0, ml} - {1'b0, ms_aligned};

    // Normalise.
    lz = 5'd0;
    for (int i = 0; i <= 26; i++) begin
      if (sum[i]) lz = 5'(26 - i);
    end
    norm  = '0;
    e_res = 10'(el);
    if (sum[27]) begin
      norm  = {1'b0, sum[27:1]};
      norm[0] = sum[1] | sum[0];
      e_res = 10'(el) + 10'sd1;
    end else begin
      norm  = sum << lz;
      e_res = 10'(el) - 10'(lz);
    end

    // Round to nearest, ties to even.
    guard    = norm[2];
    sticky_r = norm[1] | norm[0];
    round_up = guard & (sticky_r | norm[3]);
    rnd      = {1'b0, norm[26:3]} + {24'd0, round_up};
    if (rnd[24]) begin
      rnd   = rnd >> 1;
      e_res = e_res + 10'sd1;
    end

    // Special cases and packing.
    if (ea == 8'hFF || eb == 8'hFF) begin
      if ((ea == 8'hFF && ma != 0) || (eb == 8'hFF && mb != 0) ||
          (ea == 8'hFF && eb == 8'hFF && sa != sb))
        y = 32'h7FC0_0000;
      else
        y = (ea == 8'hFF) ? {sa, 8'hFF, 23'd0} : {sb, 8'hFF, 23'd0};
    end else if (za && zb) begin
      y = {sa & sb, 31'd0};
    end else if (za) begin
      y = {sb, eb, mb};
    end else if (zb) begin
      y = {sa, ea, ma};
    end else if (sum == 28'd0) begin
      y = 32'd0;
    end else if (e_res >= 10'sd255) begin
      y = {sl, 8'hFF, 23'd0};
    end else if (e_res <= 10'sd0) begin
      y = {sl, 31'd0};
    end else begin
      y = {sl, e_res[7:0], rnd[22:0]};
    end
  end

endmodule
