// fp32_gt: combinational single-precision "greater than" comparator.
//
// This is the threshold test of the candidate detection: a point of a
// harmonic plane becomes a candidate when it is strictly greater than the
// threshold of its row. The paper draws the test as a '>' comparator and
// gives no insides; here the two sign-magnitude numbers are compared
// directly: positive beats negative, two positives compare by magnitude,
// two negatives by reversed magnitude. +0 and -0 are equal and a NaN operand
// never compares greater (this design's choice).
//
// Interface: a, b in, gt = (a > b) out, no clock.
module fp32_gt (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        gt
);

  logic a_nan, b_nan, both_zero;
  logic [30:0] mag_a, mag_b;

  always_comb begin
    mag_a     = a[30:0];
    mag_b     = b[30:0];
    a_nan     = (a[30:23] == 8'hFF) && (a[22:0] != 23'd0);
    b_nan     = (b[30:23] == 8'hFF) && (b[22:0] != 23'd0);
    both_zero = (mag_a == 31'd0) && (mag_b == 31'd0);
    if (a_nan || b_nan || both_zero)  gt = 1'b0;
    else if (!a[31] &&  b[31])        gt = 1'b1;
    else if ( a[31] && !b[31])        gt = 1'b0;
    else if (!a[31])                  gt = (mag_a > mag_b);
    else                              gt = (mag_a < mag_b);
  end

endmodule
