// harmonic_sum: pipelined adder chain forming all harmonic planes of a point.
//
// Given the stretched-plane values SP_1..SP_N_HP of one point, it produces
// HP_1 = SP_1 and HP_k = HP_{k-1} + SP_k for k = 2..N_HP, the progressive sum
// drawn as a chain of adders in the paper. Stage s (s = 1..N_HP-1) holds a
// vector whose entries 0..s are finished harmonic sums and whose entries
// above s are still stretched values; it adds entry s-1 to entry s. One
// register after every adder is this design's choice.
//
// Interface: in_valid/sp/in_tag enter every clock (no stall); after
// N_HP-1 clocks out_valid/hp/out_tag leave with hp[k-1] = HP_k. The tag
// (row and column of the point) travels unchanged.
module harmonic_sum #(
  parameter int N_HP  = 8,
  parameter int TAG_W = 27
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [31:0]      sp     [N_HP],
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [31:0]      hp     [N_HP],
  output logic [TAG_W-1:0] out_tag
);

  localparam int NS = (N_HP > 1) ? N_HP - 1 : 1;

  logic [31:0]      v     [NS+1][N_HP];
  logic             vld   [NS+1];
  logic [TAG_W-1:0] tag   [NS+1];
  logic [31:0]      sum   [NS];

  always_comb begin
    v[0]   = sp;
    vld[0] = in_valid;
    tag[0] = in_tag;
  end

  for (genvar s = 1; s <= NS; s++) begin : g_stage
    if (N_HP > 1) begin : g_add
      fp32_add u_add (.a(v[s-1][s-1]), .b(v[s-1][s]), .y(sum[s-1]));
    end else begin : g_none
      assign sum[s-1] = v[s-1][0];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[s] <= 1'b0;
      else        vld[s] <= vld[s-1];
    end
    always_ff @(posedge clk) begin
      tag[s] <= tag[s-1];
      for (int k = 0; k < N_HP; k++)
        v[s][k] <= (N_HP > 1 && k == s) ? sum[s-1] : v[s-1][k];
    end
  end

  assign out_valid = vld[NS];
  assign hp        = v[NS];
  assign out_tag   = tag[NS];

endmodule
