// tb_harmonic_sum: feeds a new point every clock (with random gaps) and
// checks that, N_HP-1 clocks later, hp[k-1] is SP_1 + ... + SP_k rounded
// after every addition, and that the tag arrives with its point.
module tb_harmonic_sum;
  import tb_ref_pkg::*;
  localparam int N_HP = 8, TAG_W = 27;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic             in_valid = 0, out_valid;
  logic [31:0]      sp [N_HP], hp [N_HP];
  logic [TAG_W-1:0] in_tag, out_tag;
  logic [N_HP-1:0][31:0] exp_q [$];
  logic [TAG_W-1:0] tag_q [$];
  int               t_in [$];
  int checks = 0, failures = 0, cyc = 0;

  harmonic_sum dut (.*);

  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Checker.
  always @(negedge clk) if (rst_n && out_valid) begin
    logic [N_HP-1:0][31:0] e;
    e = exp_q.pop_front();
    checks++;
    if (out_tag !== tag_q.pop_front()) failures++;
    checks++;
    if (cyc - t_in.pop_front() != N_HP - 1) failures++;
    for (int k = 0; k < N_HP; k++) begin
      checks++;
      if (hp[k] !== e[k]) begin
        failures++;
        if (failures < 10) $display("FAIL hp[%0d]=%h want %h", k, hp[k], e[k]);
      end
    end
  end

  initial begin
    logic [N_HP-1:0][31:0] e;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 5) != 0;
      for (int k = 0; k < N_HP; k++) sp[k] = rand_f32(120, 130) & 32'h7FFF_FFFF;
      in_tag = TAG_W'($urandom);
      if (in_valid) begin
        e[0] = sp[0];
        for (int k = 1; k < N_HP; k++) e[k] = ref_add(e[k-1], sp[k]);
        exp_q.push_back(e);
        tag_q.push_back(in_tag);
        t_in.push_back(cyc);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (N_HP + 2) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
