// tb_cand_shiftreg: offers 0..N_IN candidates per clock on random lanes and
// keeps a queue model of the last N_CAND candidates (lane order within a
// clock). After every clock it checks count, total and, every few clocks,
// every stored entry through the read port (index 0 = oldest). Includes a
// clear in the middle.
module tb_cand_shiftreg;
  import hsum_pkg::*;
  localparam int N_CAND = 10, N_IN = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        clear = 0;
  logic        in_hit [N_IN];
  cand_t       in_cand [N_IN];
  logic [3:0]  count, rd_idx;
  logic [31:0] total;
  cand_t       rd_cand;
  cand_t       q [$];
  int          tot = 0;
  int checks = 0, failures = 0;

  cand_shiftreg #(.N_CAND(N_CAND), .N_IN(N_IN)) dut (.*);

  task automatic check(input logic ok);
    checks++;
    if (!ok) failures++;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < N_IN; l++) in_hit[l] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      clear = (n == 1500);
      for (int l = 0; l < N_IN; l++) begin
        in_hit[l]  = !clear && ($urandom % 3 == 0);
        in_cand[l] = {32'($urandom), 32'($urandom)};
      end
      @(posedge clk);
      #1;
      for (int l = 0; l < N_IN; l++)
        if (in_hit[l]) begin
          q.push_back(in_cand[l]);
          tot++;
        end
      for (int l = 0; l < N_IN; l++) in_hit[l] = 0;
      if (clear) begin
        q.delete();
        tot = 0;
      end
      clear = 0;
      while (q.size() > N_CAND) void'(q.pop_front());
      check(int'(count) == q.size());
      check(int'(total) == tot);
      if (n % 7 == 0)
        for (int i = 0; i < q.size(); i++) begin
          rd_idx = 4'(i);
          #1;
          check(rd_cand == q[i]);
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
