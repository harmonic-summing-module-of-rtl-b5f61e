// tb_channel_fifo: random pushes and pops (never into a full or from an empty
// FIFO) against a queue model; checks the head word, empty, full and the
// free count every clock, and that the FIFO fills to exactly DEPTH words.
module tb_channel_fifo;
  localparam int W = 16, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic         push = 0, pop = 0;
  logic [W-1:0] din, dout;
  logic         empty, full;
  logic [4:0]   free;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, max_fill = 0;

  channel_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

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
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      check(empty == (q.size() == 0));
      check(full == (q.size() == DEPTH));
      check(int'(free) == DEPTH - q.size());
      if (q.size() != 0) check(dout == q[0]);
      // Bias towards filling in the first half, draining in the second.
      push = !full && (($urandom % 4) < ((n < 2000) ? 3 : 1));
      pop  = !empty && (($urandom % 4) < ((n < 2000) ? 1 : 3));
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      if (q.size() > max_fill) max_fill = q.size();
    end
    check(max_fill == DEPTH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
