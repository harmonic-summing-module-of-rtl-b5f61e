// tb_fp32_gt: checks the float comparator against real-valued comparison
// of random operands (both signs, wide exponent range), equal operands and
// signed zeros.
module tb_fp32_gt;
  import tb_ref_pkg::*;

  logic [31:0] a, b;
  logic        gt;
  int checks = 0, failures = 0;

  fp32_gt dut (.a(a), .b(b), .gt(gt));

  task automatic check(input logic exp_gt);
    #1;
    checks++;
    if (gt !== exp_gt) begin
      failures++;
      if (failures < 10) $display("FAIL %h > %h gave %0d", a, b, gt);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 32'h0000_0000; b = 32'h8000_0000; check(1'b0);
    a = 32'h3F80_0000; b = 32'h3F80_0000; check(1'b0);
    a = 32'h3F80_0001; b = 32'h3F80_0000; check(1'b1);
    a = 32'hBF80_0000; b = 32'hBF80_0001; check(1'b1);
    for (int n = 0; n < 20000; n++) begin
      a = rand_f32(1, 254);
      b = (n % 3 == 0) ? {a[31:4], 4'($urandom)} : rand_f32(1, 254);
      check(to_real(a) > to_real(b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
