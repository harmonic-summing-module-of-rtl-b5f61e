// tb_fp32_add: checks the single-precision adder against a double-precision
// reference rounded once to single precision, on random operands whose
// exponents differ by at most 25 (so the double sum is exact), plus signed
// zeros, exact cancellation and a few hand-worked sums.
module tb_fp32_add;
  import tb_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] exp_y, input string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %h + %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Hand-worked values: 1.0 + 1.0 = 2.0, 1.5 + 2.25 = 3.75, 3 - 3 = 0.
    a = 32'h3F80_0000; b = 32'h3F80_0000; check(32'h4000_0000, "1+1");
    a = 32'h3FC0_0000; b = 32'h4010_0000; check(32'h4070_0000, "1.5+2.25");
    a = 32'h4040_0000; b = 32'hC040_0000; check(32'h0000_0000, "3-3");
    a = 32'h0000_0000; b = 32'h4040_0000; check(32'h4040_0000, "0+3");
    a = 32'h8000_0000; b = 32'h8000_0000; check(32'h8000_0000, "-0+-0");
    // 1 + 2^-24 is a tie and rounds to even (1.0); 1 + 3*2^-24 rounds up.
    a = 32'h3F80_0000; b = 32'h3380_0000; check(32'h3F80_0000, "tie even");
    a = 32'h3F80_0000; b = 32'h3440_0000; check(32'h3F80_0002, "round up");
    for (int n = 0; n < 20000; n++) begin
      a = rand_f32(110, 135);
      b = rand_f32(110, 135);
      if (n % 4 == 0) b = {~a[31], a[30:23], 23'($urandom) & 23'h00000F ^ a[22:0]};
      check(ref_add(a, b), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
