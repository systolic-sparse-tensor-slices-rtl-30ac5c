// tb_fp32_add: checks the fp32 adder against sums computed in double
// precision and rounded to fp32 (round to nearest even), over random operands
// with close and distant exponents, exact cancellation, ties, and special
// values.
module tb_fp32_add;
  import tb_fp_pkg::*;

  logic [31:0] a, b, s;
  int checks = 0, failures = 0;

  fp32_add dut (.a, .b, .s);

  task automatic expect_s(input logic [31:0] e, input string what);
    #1;
    checks++;
    if (!fp32_eq(s, e)) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h + %h = %h, expected %h", what, a, b, s, e);
    end
  endtask

  function automatic logic [31:0] rand_fp32(input int lo, input int hi);
    return {1'($urandom), 8'(lo + int'($urandom_range(hi - lo))), 23'($urandom)};
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      a = rand_fp32(100, 150);
      if (n % 3 == 0) b = {1'($urandom), 8'(int'(a[30:23]) + int'($urandom_range(4)) - 2), 23'($urandom)};
      else            b = rand_fp32(100, 150);
      expect_s(real_to_fp32(fp32_to_real(a) + fp32_to_real(b)), "random");
    end
    a = 32'h3F80_0000; b = 32'hBF80_0000; expect_s(32'h0000_0000, "x-x");
    a = 32'h3F80_0000; b = 32'h3380_0000; expect_s(32'h3F80_0000, "tie to even");
    a = 32'h3F80_0001; b = 32'h3380_0000; expect_s(32'h3F80_0002, "tie up");
    a = 32'h3F80_0000; b = 32'h0000_0000; expect_s(32'h3F80_0000, "x+0");
    a = 32'h7F7F_FFFF; b = 32'h7F7F_FFFF; expect_s(32'h7F80_0000, "overflow");
    a = 32'h7F80_0000; b = 32'hFF80_0000; expect_s(32'h7FC0_0000, "inf-inf");
    a = 32'h7F80_0000; b = 32'h3F80_0000; expect_s(32'h7F80_0000, "inf+1");
    a = 32'h0080_0001; b = 32'h8080_0000; expect_s(32'h0000_0000, "underflow to zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
