// tb_bf16_mul: checks the bfloat16 multiplier against products computed in
// double precision (exact for bfloat16 operands), plus zero, infinity, NaN,
// overflow and underflow cases.
module tb_bf16_mul;
  import tb_fp_pkg::*;

  logic [15:0] a, b;
  logic [31:0] p;
  int checks = 0, failures = 0;

  bf16_mul dut (.a, .b, .p);

  task automatic expect_p(input logic [31:0] e, input string what);
    #1;
    checks++;
    if (p !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h * %h = %h, expected %h", what, a, b, p, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      a = rand_bf16(70, 190);
      b = rand_bf16(70, 190);
      expect_p(real_to_fp32(bf16_to_real(a) * bf16_to_real(b)), "random");
    end
    a = 16'h3F80; b = 16'h3F80; expect_p(32'h3F80_0000, "1*1");
    a = 16'hC000; b = 16'h3FC0; expect_p(32'hC040_0000, "-2*1.5");
    a = 16'h0000; b = 16'h4000; expect_p(32'h0000_0000, "0*2");
    a = 16'h8000; b = 16'h4000; expect_p(32'h8000_0000, "-0*2");
    a = 16'h7F80; b = 16'hC000; expect_p(32'hFF80_0000, "inf*-2");
    a = 16'h7F80; b = 16'h0000; expect_p(32'h7FC0_0000, "inf*0");
    a = 16'h7FC1; b = 16'h3F80; expect_p(32'h7FC0_0000, "nan*1");
    a = 16'h7F00; b = 16'h7F00; expect_p(32'h7F80_0000, "overflow");
    a = 16'h0100; b = 16'h0100; expect_p(32'h0000_0000, "underflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
