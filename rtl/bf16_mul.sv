// bf16_mul: bfloat16 x bfloat16 multiplier with an exact IEEE fp32 result.
//
// This is the multiplier half of the floating-point MAC inside each SPE. The
// product of two 8-bit significands has at most 16 bits, so it fits the 24-bit
// fp32 significand without rounding: the result is exact whenever it is in
// the normal fp32 range. Purely combinational.
//
// The paper fixes only the formats (bfloat16 operands, fp32 accumulation).
// The treatment of special values is this design's choice: subnormal inputs
// are read as zero, results below the normal range flush to signed zero,
// results above it become infinity, NaN or inf*0 give the quiet NaN
// 0x7FC00000.
module bf16_mul (
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [31:0] p
);
  logic        sa, sb, sp;
  logic [7:0]  ea, eb;
  logic [6:0]  ma, mb;
  logic        za, zb, ia, ib, na, nb;
  logic [15:0] prod;
  logic signed [9:0] ep;
  logic [22:0] mp;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    sp   = sa ^ sb;
    za   = (ea == 8'd0);
    zb   = (eb == 8'd0);
    ia   = (ea == 8'hFF) && (ma == 7'd0);
    ib   = (eb == 8'hFF) && (mb == 7'd0);
    na   = (ea == 8'hFF) && (ma != 7'd0);
    nb   = (eb == 8'hFF) && (mb != 7'd0);
    prod = {1'b1, ma} * {1'b1, mb};
    ep   = $signed({2'b00, ea}) + $signed({2'b00, eb}) - 10'sd127;
    if (prod[15]) begin
      mp = {prod[14:0], 8'd0};
      ep = ep + 10'sd1;
    end else begin
      mp = {prod[13:0], 9'd0};
    end

    if (na || nb || (ia && zb) || (ib && za)) begin
      p = 32'h7FC0_0000;
    end else if (ia || ib) begin
      p = {sp, 8'hFF, 23'd0};
    end else if (za || zb) begin
      p = {sp, 31'd0};
    end else if (ep >= 10'sd255) begin
      p = {sp, 8'hFF, 23'd0};
    end else if (ep <= 10'sd0) begin
      p = {sp, 31'd0};
    end else begin
      p = {sp, ep[7:0], mp};
    end
  end
endmodule
