// fp32_add: IEEE-754 single-precision adder, round to nearest even.
//
// This is the accumulator adder of the SPE in bfloat16 mode (products are
// accumulated in fp32). Purely combinational: align the smaller operand with
// guard, round and sticky bits, add or subtract the significands, normalise
// with a leading-zero count, round, and check the exponent range.
//
// The paper only says that accumulation is IEEE fp32. This design's choices:
// subnormal inputs are read as zero and results below the normal range flush
// to zero (no gradual underflow); an exact zero difference is +0; overflow
// gives infinity; NaN inputs or inf-inf give the quiet NaN 0x7FC00000.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] s
);
  logic        sa, sb, sx, sy;
  logic [7:0]  ea, eb, ex, ey;
  logic [23:0] mx, my;
  logic        za, zb, ia, ib, na, nb;
  logic [7:0]  d;
  logic [26:0] bx, by, shifted, mask;
  logic        sticky;
  logic [27:0] sum, sum1, sum2;
  logic signed [9:0] e, e1, e2, e3;
  logic [4:0]  lz;
  logic        found;
  logic        up;
  logic [24:0] mr;

  always_comb begin
    {sa, ea} = a[31:23];
    {sb, eb} = b[31:23];
    za = (ea == 8'd0);
    zb = (eb == 8'd0);
    ia = (ea == 8'hFF) && (a[22:0] == 23'd0);
    ib = (eb == 8'hFF) && (b[22:0] == 23'd0);
    na = (ea == 8'hFF) && (a[22:0] != 23'd0);
    nb = (eb == 8'hFF) && (b[22:0] != 23'd0);

    // x is the operand of larger magnitude; zero inputs have magnitude 0.
    if ((za ? 31'd0 : a[30:0]) >= (zb ? 31'd0 : b[30:0])) begin
      sx = sa; ex = ea; mx = za ? 24'd0 : {1'b1, a[22:0]};
      sy = sb; ey = eb; my = zb ? 24'd0 : {1'b1, b[22:0]};
    end else begin
      sx = sb; ex = eb; mx = zb ? 24'd0 : {1'b1, b[22:0]};
      sy = sa; ey = ea; my = za ? 24'd0 : {1'b1, a[22:0]};
    end

    // Align y to x, keeping guard/round bits and a sticky bit.
    d  = ex - ey;
    bx = {mx, 3'b000};
    by = {my, 3'b000};
    mask = 27'd0;
    if (d >= 8'd27) begin
      shifted = 27'd0;
      sticky  = (my != 24'd0);
    end else begin
      shifted = by >> d;
      mask    = (27'd1 << d) - 27'd1;
      sticky  = |(by & mask);
    end
    shifted[0] = shifted[0] | sticky;

    if (sx == sy) sum = {1'b0, bx} + {1'b0, shifted};
    else          sum = {1'b0, bx} - {1'b0, shifted};

    // A carry out of the addition shifts right by one, keeping the sticky.
    if (sum[27]) begin
      sum1 = {1'b0, sum[27:2], sum[1] | sum[0]};
      e1   = $signed({2'b00, ex}) + 10'sd1;
    end else begin
      sum1 = sum;
      e1   = $signed({2'b00, ex});
    end

    // Normalise so that bit 26 holds the hidden one.
    lz    = 5'd0;
    found = 1'b0;
    for (int i = 26; i >= 0; i--) begin
      if (!found && sum1[i]) begin
        found = 1'b1;
        lz    = 5'(26 - i);
      end
    end
    sum2 = sum1 << lz;
    e2   = e1 - $signed({5'd0, lz});

    // Round to nearest, ties to even.
    up = sum2[2] && (sum2[1] || sum2[0] || sum2[3]);
    mr = {1'b0, sum2[26:3]} + {24'd0, up};
    if (mr[24]) begin
      mr = {1'b0, mr[24:1]};
      e3 = e2 + 10'sd1;
    end else begin
      e3 = e2;
    end
    e = e3;

    if (na || nb || (ia && ib && (sa != sb))) begin
      s = 32'h7FC0_0000;
    end else if (ia) begin
      s = {sa, 8'hFF, 23'd0};
    end else if (ib) begin
      s = {sb, 8'hFF, 23'd0};
    end else if (!found) begin
      s = (za && zb) ? {sa & sb, 31'd0} : 32'd0;
    end else if (e >= 10'sd255) begin
      s = {sx, 8'hFF, 23'd0};
    end else if (e <= 10'sd0) begin
      s = {sx, 31'd0};
    end else begin
      s = {sx, e[7:0], mr[22:0]};
    end
  end
endmodule
