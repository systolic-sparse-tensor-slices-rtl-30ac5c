// tb_sst_array: checks a 2 x 2 array of SST slices (8 x 8 systolic array)
// fed by the testbench the way the buffer banks feed it: bank A_y and bank
// group B_x start 4*y and 4*x operand stages late. For every sparsity mode
// (int8 and bfloat16) it streams two back-to-back 8x8 output tiles plus a
// flush step and checks every slice's results, the cycle on which each of
// its columns appears (which shows the accumulate flag reaching each slice
// over accumulate_out and the B data over the dedicated wires on time), and
// that no other valid_out occurs.
module tb_sst_array;
  import sst_pkg::*;
  import tb_fp_pkg::*;

  localparam int X = 2, Y = 2;
  logic clk = 0, rst = 1, enable, accumulate;
  dtype_e d_type;
  sparsity_e sparsity_level;
  a_elem_t  [Y-1:0][3:0] a_in;
  b_lanes_t [X-1:0][3:0] b_in;
  logic [X-1:0][Y-1:0][3:0][31:0] c_data;
  logic [X-1:0][Y-1:0] valid_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sst_array #(.X(X), .Y(Y)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input sparsity_e sp, input dtype_e dt, input int KS);
    int R, s, L, seen;
    logic [15:0] av [2][8][64];      // [tile][row m][step]
    logic [1:0]  ai [2][8][64];
    logic [15:0] bv [2][64][8][4];   // [tile][group][column n][lane]
    logic [31:0] ref_c [2][8][8];
    R = (sp == SP_1_3) ? 3 : 4;
    s = two_stage(sp) ? 2 : 1;
    L = 2 * KS;
    for (int tl = 0; tl < 2; tl++) begin
      for (int g = 0; g < KS; g++)
        for (int n = 0; n < 8; n++)
          for (int l = 0; l < 4; l++)
            bv[tl][g][n][l] = (dt == DT_BF16) ? rand_bf16(120, 134) : {8'd0, 8'($urandom)};
      for (int m = 0; m < 8; m++)
        for (int k = 0; k < KS; k++) begin
          av[tl][m][k] = (dt == DT_BF16) ? rand_bf16(120, 134) : {8'd0, 8'($urandom)};
          ai[tl][m][k] = (sp == SP_DENSE) ? 2'd0 : 2'($urandom_range(R - 1));
        end
      for (int m = 0; m < 8; m++)
        for (int n = 0; n < 8; n++) begin
          int iacc = 0;
          logic [31:0] facc = '0;
          for (int k = 0; k < KS; k++) begin
            int g = (sp == SP_2_4) ? k / 2 : k;
            logic [15:0] bb = bv[tl][g][n][ai[tl][m][k]];
            if (dt == DT_INT8) iacc += int'($signed(av[tl][m][k][7:0])) * int'($signed(bb[7:0]));
            else begin
              real p = bf16_to_real(av[tl][m][k]) * bf16_to_real(bb);
              facc = (k == 0) ? real_to_fp32(p) : real_to_fp32(fp32_to_real(facc) + p);
            end
          end
          ref_c[tl][m][n] = (dt == DT_INT8) ? 32'(iacc) : facc;
        end
    end
    sparsity_level = sp; d_type = dt;
    rst = 1; enable = 0;
    @(negedge clk);
    rst = 0;
    seen = 0;
    for (int T = 0; T < L + 60; T++) begin
      enable = 1'b1;
      accumulate = !(T % KS == 0 && T <= L);
      for (int y = 0; y < Y; y++) begin
        int p = T - 4 * s * y;
        a_in[y] = '0;
        if (p >= 0 && p < L)
          for (int i = 0; i < 4; i++) begin
            a_in[y][i].val = av[p / KS][4 * y + i][p % KS];
            a_in[y][i].ind = ai[p / KS][4 * y + i][p % KS];
          end
      end
      for (int x = 0; x < X; x++) begin
        int p = T - 4 * s * x;
        b_in[x] = '0;
        if (p >= 0 && p < L) begin
          int g = (sp == SP_2_4) ? (p % KS) / 2 : p % KS;
          for (int c = 0; c < 4; c++)
            for (int l = 0; l < 4; l++) b_in[x][c][l] = bv[p / KS][g][4 * x + c][l];
        end
      end
      #1;
      for (int x = 0; x < X; x++)
        for (int y = 0; y < Y; y++) begin
          bit expected;
          expected = 0;
          for (int tl = 0; tl < 2; tl++)
            for (int j = 0; j < 4; j++)
              if (T == (tl + 1) * KS + 1 + s * (3 + j) + 4 * s * (x + y)) begin
                expected = 1;
                for (int i = 0; i < 4; i++)
                  check(dt == DT_BF16 ? fp32_eq(c_data[x][y][i], ref_c[tl][4 * y + i][4 * x + j])
                                      : c_data[x][y][i] == ref_c[tl][4 * y + i][4 * x + j],
                        $sformatf("sp%0d dt%0d slice(%0d,%0d) tile %0d C[%0d][%0d]", sp, dt, y, x, tl,
                                  4 * y + i, 4 * x + j));
              end
          check(valid_out[x][y] == expected,
                $sformatf("sp%0d slice(%0d,%0d) valid_out=%b at %0d", sp, y, x, valid_out[x][y], T));
          if (valid_out[x][y]) seen++;
        end
      @(negedge clk);
    end
    check(seen == 2 * 4 * X * Y, "column count");
  endtask

  initial begin
    enable = 0; accumulate = 1; a_in = '0; b_in = '0;
    d_type = DT_INT8; sparsity_level = SP_DENSE;
    repeat (2) @(negedge clk);
    run(SP_DENSE, DT_INT8, 5);
    run(SP_2_4,   DT_INT8, 8);
    run(SP_1_3,   DT_BF16, 4);
    run(SP_1_4,   DT_INT8, 6);
    run(SP_2_4,   DT_BF16, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
