// tb_sst_slice: checks one SST slice fed straight from "buffers" through its
// setup triangles (cfg_a_setup=1, cfg_b_ded=0), in all four sparsity modes
// and both precisions. Each run streams two back-to-back 4x4 output tiles
// plus a flush step and checks:
//   * the results of both tiles against independently computed products;
//   * that column j of a tile leaves on valid_out exactly s*(3+j)+1 cycles
//     after the next tile's first step (s = 2 in 2:4 mode, else 1), i.e. a
//     tile of reduction length K takes K, K/2, K/3 or K/4 cycles;
//   * accumulate_out = accumulate delayed by four operand stages;
//   * b_ded_out (column j) = b_data of column j delayed by j+4 B loads, and
//     a_data_out (row i) = a_data of row i delayed by i+4 operand stages.
// One run uses the dedicated B input instead (cfg_b_ded=1) with b_data held
// at zero, skewing B in the testbench.
module tb_sst_slice;
  import sst_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst = 1;
  logic cfg_a_setup, cfg_b_ded, enable, accumulate, accumulate_out, valid_out;
  dtype_e d_type;
  sparsity_e sparsity_level;
  a_elem_t  [3:0] a_data, a_data_out;
  b_lanes_t [3:0] b_data, b_ded_in, b_ded_out;
  logic [3:0][31:0] c_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sst_slice dut (.*);

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

  task automatic run(input sparsity_e sp, input dtype_e dt, input int KS, input bit ded);
    int R, s, T, L;
    logic [15:0] av [2][4][64];      // [tile][row][step]
    logic [1:0]  ai [2][4][64];
    logic [15:0] bv [2][64][4][4];   // [tile][group][column][lane]
    logic [31:0] ref_c [2][4][4];
    a_elem_t  [3:0] a_hist [$];      // per enabled cycle, newest first
    logic     f_hist [$];
    b_lanes_t [3:0] b_hist [$];      // per B load, newest first
    b_lanes_t [3:0] b_skew_src [$];  // for the dedicated-input run
    int got_cols;
    R = (sp == SP_1_3) ? 3 : 4;
    s = two_stage(sp) ? 2 : 1;
    L = 2 * KS;
    for (int tl = 0; tl < 2; tl++) begin
      for (int g = 0; g < KS; g++)
        for (int j = 0; j < 4; j++)
          for (int l = 0; l < 4; l++)
            bv[tl][g][j][l] = (dt == DT_BF16) ? rand_bf16(120, 134) : {8'd0, 8'($urandom)};
      for (int i = 0; i < 4; i++)
        for (int k = 0; k < KS; k++) begin
          av[tl][i][k] = (dt == DT_BF16) ? rand_bf16(120, 134) : {8'd0, 8'($urandom)};
          ai[tl][i][k] = (sp == SP_DENSE) ? 2'd0 : 2'($urandom_range(R - 1));
        end
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          int iacc = 0;
          logic [31:0] facc = '0;
          for (int k = 0; k < KS; k++) begin
            int g = (sp == SP_2_4) ? k / 2 : k;
            logic [15:0] bb = bv[tl][g][j][ai[tl][i][k]];
            if (dt == DT_INT8) iacc += int'($signed(av[tl][i][k][7:0])) * int'($signed(bb[7:0]));
            else begin
              real p = bf16_to_real(av[tl][i][k]) * bf16_to_real(bb);
              facc = (k == 0) ? real_to_fp32(p) : real_to_fp32(fp32_to_real(facc) + p);
            end
          end
          ref_c[tl][i][j] = (dt == DT_INT8) ? 32'(iacc) : facc;
        end
    end
    sparsity_level = sp; d_type = dt; cfg_a_setup = 1'b1; cfg_b_ded = ded;
    rst = 1; enable = 0;
    @(negedge clk);
    rst = 0;
    got_cols = 0;
    for (T = 0; T < L + 40; T++) begin
      int tl = T / KS, k = T % KS, g;
      enable = 1'b1;
      a_data = '0; b_data = '0; b_ded_in = '0;
      accumulate = !(k == 0 && T <= L);
      if (T < L) begin
        g = (sp == SP_2_4) ? k / 2 : k;
        for (int i = 0; i < 4; i++) begin
          a_data[i].val = av[tl][i][k];
          a_data[i].ind = ai[tl][i][k];
        end
        for (int j = 0; j < 4; j++)
          for (int l = 0; l < 4; l++) b_data[j][l] = bv[tl][g][j][l];
      end
      if (ded) begin
        // Column j of the dedicated input lags j B-stages (j*s cycles).
        b_skew_src.push_front(b_data);
        for (int j = 0; j < 4; j++)
          b_ded_in[j] = (b_skew_src.size() > j * s) ? b_skew_src[j * s][j] : '0;
        b_data = '0;
      end
      #1;
      // Output checks for this cycle.
      for (int tl2 = 0; tl2 < 2; tl2++)
        for (int j = 0; j < 4; j++)
          if (T == (tl2 + 1) * KS + 1 + s * (3 + j)) begin
            check(valid_out, $sformatf("sp%0d dt%0d tile %0d col %0d: valid_out missing at %0d", sp, dt, tl2, j, T));
            for (int i = 0; i < 4; i++)
              check(dt == DT_BF16 ? fp32_eq(c_data[i], ref_c[tl2][i][j]) : c_data[i] == ref_c[tl2][i][j],
                    $sformatf("sp%0d dt%0d tile %0d C[%0d][%0d]=%h exp %h", sp, dt, tl2, i, j,
                              c_data[i], ref_c[tl2][i][j]));
            got_cols++;
          end
      if (valid_out) begin
        bit expected;
        expected = 0;
        for (int tl2 = 0; tl2 < 2; tl2++)
          for (int j = 0; j < 4; j++)
            if (T == (tl2 + 1) * KS + 1 + s * (3 + j)) expected = 1;
        check(expected, $sformatf("unexpected valid_out at %0d", T));
      end
      // Pass-through paths.
      if (f_hist.size() >= 4 * s) check(accumulate_out == f_hist[4 * s - 1], "accumulate_out delay");
      if (!ded) begin
        for (int i = 0; i < 4; i++)
          if (a_hist.size() >= s * (i + 4))
            check(a_data_out[i] == a_hist[s * (i + 4) - 1][i], $sformatf("a_data_out row %0d T=%0d sp%0d got %h exp %h", i, T, sp, a_data_out[i], a_hist[s * (i + 4) - 1][i]));
        for (int j = 0; j < 4; j++)
          if (b_hist.size() >= j + 4)
            check(b_ded_out[j] == b_hist[j + 3][j], $sformatf("b_ded_out col %0d", j));
      end
      @(posedge clk);
      a_hist.push_front(a_data);
      f_hist.push_front(accumulate);
      if (!two_stage(sp) || T % 2 == 0)
        b_hist.push_front(b_data);
      @(negedge clk);
    end
    check(got_cols == 8, "not all columns seen");
  endtask

  initial begin
    enable = 0; accumulate = 1; a_data = '0; b_data = '0; b_ded_in = '0;
    cfg_a_setup = 1; cfg_b_ded = 0; d_type = DT_INT8; sparsity_level = SP_DENSE;
    repeat (2) @(negedge clk);
    run(SP_DENSE, DT_INT8, 6, 1'b0);
    run(SP_2_4,   DT_INT8, 8, 1'b0);
    run(SP_1_3,   DT_INT8, 5, 1'b0);
    run(SP_1_4,   DT_INT8, 4, 1'b0);
    run(SP_DENSE, DT_BF16, 5, 1'b0);
    run(SP_2_4,   DT_BF16, 10, 1'b0);
    run(SP_1_3,   DT_BF16, 4, 1'b0);
    run(SP_1_4,   DT_BF16, 6, 1'b0);
    run(SP_2_4,   DT_INT8, 8, 1'b1);
    run(SP_DENSE, DT_BF16, 4, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
