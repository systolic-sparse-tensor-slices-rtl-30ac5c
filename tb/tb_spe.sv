// tb_spe: checks one sparse processing element in all four sparsity modes
// and both precisions. For each run it streams two back-to-back output tiles
// of compressed A entries and B groups (four lanes, held two cycles in 2:4
// mode), with a one-cycle stall, then a flush step. It checks that each
// result appears with done exactly one cycle after the step that starts the
// next tile (so a tile of KS steps takes KS cycles: K, K/2, K/3, K/4), that
// the value matches an independently computed dot product, and that a_out
// lags a_in by one stage (two cycles in 2:4 mode, one otherwise).
module tb_spe;
  import sst_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst = 1, en = 0, adv, acc_in, acc_out, done;
  sparsity_e sp;
  dtype_e dt;
  a_elem_t a_in, a_out;
  b_lanes_t b_in, b_out;
  logic [31:0] c;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  spe dut (.clk, .rst, .en, .sp, .dt, .adv, .a_in, .acc_in, .b_in,
           .a_out, .acc_out, .b_out, .c, .done);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stream NT tiles of KS steps; returns after checking results.
  task automatic run(input sparsity_e s_, input dtype_e d_, input int KS);
    int R, s, t, en_cnt;
    bit stalled;
    logic [15:0] av [2][64];
    logic [1:0]  ai [2][64];
    logic [15:0] bv [2][64][4];
    logic [31:0] exp_c [2];
    a_elem_t hist [$];
    sp = s_; dt = d_;
    R = (s_ == SP_1_3) ? 3 : 4;
    s = two_stage(s_) ? 2 : 1;
    // Operands: per step one A entry; per B group four lanes.
    for (int tl = 0; tl < 2; tl++) begin
      int iacc = 0;
      logic [31:0] facc = '0;
      for (int k = 0; k < KS; k++) begin
        int g = (s_ == SP_2_4) ? k / 2 : k;
        ai[tl][k] = (s_ == SP_DENSE) ? 2'd0 : 2'($urandom_range(R - 1));
        av[tl][k] = (d_ == DT_BF16) ? rand_bf16(120, 134) : {8'd0, 8'($urandom)};
        if (k == 0 || s_ != SP_2_4 || k % 2 == 0)
          for (int l = 0; l < 4; l++)
            bv[tl][g][l] = (d_ == DT_BF16) ? rand_bf16(120, 134) : {8'd0, 8'($urandom)};
      end
      for (int k = 0; k < KS; k++) begin
        int g = (s_ == SP_2_4) ? k / 2 : k;
        logic [15:0] bb = bv[tl][g][ai[tl][k]];
        if (d_ == DT_INT8) iacc += int'($signed(av[tl][k][7:0])) * int'($signed(bb[7:0]));
        else begin
          real p = bf16_to_real(av[tl][k]) * bf16_to_real(bb);
          facc = (k == 0) ? real_to_fp32(p) : real_to_fp32(fp32_to_real(facc) + p);
        end
      end
      exp_c[tl] = (d_ == DT_INT8) ? 32'(iacc) : facc;
    end
    // Reset, then drive.
    rst = 1; en = 0;
    @(negedge clk);
    rst = 0;
    t = 0;        // step index over both tiles plus flush
    en_cnt = 0;   // enabled cycles since reset (phase)
    stalled = 0;
    while (t <= 2 * KS + 1) begin
      int tl = t / KS, k = t % KS, g;
      en = !(t == 3 && !stalled);               // one stall cycle
      if (!en) stalled = 1;
      adv = !two_stage(s_) || (en_cnt % 2 == 0);
      if (t < 2 * KS) begin
        g = (s_ == SP_2_4) ? k / 2 : k;
        a_in.val = av[tl][k];
        a_in.ind = ai[tl][k];
        acc_in   = (k != 0);
        for (int l = 0; l < 4; l++) b_in[l] = bv[tl][g][l];
      end else begin
        a_in = '0; acc_in = (t != 2 * KS); b_in = '0;
      end
      @(posedge clk);
      #1;
      if (en) begin
        hist.push_front(a_in);
        if (hist.size() > s) void'(hist.pop_back());
        if (hist.size() == s) check(a_out == hist[s-1], "a_out delay");
        // done one cycle after the step that starts the next tile
        if (t == KS) check(done && c == exp_c[0],
                           $sformatf("tile0 sp%0d dt%0d c=%h exp %h done=%b", s_, d_, c, exp_c[0], done));
        else if (t == 2 * KS) check(done && c == exp_c[1],
                           $sformatf("tile1 sp%0d dt%0d c=%h exp %h done=%b", s_, d_, c, exp_c[1], done));
        else check(!done, $sformatf("spurious done at step %0d", t));
        t++;
        en_cnt++;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    sp = SP_DENSE; dt = DT_INT8; a_in = '0; b_in = '0; acc_in = 1; adv = 1;
    repeat (2) @(negedge clk);
    run(SP_DENSE, DT_INT8, 6);
    run(SP_2_4,   DT_INT8, 8);
    run(SP_1_3,   DT_INT8, 5);
    run(SP_1_4,   DT_INT8, 5);
    run(SP_DENSE, DT_BF16, 6);
    run(SP_2_4,   DT_BF16, 8);
    run(SP_1_3,   DT_BF16, 4);
    run(SP_1_4,   DT_BF16, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
