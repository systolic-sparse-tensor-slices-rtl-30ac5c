// tb_gemm_ctrl: checks the control and tiling sequencer on its own (X = Y = 2).
// For random jobs in every mode it records the enabled cycles and checks:
// the A address stream of bank 0 (tile rows mt, all K steps, repeated for
// each nt), the B address stream of group 0 (read every cycle, or every
// other cycle in 2:4 mode, from the right tile base), that bank 1 of A and
// group 1 of B repeat bank/group 0 exactly 4 (8 in 2:4 mode) enabled cycles
// later, one accumulate=0 per tile plus one for the flush step, that enable
// drops while hold is high, and that done comes one cycle after the last
// column (last_valid pulses driven by the testbench) and busy then falls.
module tb_gemm_ctrl;
  import sst_pkg::*;
  localparam int X = 2, Y = 2, DEPTH = 512, AW = 9;
  logic clk = 0, rst = 1, start = 0, hold = 0, last_valid = 0;
  dtype_e cfg_dtype = DT_INT8;
  sparsity_e cfg_sparsity = SP_DENSE;
  logic [11:0] cfg_mt = 1, cfg_nt = 1, cfg_ks = 4;
  logic busy, done, sst_rst, enable, accumulate;
  dtype_e d_type;
  sparsity_e sparsity_level;
  logic [Y-1:0] a_rd;
  logic [Y-1:0][AW-1:0] a_addr;
  logic [X-1:0] b_rd, b_v;
  logic [X-1:0][AW+1:0] b_addr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  gemm_ctrl #(.X(X), .Y(Y), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic job(input sparsity_e sp, input int MT, input int NT, input int KS);
    int a0[$], a1[$], b0[$], b1[$], flags, s, nb, cyc;
    int exp_a[$], exp_b[$];
    bit seen_done;
    s = (sp == SP_2_4) ? 2 : 1;
    cfg_sparsity = sp; cfg_dtype = dtype_e'($urandom_range(1));
    cfg_mt = 12'(MT); cfg_nt = 12'(NT); cfg_ks = 12'(KS);
    start = 1;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    flags = 0;
    cyc = 0;
    // Stream phase: collect until all four streams are finished.
    while (cyc < MT * NT * KS + 8 * s * X + 20) begin
      hold = ($urandom_range(7) == 0);
      #1;
      if (hold) check(!enable, "enable while hold");
      if (enable) begin
        check(d_type == cfg_dtype && sparsity_level == sp, "mode outputs");
        if (a_rd[0]) a0.push_back(int'(a_addr[0]));
        if (a_rd[1]) a1.push_back(int'(a_addr[1]));
        if (b_rd[0]) b0.push_back(int'(b_addr[0]));
        if (b_rd[1]) b1.push_back(int'(b_addr[1]));
        if (!accumulate) flags++;
        cyc++;
      end
      @(negedge clk);
    end
    hold = 0;
    for (int mt = 0; mt < MT; mt++)
      for (int nt = 0; nt < NT; nt++)
        for (int k = 0; k < KS; k++) begin
          exp_a.push_back(mt * KS + k);
          if (sp == SP_2_4) begin
            if (k % 2 == 0) exp_b.push_back(nt * (KS / 2) + k / 2);
          end else exp_b.push_back(nt * KS + k);
        end
    check(a0.size() == exp_a.size() && a1.size() == exp_a.size(),
          $sformatf("A stream sp%0d (%0d words, expected %0d)", sp, a0.size(), exp_a.size()));
    check(b0.size() == exp_b.size() && b1.size() == exp_b.size(),
          $sformatf("B stream sp%0d (%0d words, expected %0d)", sp, b0.size(), exp_b.size()));
    for (int i = 0; i < exp_a.size() && i < a0.size() && i < a1.size(); i++)
      check(a0[i] == exp_a[i] && a1[i] == exp_a[i], $sformatf("A word %0d: %0d/%0d, expected %0d", i, a0[i], a1[i], exp_a[i]));
    for (int i = 0; i < exp_b.size() && i < b0.size() && i < b1.size(); i++)
      check(b0[i] == exp_b[i] && b1[i] == exp_b[i], $sformatf("B word %0d: %0d/%0d, expected %0d", i, b0[i], b1[i], exp_b[i]));
    check(flags == MT * NT + 1, $sformatf("accumulate=0 count %0d", flags));
    // Completion: hand over the columns one by one.
    nb = 4 * MT * NT;
    seen_done = 0;
    for (int c = 0; c < nb; c++) begin
      last_valid = 1;
      @(negedge clk);
      last_valid = 0;
      check(!done, "done before last column");
    end
    repeat (3) begin
      if (done) seen_done = 1;
      @(negedge clk);
    end
    check(seen_done, "done pulse");
    check(!busy, "busy after done");
  endtask

  task automatic stagger_check(input sparsity_e sp);
    // A single tile: bank 1 must issue address 0 exactly 4*s enabled
    // cycles after bank 0.
    int t0, t1, n, s;
    s = (sp == SP_2_4) ? 2 : 1;
    cfg_sparsity = sp; cfg_mt = 1; cfg_nt = 1; cfg_ks = 8;
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = -1; t1 = -1; n = 0;
    while (n < 60) begin
      #1;
      if (enable) begin
        if (a_rd[0] && a_addr[0] == 0 && t0 < 0) t0 = n;
        if (a_rd[1] && a_addr[1] == 0 && t1 < 0) t1 = n;
        if (b_rd[1] && b_addr[1] == 0) check(n == t0 + 4 * s, "B group 1 lag");
        n++;
      end
      @(negedge clk);
    end
    check(t0 >= 0 && t1 - t0 == 4 * s, $sformatf("A bank lag %0d", t1 - t0));
    for (int c = 0; c < 4; c++) begin
      last_valid = 1;
      @(negedge clk);
    end
    last_valid = 0;
    repeat (3) @(negedge clk);
    check(!busy, "idle after stagger job");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    check(!busy && !enable && !done, "idle after reset");
    for (int m = 0; m < 4; m++) stagger_check(sparsity_e'(m));
    for (int n = 0; n < 24; n++) begin
      sparsity_e sp;
      int ks;
      sp = sparsity_e'(n % 4);
      ks = (sp == SP_2_4) ? 2 * $urandom_range(4, 12) : $urandom_range(4, 20);
      job(sp, $urandom_range(1, 3), $urandom_range(1, 3), ks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
