// gemm_tb_body.svh: shared body of the end-to-end GEMM testbenches.
//
// Included inside a testbench module that has declared localparams X and Y
// (slices), MAX_MT and MAX_NT (largest tile counts of its jobs) and MAXK
// (largest reduction length), and instantiated gemm_sst_top as 'dut' on the signals declared below. It
// generates random structured-sparse A and dense B matrices, compresses A to
// (value, 2-bit index) form, loads the buffers through the host ports, runs
// a job, checks the job's cycle count against the expected
// MT*NT*K/ratio + pipeline latency, and compares every result in buffer C
// with a reference computed here (int8: exact int32; bfloat16: fp32 sums in
// the SPE's accumulation order, each rounded to nearest even).

  localparam int AWB = 9;
  localparam int XWB = (X > 1) ? $clog2(X) : 1;
  localparam int YWB = (Y > 1) ? $clog2(Y) : 1;
  localparam int MAXM = 4 * Y * MAX_MT;
  localparam int MAXN = 4 * X * MAX_NT;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic      start, hold, busy, done;
  dtype_e    cfg_dtype;
  sparsity_e cfg_sparsity;
  logic [11:0] cfg_mt, cfg_nt, cfg_ks;
  logic           a_we;
  logic [YWB-1:0] a_wbank;
  logic [AWB-1:0] a_waddr;
  a_elem_t [3:0]  a_wdata;
  logic           b_we;
  logic [XWB-1:0] b_wbank;
  logic [1:0]     b_wsub;
  logic [AWB-1:0] b_waddr;
  logic [3:0][15:0] b_wdata;
  logic           c_rd;
  logic [XWB-1:0] c_rx;
  logic [YWB-1:0] c_ry;
  logic [AWB-1:0] c_raddr;
  logic [3:0][31:0] c_rdata;

  int checks = 0;
  int failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Mechanism counters.
  int n_mode[4];
  int n_dtype[2];
  int n_hold = 0;          // stall cycles during a job
  int n_multi_tile = 0;    // jobs with more than one output tile
  int n_bank_hop = 0;      // dense jobs whose B stream crosses into bank 1..3
  int n_valid = 0;         // result columns written to buffer C
  always @(posedge clk) if (!rst) n_valid <= n_valid + $countones(dut.u_array.valid_out);
  always @(posedge clk) if (busy && hold) n_hold <= n_hold + 1;

  // Matrices of the current job.
  logic [15:0] A [MAXM][MAXK];     // dense view (zeros included)
  logic [15:0] B [MAXK][MAXN];
  logic [15:0] Av [MAXM][MAXK];    // compressed values
  logic [1:0]  Aidx [MAXM][MAXK];    // compressed indices
  logic [31:0] Cref [MAXM][MAXN];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic logic [15:0] rand_val(input dtype_e dt);
    logic [7:0] v;
    if (dt == DT_BF16) return rand_bf16(120, 134);
    do v = 8'($urandom); while (v == 8'd0);
    return {8'd0, v};
  endfunction

  // Build A (sparse pattern of mode sp), its compressed form and B.
  task automatic gen(input dtype_e dt, input sparsity_e sp, input int M, input int N,
                     input int K, output int ks);
    int R, NZ, pos[4], n;
    R  = (sp == SP_1_3) ? 3 : 4;
    NZ = (sp == SP_2_4) ? 2 : 1;
    for (int m = 0; m < M; m++) begin
      for (int k = 0; k < K; k++) A[m][k] = '0;
      n = 0;
      if (sp == SP_DENSE) begin
        for (int k = 0; k < K; k++) begin
          A[m][k]  = rand_val(dt);
          Av[m][k] = A[m][k];
          Aidx[m][k] = '0;
        end
        n = K;
      end else begin
        for (int g = 0; g < K / R; g++) begin
          if (NZ == 1) begin
            pos[0] = int'($urandom_range(R - 1));
          end else begin
            pos[0] = int'($urandom_range(R - 2));
            pos[1] = pos[0] + 1 + int'($urandom_range(R - 2 - pos[0]));
          end
          for (int z = 0; z < NZ; z++) begin
            A[m][g * R + pos[z]] = rand_val(dt);
            Av[m][n] = A[m][g * R + pos[z]];
            Aidx[m][n] = 2'(pos[z]);
            n++;
          end
        end
      end
      ks = n;
    end
    for (int k = 0; k < K; k++)
      for (int c = 0; c < N; c++) B[k][c] = rand_val(dt);
  endtask

  // Reference result, accumulated in the order the SPE does it.
  task automatic reference(input dtype_e dt, input sparsity_e sp, input int M, input int N,
                           input int K, input int ks);
    int R;
    R = (sp == SP_1_3) ? 3 : 4;
    for (int m = 0; m < M; m++) begin
      for (int c = 0; c < N; c++) begin
        if (dt == DT_INT8) begin
          int acc = 0;
          for (int k = 0; k < K; k++)
            acc += int'($signed(A[m][k][7:0])) * int'($signed(B[k][c][7:0]));
          Cref[m][c] = 32'(acc);
        end else begin
          logic [31:0] acc = '0;
          for (int s = 0; s < ks; s++) begin
            int kk;
            real p;
            if (sp == SP_DENSE)    kk = s;
            else if (sp == SP_2_4) kk = (s / 2) * 4 + int'(Aidx[m][s]);
            else                   kk = s * R + int'(Aidx[m][s]);
            p = bf16_to_real(Av[m][s]) * bf16_to_real(B[kk][c]);
            if (s == 0) acc = real_to_fp32(p);
            else        acc = real_to_fp32(fp32_to_real(acc) + p);
          end
          Cref[m][c] = acc;
        end
      end
    end
  endtask

  task automatic load(input sparsity_e sp, input int MT, input int NT, input int ks);
    int R, KSB;
    R   = (sp == SP_1_3) ? 3 : 4;
    KSB = (sp == SP_2_4) ? ks / 2 : ks;
    for (int mt = 0; mt < MT; mt++)
      for (int y = 0; y < Y; y++)
        for (int k = 0; k < ks; k++) begin
          @(negedge clk);
          a_we    = 1'b1;
          a_wbank = YWB'(y);
          a_waddr = AWB'(mt * ks + k);
          for (int i = 0; i < 4; i++) begin
            a_wdata[i].val = Av[mt * 4 * Y + 4 * y + i][k];
            a_wdata[i].ind = Aidx[mt * 4 * Y + 4 * y + i][k];
          end
        end
    @(negedge clk);
    a_we = 1'b0;
    for (int nt = 0; nt < NT; nt++)
      for (int x = 0; x < X; x++) begin
        if (sp == SP_DENSE) begin
          for (int k = 0; k < ks; k++) begin
            int j = nt * ks + k;
            @(negedge clk);
            b_we = 1'b1; b_wbank = XWB'(x); b_wsub = 2'(j / 512); b_waddr = AWB'(j % 512);
            for (int c = 0; c < 4; c++) b_wdata[c] = B[k][nt * 4 * X + 4 * x + c];
          end
        end else begin
          for (int r = 0; r < R; r++)
            for (int g = 0; g < KSB; g++) begin
              @(negedge clk);
              b_we = 1'b1; b_wbank = XWB'(x); b_wsub = 2'(r); b_waddr = AWB'(nt * KSB + g);
              for (int c = 0; c < 4; c++) b_wdata[c] = B[R * g + r][nt * 4 * X + 4 * x + c];
            end
        end
      end
    @(negedge clk);
    b_we = 1'b0;
  endtask

  // One complete job: generate, load, run, check timing and results.
  task automatic run_job(input dtype_e dt, input sparsity_e sp, input int MT, input int NT,
                         input int K, input bit stalls);
    int M, N, ks, s, L, holds;
    longint t0, t1, expect_cycles;
    M = MT * 4 * Y;
    N = NT * 4 * X;
    gen(dt, sp, M, N, K, ks);
    reference(dt, sp, M, N, K, ks);
    load(sp, MT, NT, ks);
    L = MT * NT * ks;
    s = (sp == SP_2_4) ? 2 : 1;
    @(negedge clk);
    start = 1'b1; cfg_dtype = dt; cfg_sparsity = sp;
    cfg_mt = 12'(MT); cfg_nt = 12'(NT); cfg_ks = 12'(ks);
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    holds = 0;
    // Stall for a while inside the operand stream.
    if (stalls) begin
      repeat (4) @(negedge clk);
      for (int h = 0; h < 7; h++) begin
        hold = ($urandom_range(1) == 1);
        if (hold) holds++;
        @(negedge clk);
      end
      hold = 1'b0;
    end
    while (!done) @(negedge clk);
    t1 = cyc;
    // start is sampled in IDLE, one CLEAR cycle, one idle RUN cycle, L
    // operand steps, one flush step, then the flush crosses the array
    // (4*(X-1+Y-1) stages), the last slice's SPE(3,3) finishes 6 stages
    // later, and done follows two cycles after its last column.
    expect_cycles = longint'(L + 7 + s * (4 * (X + Y - 2) + 6) + holds);
    check(t1 - t0 == expect_cycles,
          $sformatf("cycles %0d expected %0d (mode %0d)", t1 - t0, expect_cycles, sp));
    n_mode[sp]++;
    n_dtype[dt]++;
    if (MT * NT > 1) n_multi_tile++;
    if (sp == SP_DENSE && NT * ks > 512) n_bank_hop++;
    // Read back buffer C.
    for (int x = 0; x < X; x++)
      for (int y = 0; y < Y; y++)
        for (int a = 0; a < 4 * MT * NT; a++) begin
          int tile, col, mt, nt;
          @(negedge clk);
          c_rd = 1'b1; c_rx = XWB'(x); c_ry = YWB'(y); c_raddr = AWB'(a);
          @(negedge clk);
          c_rd = 1'b0;
          tile = a / 4; col = a % 4; mt = tile / NT; nt = tile % NT;
          for (int i = 0; i < 4; i++) begin
            int m = mt * 4 * Y + 4 * y + i;
            int n = nt * 4 * X + 4 * x + col;
            if (dt == DT_BF16)
              check(fp32_eq(c_rdata[i], Cref[m][n]),
                    $sformatf("bf16 sp%0d C[%0d][%0d]=%h exp %h", sp, m, n, c_rdata[i], Cref[m][n]));
            else
              check(c_rdata[i] == Cref[m][n],
                    $sformatf("int8 sp%0d C[%0d][%0d]=%h exp %h", sp, m, n, c_rdata[i], Cref[m][n]));
          end
        end
  endtask

  task automatic init_and_reset();
    start = 0; hold = 0; cfg_dtype = DT_INT8; cfg_sparsity = SP_DENSE;
    cfg_mt = 1; cfg_nt = 1; cfg_ks = 4;
    a_we = 0; a_wbank = '0; a_waddr = '0; a_wdata = '0;
    b_we = 0; b_wbank = '0; b_wsub = '0; b_waddr = '0; b_wdata = '0;
    c_rd = 0; c_rx = '0; c_ry = '0; c_raddr = '0;
    rst = 1'b1;
    repeat (3) @(negedge clk);
    rst = 1'b0;
  endtask

  task automatic finish_report();
    for (int i = 0; i < 4; i++) check(n_mode[i] > 0, $sformatf("sparsity mode %0d never run", i));
    check(n_valid > 0, "no valid_out");
    $display("mechanisms: dense=%0d 2:4=%0d 1:3=%0d 1:4=%0d int8=%0d bf16=%0d stall_cycles=%0d multi_tile_jobs=%0d bank_hop_jobs=%0d valid_out=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_dtype[0], n_dtype[1],
             n_hold, n_multi_tile, n_bank_hop, n_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
