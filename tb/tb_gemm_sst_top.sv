// tb_gemm_sst_top: end-to-end test of the GEMM accelerator at a reduced size
// (2 x 2 slices = 8 x 8 systolic array). Runs every sparsity mode in both
// precisions, multi-tile jobs, stalls, and a dense job whose B stream spans
// two B banks; checks every result and the cycle count of each job, and
// counts a failure for any of those mechanisms that never occurred.
module tb_gemm_sst_top;
  import sst_pkg::*;
  import tb_fp_pkg::*;

  localparam int X = 2;
  localparam int Y = 2;
  localparam int MAX_MT = 2;
  localparam int MAX_NT = 2;
  localparam int MAXK = 384;

`include "gemm_tb_body.svh"

  gemm_sst_top #(.X(X), .Y(Y)) dut (
    .clk, .rst, .start, .hold, .cfg_dtype, .cfg_sparsity, .cfg_mt, .cfg_nt, .cfg_ks,
    .busy, .done,
    .a_we, .a_wbank, .a_waddr, .a_wdata,
    .b_we, .b_wbank, .b_wsub, .b_waddr, .b_wdata,
    .c_rd, .c_rx, .c_ry, .c_raddr, .c_rdata
  );

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init_and_reset();
    run_job(DT_INT8, SP_DENSE, 1, 1, 8,   1'b0);
    run_job(DT_INT8, SP_2_4,   2, 2, 32,  1'b1);
    run_job(DT_INT8, SP_1_3,   2, 1, 24,  1'b0);
    run_job(DT_INT8, SP_1_4,   1, 2, 32,  1'b1);
    run_job(DT_BF16, SP_DENSE, 2, 2, 12,  1'b1);
    run_job(DT_BF16, SP_2_4,   1, 1, 16,  1'b0);
    run_job(DT_BF16, SP_1_3,   1, 2, 36,  1'b0);
    run_job(DT_BF16, SP_1_4,   2, 1, 16,  1'b1);
    run_job(DT_INT8, SP_DENSE, 1, 2, 260, 1'b1);
    check(n_hold > 0, "no stall happened");
    check(n_multi_tile > 0, "no multi-tile job");
    check(n_bank_hop > 0, "dense B stream never crossed a bank");
    finish_report();
  end
endmodule
