// tb_gemm_full: end-to-end test of the GEMM accelerator at its default size
// (10 x 10 slices = 40 x 40 systolic array, 512-word banks). Runs one job in
// each sparsity mode, alternating precisions, with one multi-tile job and
// stalls, and checks every result and every job's cycle count.
module tb_gemm_full;
  import sst_pkg::*;
  import tb_fp_pkg::*;

  localparam int X = 10;
  localparam int Y = 10;
  localparam int MAX_MT = 2;
  localparam int MAX_NT = 2;
  localparam int MAXK = 384;

`include "gemm_tb_body.svh"

  gemm_sst_top dut (
    .clk, .rst, .start, .hold, .cfg_dtype, .cfg_sparsity, .cfg_mt, .cfg_nt, .cfg_ks,
    .busy, .done,
    .a_we, .a_wbank, .a_waddr, .a_wdata,
    .b_we, .b_wbank, .b_wsub, .b_waddr, .b_wdata,
    .c_rd, .c_rx, .c_ry, .c_raddr, .c_rdata
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init_and_reset();
    run_job(DT_INT8, SP_DENSE, 1, 1, 16, 1'b1);
    run_job(DT_BF16, SP_2_4,   1, 1, 32, 1'b0);
    run_job(DT_INT8, SP_1_3,   2, 1, 24, 1'b0);
    run_job(DT_BF16, SP_1_4,   1, 1, 32, 1'b1);
    check(n_hold > 0, "no stall happened");
    check(n_multi_tile > 0, "no multi-tile job");
    finish_report();
  end
endmodule
