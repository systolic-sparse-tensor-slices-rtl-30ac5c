// tb_gemm_workloads: runs workload-sized jobs on the GEMM accelerator at its
// default size (10 x 10 slices = 40 x 40 array, 512-word banks), with random
// data, checking every result and every job's cycle count:
//   * a native 40x40 tile with a 512-long dense int8 reduction (A bank full),
//   * a native 40x40 tile with a 1024-long 2:4 bfloat16 reduction (512
//     compressed steps, A bank full),
//   * one 40-row slice of a vision-transformer QKV projection: 40 x 200 x 384
//     dense int8 (five column tiles, B stream spread over all four banks),
//   * a 40x40 tile of a transformer MLP down-projection: K = 1536 in 1:4 int8
//     (384 compressed steps),
//   * a native 40x40 tile with a 1152-long 1:3 bfloat16 reduction and stalls.
// Sizes of the last two come from the DeiT-Small model (embedding 384, MLP
// 1536, 197 tokens padded to 200).
module tb_gemm_workloads;
  import sst_pkg::*;
  import tb_fp_pkg::*;

  localparam int X = 10;
  localparam int Y = 10;
  localparam int MAX_MT = 1;
  localparam int MAX_NT = 5;
  localparam int MAXK = 1536;

`include "gemm_tb_body.svh"

  gemm_sst_top dut (
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
    run_job(DT_INT8, SP_DENSE, 1, 1, 512,  1'b0);
    run_job(DT_BF16, SP_2_4,   1, 1, 1024, 1'b0);
    run_job(DT_INT8, SP_DENSE, 1, 5, 384,  1'b1);
    run_job(DT_INT8, SP_1_4,   1, 1, 1536, 1'b0);
    run_job(DT_BF16, SP_1_3,   1, 1, 1152, 1'b1);
    check(n_multi_tile > 0, "no multi-tile job");
    check(n_bank_hop > 0, "no B stream crossing banks");
    finish_report();
  end
endmodule
