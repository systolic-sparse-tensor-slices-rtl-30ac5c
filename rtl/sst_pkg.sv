// sst_pkg: types and constants shared by the systolic sparse tensor (SST)
// slice and the GEMM accelerator built from it.
//
// The four sparsity levels (dense, 2:4, 1:3, 1:4), the two precisions
// (int8 with int32 accumulation, bfloat16 with fp32 accumulation), the 4x4
// SPE grid and the 2-bit index width follow the paper.  The binary encoding
// of the 2-bit sparsity_level field and of d_type is this design's choice.
package sst_pkg;

  // Size of the systolic array inside one slice (4x4 SPEs).
  localparam int unsigned SA = 4;
  // Operand lane width: bfloat16 uses all 16 bits, int8 the low 8 bits.
  localparam int unsigned DW = 16;
  // Accumulator / output width (int32 or fp32).
  localparam int unsigned CW = 32;
  // Index width of the compressed sparse format.
  localparam int unsigned IW = 2;
  // B values loaded into one SPE per cycle in the sparse modes.
  localparam int unsigned NB = 4;

  // sparsity_level encoding (2-bit input of the slice).
  typedef enum logic [1:0] {
    SP_DENSE = 2'd0,
    SP_2_4   = 2'd1,
    SP_1_3   = 2'd2,
    SP_1_4   = 2'd3
  } sparsity_e;

  // d_type encoding.
  typedef enum logic {
    DT_INT8 = 1'b0,
    DT_BF16 = 1'b1
  } dtype_e;

  // One A entry for one SPE row: value and 2-bit index.
  typedef struct packed {
    logic [IW-1:0] ind;
    logic [DW-1:0] val;
  } a_elem_t;

  // Four B lanes entering one SPE column (lane k = k-th value of a group).
  typedef logic [NB-1:0][DW-1:0] b_lanes_t;

  // Operand stage of the A path: two registers in 2:4 mode, one otherwise.
  function automatic logic two_stage(input sparsity_e sp);
    return sp == SP_2_4;
  endfunction

endpackage
