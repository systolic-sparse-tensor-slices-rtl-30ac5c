// sst_array: Y x X array of SST slices forming a (4Y) x (4X) systolic array.
//
// Slice (y,x) sits in row y and column x of the logical array. Wiring, as
// in the paper's GEMM design:
//   * A: slice (y,0) takes buffer bank A_y through its setup triangle; the
//     other slices take a_data_out of their left neighbour (global routing),
//     bypassing the triangle.
//   * B: slice (0,x) takes bank data through its setup triangle; the slices
//     below take b_ded_out of the slice above over the dedicated vertical
//     wires of their FPGA column.
//   * accumulate: driven only into slice (0,0); slice (y,x>0) takes
//     accumulate_out of its left neighbour and slice (y>0,0) that of the
//     slice above, so the flag reaches every slice together with its data.
//   * Every slice has its own C output (c_data, valid_out) to its bank.
// The static multiplexer settings are fixed here by each slice's position.
// Bank streams must be staggered by the caller: the data for row y and
// column x must arrive 4*y and 4*x operand stages after those of slice (0,0)
// (a stage is 2 cycles in 2:4 mode, 1 otherwise).
module sst_array
  import sst_pkg::*;
#(
  parameter int unsigned X = 10,
  parameter int unsigned Y = 10
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      enable,
  input  logic      accumulate,
  input  dtype_e    d_type,
  input  sparsity_e sparsity_level,
  input  a_elem_t  [Y-1:0][SA-1:0] a_in,             // from buffer A banks
  input  b_lanes_t [X-1:0][SA-1:0] b_in,             // from the B bank muxes
  output logic     [X-1:0][Y-1:0][SA-1:0][CW-1:0] c_data,
  output logic     [X-1:0][Y-1:0] valid_out
);
  a_elem_t  [Y-1:0][X-1:0][SA-1:0] a_out;
  b_lanes_t [Y-1:0][X-1:0][SA-1:0] b_out;
  logic     [Y-1:0][X-1:0]         acc_out;

  for (genvar y = 0; y < Y; y++) begin : g_y
    for (genvar x = 0; x < X; x++) begin : g_x
      a_elem_t  [SA-1:0] a_i;
      b_lanes_t [SA-1:0] b_g, b_d;
      logic              acc_i;

      if (x == 0) begin : g_a_edge
        assign a_i = a_in[y];
      end else begin : g_a_chain
        assign a_i = a_out[y][x-1];
      end

      if (y == 0) begin : g_b_edge
        assign b_g = b_in[x];
        assign b_d = '0;
      end else begin : g_b_ded
        assign b_g = '0;
        assign b_d = b_out[y-1][x];
      end

      if (x > 0) begin : g_acc_left
        assign acc_i = acc_out[y][x-1];
      end else if (y > 0) begin : g_acc_up
        assign acc_i = acc_out[y-1][0];
      end else begin : g_acc_origin
        assign acc_i = accumulate;
      end

      sst_slice u_sst (
        .clk, .rst,
        .cfg_a_setup   (x == 0),
        .cfg_b_ded     (y != 0),
        .enable, .accumulate(acc_i), .d_type, .sparsity_level,
        .a_data        (a_i),
        .b_data        (b_g),
        .b_ded_in      (b_d),
        .a_data_out    (a_out[y][x]),
        .b_ded_out     (b_out[y][x]),
        .c_data        (c_data[x][y]),
        .accumulate_out(acc_out[y][x]),
        .valid_out     (valid_out[x][y])
      );
    end
  end

endmodule
