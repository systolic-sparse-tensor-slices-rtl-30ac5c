// sst_slice: Systolic Sparse Tensor (SST) slice.
//
// A 4x4 output-stationary systolic array of sparse processing elements
// (spe) with everything needed to tile it into larger arrays:
//   * A (matrix A, usually sparse weights) enters on a_data, one entry per
//     SPE row (value + 2-bit index), moves right through the SPEs and leaves
//     on a_data_out for the next slice in the row (global routing).
//   * B (dense matrix B, usually activations) enters on b_data from global
//     routing or on b_ded_in from the slice above over dedicated wires, four
//     lanes per SPE column, moves down and leaves on b_ded_out.
//   * Triangular setup registers (sst_setup) skew A rows and B columns for a
//     slice fed straight from buffer banks; cfg_a_setup / cfg_b_ded are the
//     static multiplexer settings (fixed at configuration time, like
//     bitstream bits): cfg_a_setup=1 routes a_data through the triangle,
//     cfg_b_ded=1 takes B from b_ded_in instead of the b_data triangle.
//   * The six-element output buffer (sst_out_buffer) turns the diagonally
//     finishing results into four column outputs on c_data with valid_out.
//   * accumulate enters with the first A entry of SPE(0,0); it travels with
//     the A data and leaves on accumulate_out four operand stages later,
//     which is the right time for both the slice to the right and the slice
//     below. A one-cycle 0 marks the first operand step of a new output tile
//     and finishes the previous one.
//   * enable=0 stalls the whole slice; d_type selects int8/bfloat16 and
//     sparsity_level selects dense, 2:4, 1:3 or 1:4 at run time.
//
// Port set, widths (72 A bits, 256 B bits, 128 C bits) and control signals
// follow the paper. Operand stage timing: in 2:4 mode the B registers load
// every second cycle (adv); the slice generates adv/step from a phase bit
// that toggles on every enabled cycle and is cleared by reset, so after a
// reset the first enabled cycle is a B-load cycle. Both the phase bit and the
// synchronous reset are this design's choices (the paper lists no reset).
// An A entry and its B group must be presented at the same clock edge of an
// adv cycle; a result tile needs at least 4 output steps.
module sst_slice
  import sst_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  // static configuration
  input  logic      cfg_a_setup,
  input  logic      cfg_b_ded,
  // dynamic control
  input  logic      enable,
  input  logic      accumulate,
  input  dtype_e    d_type,
  input  sparsity_e sparsity_level,
  // data
  input  a_elem_t  [SA-1:0] a_data,       // per SPE row
  input  b_lanes_t [SA-1:0] b_data,       // per SPE column, global routing
  input  b_lanes_t [SA-1:0] b_ded_in,     // per SPE column, dedicated wires
  output a_elem_t  [SA-1:0] a_data_out,
  output b_lanes_t [SA-1:0] b_ded_out,
  output logic [SA-1:0][CW-1:0] c_data,   // per SPE row, one column per step
  output logic      accumulate_out,
  output logic      valid_out
);
  logic phase, adv, step;

  always_ff @(posedge clk) begin
    if (rst)         phase <= 1'b0;
    else if (enable) phase <= ~phase;
  end
  assign adv  = !two_stage(sparsity_level) || !phase;
  assign step = enable && (!two_stage(sparsity_level) || phase);

  // Systolic data setup and static input multiplexers.
  a_elem_t  [SA-1:0] a_skew, a_grid;
  b_lanes_t [SA-1:0] b_skew, b_grid;

  sst_setup #(.W($bits(a_elem_t)), .ADV_LOAD(1'b0)) u_setup_a (
    .clk, .rst, .en(enable), .sp(sparsity_level), .adv,
    .din(a_data), .dout(a_skew)
  );
  sst_setup #(.W($bits(b_lanes_t)), .ADV_LOAD(1'b1)) u_setup_b (
    .clk, .rst, .en(enable), .sp(sparsity_level), .adv,
    .din(b_data), .dout(b_skew)
  );

  assign a_grid = cfg_a_setup ? a_skew : a_data;
  assign b_grid = cfg_b_ded   ? b_ded_in : b_skew;

  // SPE grid.
  a_elem_t  [SA-1:0][SA-1:0] a_o;
  b_lanes_t [SA-1:0][SA-1:0] b_o;
  logic     [SA-1:0][SA-1:0] f_o;
  logic     [SA-1:0][SA-1:0][CW-1:0] c_o;
  logic     [SA-1:0][SA-1:0] d_o;

  for (genvar i = 0; i < SA; i++) begin : g_row
    for (genvar j = 0; j < SA; j++) begin : g_col
      a_elem_t  a_i;
      b_lanes_t b_i;
      logic     f_i;
      if (j == 0) begin : g_left
        assign a_i = a_grid[i];
        if (i == 0) begin : g_origin
          assign f_i = accumulate;
        end else begin : g_down
          assign f_i = f_o[i-1][0];
        end
      end else begin : g_inner
        assign a_i = a_o[i][j-1];
        assign f_i = f_o[i][j-1];
      end
      if (i == 0) begin : g_top
        assign b_i = b_grid[j];
      end else begin : g_below
        assign b_i = b_o[i-1][j];
      end
      spe u_spe (
        .clk, .rst, .en(enable), .sp(sparsity_level), .dt(d_type), .adv,
        .a_in(a_i), .acc_in(f_i), .b_in(b_i),
        .a_out(a_o[i][j]), .acc_out(f_o[i][j]), .b_out(b_o[i][j]),
        .c(c_o[i][j]), .done(d_o[i][j])
      );
    end
    assign a_data_out[i] = a_o[i][SA-1];
    assign b_ded_out[i]  = b_o[SA-1][i];
  end

  assign accumulate_out = f_o[0][SA-1];

  sst_out_buffer u_obuf (
    .clk, .rst, .step,
    .c(c_o), .done(d_o),
    .c_data, .valid_out
  );

endmodule
