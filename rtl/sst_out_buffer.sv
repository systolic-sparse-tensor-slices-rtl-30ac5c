// sst_out_buffer: six-element output buffer with column-wise extraction.
//
// The SPEs of an output-stationary array finish along anti-diagonals:
// SPE(i,j) finishes i+j steps after SPE(0,0). To hand results out in a
// regular pattern, one column of four values per step, the slice keeps the
// early results of rows 0..2 until their column is extracted. Row i waits
// 3-i steps, so rows 0, 1 and 2 need 3, 2 and 1 registers: six in total,
// the paper's six-element buffer. Row 3 is never buffered: SPE(3,j) finishes
// exactly when column j leaves, and its value is passed straight through.
//
// The paper describes the buffer as six fixed locations into which new
// results replace the ones just extracted. Here the six locations are
// arranged as three short shift registers (one per row), which holds the
// same six values at every step and gives the same output sequence; this
// arrangement is this design's choice.
//
// Interface: c/done are the accumulator values and finish flags of the 16
// SPEs (done may be high in at most one SPE per row per step). step is high
// on cycles where the array advances one output step (every cycle, or every
// second cycle in 2:4 mode, and never while the slice is stalled). valid_out
// is high, combinationally, in the step where column j is on c_data, with
// c_data[i] the result of SPE(i,j). Columns leave in order 0,1,2,3 on four
// consecutive steps. A new output tile may start every 4 or more steps.
module sst_out_buffer
  import sst_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic step,
  input  logic [SA-1:0][SA-1:0][CW-1:0] c,     // [row][col]
  input  logic [SA-1:0][SA-1:0]         done,  // [row][col]
  output logic [SA-1:0][CW-1:0]         c_data,
  output logic                          valid_out
);
  // Value finishing in each row this step (zero if none).
  logic [SA-1:0][CW-1:0] row_val;

  always_comb begin
    for (int i = 0; i < SA; i++) begin
      row_val[i] = '0;
      for (int j = 0; j < SA; j++) begin
        if (done[i][j]) row_val[i] = row_val[i] | c[i][j];
      end
    end
  end

  for (genvar i = 0; i < SA - 1; i++) begin : g_row
    localparam int unsigned L = SA - 1 - i;   // 3, 2, 1 registers
    logic [L-1:0][CW-1:0] q;
    always_ff @(posedge clk) begin
      if (rst) begin
        q <= '0;
      end else if (step) begin
        q[0] <= row_val[i];
        for (int k = 1; k < int'(L); k++) q[k] <= q[k-1];
      end
    end
    assign c_data[i] = q[L-1];
  end

  assign c_data[SA-1] = row_val[SA-1];
  assign valid_out    = step && (|done[SA-1]);

  // At most one SPE per row may finish in the same step.
  for (genvar i = 0; i < SA; i++) begin : g_chk
    a_one_done_per_row : assert property (@(posedge clk) disable iff (rst)
                                          step |-> $onehot0(done[i]));
  end

endmodule
