// sst_setup: triangular systolic data-setup registers of the SST slice.
//
// Lane l (an A row or a B column of the 4x4 array) is delayed by l operand
// stages, so that un-skewed data read from a buffer bank reach the SPE grid
// in the diagonal wavefront a systolic array needs. This is the triangle of
// registers the paper draws at the A and B inputs of the slice (0+1+2+3 = 6
// registers per side); the static multiplexer that bypasses it sits in the
// slice.
//
// A stage is the same as the corresponding stage inside an SPE, which keeps
// the skew equal to the array's own timing in every sparsity mode (this
// generalisation to 2:4 mode is this design's choice; the paper draws the
// dense-mode triangle only):
//   ADV_LOAD=0 (A side): one register, or two in 2:4 mode;
//   ADV_LOAD=1 (B side): one register that loads only when adv=1, which in
//                        2:4 mode is every second cycle.
// enable=0 freezes the registers. W is the width of one lane.
module sst_setup
  import sst_pkg::*;
#(
  parameter int unsigned W        = 18,
  parameter bit          ADV_LOAD = 1'b0
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      en,
  input  sparsity_e sp,
  input  logic      adv,
  input  logic [SA-1:0][W-1:0] din,
  output logic [SA-1:0][W-1:0] dout
);
  for (genvar l = 0; l < SA; l++) begin : g_lane
    if (l == 0) begin : g_direct
      assign dout[l] = din[l];
    end else begin : g_delay
      // stage_out[s] is the output of stage s of this lane.
      logic [l-1:0][W-1:0] stage_out;
      for (genvar s = 0; s < l; s++) begin : g_stage
        logic [W-1:0] sin;
        if (s == 0) begin : g_first
          assign sin = din[l];
        end else begin : g_next
          assign sin = stage_out[s-1];
        end
        if (ADV_LOAD) begin : g_b
          logic [W-1:0] q;
          always_ff @(posedge clk) begin
            if (rst)           q <= '0;
            else if (en && adv) q <= sin;
          end
          assign stage_out[s] = q;
        end else begin : g_a
          logic [W-1:0] q1, q2;
          always_ff @(posedge clk) begin
            if (rst) begin
              q1 <= '0;
              q2 <= '0;
            end else if (en) begin
              q1 <= sin;
              q2 <= q1;
            end
          end
          assign stage_out[s] = two_stage(sp) ? q2 : q1;
        end
      end
      assign dout[l] = stage_out[l-1];
    end
  end

endmodule
