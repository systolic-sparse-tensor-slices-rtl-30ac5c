// spe: sparse processing element of the SST slice.
//
// One output-stationary multiply-accumulate cell that works in all four
// sparsity modes of the slice:
//   dense : one A value and lane b[0] per cycle, A forwarded after one stage.
//   2:4   : A value plus 2-bit index per cycle; the four B lanes of a group
//           are held for two cycles (B registers load only when adv=1), and
//           A/index pass through two pipeline stages so that the systolic
//           timing still lines up; the index picks one of the four lanes.
//   1:4   : A value plus index per cycle, four new B lanes every cycle,
//           one A stage.
//   1:3   : as 1:4, with three live lanes (the index never selects lane 3).
// The A path and the B registers follow the paper's SPE drawing for each
// mode; the two-stage A path in 2:4 mode is selected by a multiplexer after
// the second register.
//
// Accumulation: the accumulate flag travels with the A value (same stage
// count). A cycle whose flag is 0 starts a new output: the accumulator is
// loaded with the product instead of adding it, and the value it held is the
// finished result of the previous output (done=1 with c in that cycle). The
// first start after reset reports nothing. int8 products are 16-bit signed
// and accumulate in wrapping int32; bfloat16 products are exact fp32 and are
// accumulated with a round-to-nearest-even fp32 adder.
//
// Timing: the MAC uses the A value registered at the previous edge and the B
// lanes held in this SPE's registers, so an A entry and the B group it
// multiplies must enter the SPE at the same clock edge. enable=0 freezes
// every register. sp and dt must stay constant while data is in flight.
// Reset is synchronous and clears all state (this design's choice).
module spe
  import sst_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  logic      en,
  input  sparsity_e sp,
  input  dtype_e    dt,
  input  logic      adv,      // B registers load on this cycle
  input  a_elem_t   a_in,
  input  logic      acc_in,
  input  b_lanes_t  b_in,
  output a_elem_t   a_out,
  output logic      acc_out,
  output b_lanes_t  b_out,
  output logic [CW-1:0] c,    // accumulator contents
  output logic      done      // c holds a finished result this cycle
);
  a_elem_t  a_r1, a_r2;
  logic     f_r1, f_r2;
  b_lanes_t b_r;
  logic [CW-1:0] acc;
  logic     started;

  logic [DW-1:0] b_sel;
  logic [CW-1:0] prod_i, sum_i, prod_f, sum_f, nxt;

  always_ff @(posedge clk) begin
    if (rst) begin
      a_r1    <= '0;
      a_r2    <= '0;
      f_r1    <= 1'b1;
      f_r2    <= 1'b1;
      b_r     <= '0;
      acc     <= '0;
      started <= 1'b0;
    end else if (en) begin
      a_r1 <= a_in;
      a_r2 <= a_r1;
      f_r1 <= acc_in;
      f_r2 <= f_r1;
      if (adv) b_r <= b_in;
      acc  <= nxt;
      if (!f_r1) started <= 1'b1;
    end
  end

  // 4:1 index multiplexer (dense mode always uses lane 0).
  always_comb begin
    if (sp == SP_DENSE) b_sel = b_r[0];
    else                b_sel = b_r[a_r1.ind];
  end

  // int8 MAC: signed 8x8 product, int32 accumulation.
  always_comb begin
    prod_i = CW'($signed(a_r1.val[7:0]) * $signed(b_sel[7:0]));
    sum_i  = acc + prod_i;
  end

  // bfloat16 MAC: exact fp32 product, fp32 accumulation.
  bf16_mul u_mul (.a(a_r1.val), .b(b_sel), .p(prod_f));
  fp32_add u_add (.a(acc), .b(prod_f), .s(sum_f));

  always_comb begin
    if (dt == DT_BF16) nxt = f_r1 ? sum_f : prod_f;
    else               nxt = f_r1 ? sum_i : prod_i;
  end

  assign a_out   = two_stage(sp) ? a_r2 : a_r1;
  assign acc_out = two_stage(sp) ? f_r2 : f_r1;
  assign b_out   = b_r;
  assign c       = acc;
  assign done    = started && !f_r1;

endmodule
