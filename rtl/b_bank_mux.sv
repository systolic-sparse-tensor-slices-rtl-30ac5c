// b_bank_mux: multiplexer between the four B banks of one SST column chain
// and the four B lanes of the top slice.
//
// In the sparse modes bank B[x,k] drives lane k: every bank holds the k-th
// row of each group of consecutive K rows for the four SST columns (in 1:3
// mode only banks 0..2 carry data and lane 3 is driven with zero). In dense
// mode only lane 0 is used; the four banks are then treated as one deeper
// buffer and sel (the bank the current word was read from) picks which one
// drives lane 0. The use of the multiplexer to reach all four banks in dense
// mode follows the paper's remark that such multiplexing can use banks
// B[x,1..3]; the exact scheme (consecutive 512-word address ranges) is this
// design's choice. valid=0 drives zeros. Combinational.
module b_bank_mux
  import sst_pkg::*;
(
  input  sparsity_e                   sp,
  input  logic                        valid,
  input  logic [1:0]                  sel,
  input  logic [NB-1:0][SA-1:0][DW-1:0] bank,  // [bank k][column c]
  output b_lanes_t [SA-1:0]           lanes    // [column c][lane k]
);
  always_comb begin
    lanes = '0;
    if (valid) begin
      for (int c = 0; c < SA; c++) begin
        unique case (sp)
          SP_DENSE: lanes[c][0] = bank[sel][c];
          SP_1_3:   for (int k = 0; k < 3; k++) lanes[c][k] = bank[k][c];
          default:  for (int k = 0; k < NB; k++) lanes[c][k] = bank[k][c];
        endcase
      end
    end
  end
endmodule
