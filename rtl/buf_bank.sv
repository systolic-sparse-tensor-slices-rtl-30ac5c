// buf_bank: one on-chip buffer bank of the GEMM accelerator (an FPGA BRAM).
//
// Simple dual-port memory: one synchronous write port and one read port
// with a registered output (one cycle of read latency, as a BRAM in its
// registered mode). rd_en=0 keeps the last read word on rd_data, which the
// controller uses to hold a B word for two cycles in 2:4 mode and to stall.
// The 512-entry depth is the paper's (512x40 BRAM mode); the width is set per
// use (A, B or C bank). Contents are not initialised (as a BRAM); rd_data is
// cleared by reset.
module buf_bank #(
  parameter int unsigned W     = 72,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          rd_en,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rst)        rd_data <= '0;
    else if (rd_en) rd_data <= mem[raddr];
  end

endmodule
