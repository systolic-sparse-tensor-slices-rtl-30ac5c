// gemm_sst_top: sparse/dense GEMM accelerator built from SST slices.
//
// The design computes C = A x B, where A (M x K, typically weights) may be
// dense or 2:4, 1:3 or 1:4 structured sparse and is stored compressed as
// non-zero values with 2-bit in-group indices, and B (K x N, typically
// activations) is dense. Sparsity level and precision (int8 with int32
// results, bfloat16 with fp32 results) are chosen per job.
//
// Structure (the paper's dynamically configurable GEMM design):
//   * sst_array: Y x X SST slices = a (4Y) x (4X) output-stationary
//     systolic array (default 10 x 10 slices = 40 x 40, the paper's largest
//     evaluated size), B chained down each column over dedicated wires.
//   * Buffer A: Y banks of 512 x 72 bits; word = four (16-bit value, 2-bit
//     index) entries, one per SPE row of the slice row.
//   * Buffer B: X groups of four banks of 512 x 64 bits; word = four 16-bit
//     values, one per SPE column; bank k holds group row k. A b_bank_mux per
//     group drives the four B lanes of the top slice.
//   * Buffer C: X*Y banks of 512 x 128 bits, one per slice; each output
//     column (four 32-bit results) of a slice is written at consecutive
//     addresses: address = 4*tile + column, tile = mt*NT + nt.
//   * gemm_ctrl: control and tiling logic.
// Bank depth (512) and the bank counts follow the paper; the paper packs
// int8 words tighter (32/40-bit words), here all operand lanes are 16 bits
// wide and int8 values use the low byte.
//
// Data layout expected in the buffers for a job with MT x NT tiles and KS
// operand steps per tile (m = mt*4Y + 4y + i, n = nt*4X + 4x + c):
//   A bank y, address mt*KS + k, entry i: the k-th stored element of row m
//     (dense: A[m][k]; sparse: k-th non-zero value of the row in compressed
//     order and its index inside its group of 4 (2:4, 1:4) or 3 (1:3)).
//   B sparse modes: bank (x,r), address nt*KSB + g, value c: B[R*g + r][n]
//     with R = 4 (2:4, 1:4) or 3 (1:3).
//   B dense: linear address j = nt*KS + k over the four banks (bank j/512,
//     address j%512), value c: B[k][n].
// Host ports write the A/B banks and read the C banks (one cycle latency).
// A job is started with start and cfg_*; done pulses when all results are in
// buffer C. hold stalls the accelerator. All of this interface is this
// design's own; the paper leaves the surrounding system open.
module gemm_sst_top
  import sst_pkg::*;
#(
  parameter int unsigned X     = 10,
  parameter int unsigned Y     = 10,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned XW   = (X > 1) ? $clog2(X) : 1,
  localparam int unsigned YW   = (Y > 1) ? $clog2(Y) : 1
) (
  input  logic      clk,
  input  logic      rst,
  // job control
  input  logic      start,
  input  logic      hold,
  input  dtype_e    cfg_dtype,
  input  sparsity_e cfg_sparsity,
  input  logic [11:0] cfg_mt,
  input  logic [11:0] cfg_nt,
  input  logic [11:0] cfg_ks,
  output logic      busy,
  output logic      done,
  // buffer A write port
  input  logic          a_we,
  input  logic [YW-1:0] a_wbank,
  input  logic [AW-1:0] a_waddr,
  input  a_elem_t [SA-1:0] a_wdata,
  // buffer B write port
  input  logic          b_we,
  input  logic [XW-1:0] b_wbank,
  input  logic [1:0]    b_wsub,
  input  logic [AW-1:0] b_waddr,
  input  logic [SA-1:0][DW-1:0] b_wdata,
  // buffer C read port
  input  logic          c_rd,
  input  logic [XW-1:0] c_rx,
  input  logic [YW-1:0] c_ry,
  input  logic [AW-1:0] c_raddr,
  output logic [SA-1:0][CW-1:0] c_rdata
);
  logic      sst_rst, enable, accumulate;
  dtype_e    d_type;
  sparsity_e sparsity_level;
  logic [Y-1:0]         a_rd;
  logic [Y-1:0][AW-1:0] a_addr;
  logic [X-1:0]         b_rd, b_v;
  logic [X-1:0][AW+1:0] b_addr;
  logic [X-1:0][Y-1:0]  valid_out;
  logic [X-1:0][Y-1:0][SA-1:0][CW-1:0] c_data;

  gemm_ctrl #(.X(X), .Y(Y), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst, .start, .hold, .cfg_dtype, .cfg_sparsity,
    .cfg_mt, .cfg_nt, .cfg_ks, .busy, .done,
    .sst_rst, .enable, .accumulate, .d_type, .sparsity_level,
    .a_rd, .a_addr, .b_rd, .b_v, .b_addr,
    .last_valid(valid_out[X-1][Y-1])
  );

  // Buffer A.
  a_elem_t [Y-1:0][SA-1:0] a_in;
  for (genvar y = 0; y < Y; y++) begin : g_a
    a_elem_t [SA-1:0] rdata;
    logic             vq;
    buf_bank #(.W($bits(a_elem_t) * SA), .DEPTH(DEPTH)) u_bank (
      .clk, .rst,
      .we(a_we && a_wbank == YW'(y)), .waddr(a_waddr), .wdata(a_wdata),
      .rd_en(a_rd[y]), .raddr(a_addr[y]), .rd_data(rdata)
    );
    always_ff @(posedge clk) begin
      if (sst_rst)     vq <= 1'b0;
      else if (enable) vq <= a_rd[y];
    end
    assign a_in[y] = vq ? rdata : '0;
  end

  // Buffer B and bank multiplexers.
  b_lanes_t [X-1:0][SA-1:0] b_in;
  for (genvar x = 0; x < X; x++) begin : g_b
    logic [NB-1:0][SA-1:0][DW-1:0] rdata;
    logic       vq;
    logic [1:0] selq;
    logic [1:0] sel;
    assign sel = b_addr[x][AW+1:AW];
    for (genvar k = 0; k < NB; k++) begin : g_k
      logic rd;
      always_comb begin
        unique case (sparsity_level)
          SP_DENSE: rd = b_rd[x] && (sel == 2'(k));
          SP_1_3:   rd = b_rd[x] && (k < 3);
          default:  rd = b_rd[x];
        endcase
      end
      buf_bank #(.W(SA * DW), .DEPTH(DEPTH)) u_bank (
        .clk, .rst,
        .we(b_we && b_wbank == XW'(x) && b_wsub == 2'(k)),
        .waddr(b_waddr), .wdata(b_wdata),
        .rd_en(rd), .raddr(b_addr[x][AW-1:0]), .rd_data(rdata[k])
      );
    end
    always_ff @(posedge clk) begin
      if (sst_rst) begin
        vq   <= 1'b0;
        selq <= 2'd0;
      end else if (enable) begin
        vq <= b_v[x];
        if (b_rd[x]) selq <= sel;
      end
    end
    b_bank_mux u_mux (
      .sp(sparsity_level), .valid(vq), .sel(selq), .bank(rdata), .lanes(b_in[x])
    );
  end

  sst_array #(.X(X), .Y(Y)) u_array (
    .clk, .rst(sst_rst), .enable, .accumulate, .d_type, .sparsity_level,
    .a_in, .b_in, .c_data, .valid_out
  );

  // Buffer C: one bank per slice, written column by column.
  logic [X-1:0][Y-1:0][SA-1:0][CW-1:0] c_bank_q;
  logic [XW-1:0] c_rx_q;
  logic [YW-1:0] c_ry_q;
  for (genvar x = 0; x < X; x++) begin : g_cx
    for (genvar y = 0; y < Y; y++) begin : g_cy
      logic [AW-1:0] wptr;
      always_ff @(posedge clk) begin
        if (sst_rst)             wptr <= '0;
        else if (valid_out[x][y]) wptr <= wptr + AW'(1);
      end
      buf_bank #(.W(SA * CW), .DEPTH(DEPTH)) u_bank (
        .clk, .rst,
        .we(valid_out[x][y]), .waddr(wptr), .wdata(c_data[x][y]),
        .rd_en(c_rd && c_rx == XW'(x) && c_ry == YW'(y)),
        .raddr(c_raddr), .rd_data(c_bank_q[x][y])
      );
    end
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      c_rx_q <= '0;
      c_ry_q <= '0;
    end else if (c_rd) begin
      c_rx_q <= c_rx;
      c_ry_q <= c_ry;
    end
  end
  assign c_rdata = c_bank_q[c_rx_q][c_ry_q];

endmodule
