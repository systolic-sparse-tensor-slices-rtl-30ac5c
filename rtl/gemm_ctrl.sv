// gemm_ctrl: control and tiling logic of the SST-based GEMM accelerator.
//
// Runs one job: C = A x B for an output of (MT*4Y) x (NT*4X) elements, walked
// tile by tile (tile = mt*NT + nt, nt fastest), each tile streaming its whole
// reduction dimension of KS operand steps. Tiles follow each other with no
// gap, so the SPEs stay busy; the accumulate flag is 0 on the first step of
// every tile and once more, on a flush step after the last tile, which
// finishes the last tile. The job is done once slice (Y-1,X-1), the last to
// finish, has emitted all 4*MT*NT of its output columns.
//
// Operand steps (KS) per tile and B words per tile (KSB) for a reduction
// length K:  dense KS=K, KSB=K;  2:4 KS=K/2 (value/index pairs), KSB=K/4;
// 1:3 KS=KSB=K/3;  1:4 KS=KSB=K/4.  Addresses generated:
//   A bank y, step k of tile (mt,nt):  mt*KS + k
//   B banks (sparse modes):            nt*KSB + k' (k' = k, or k/2 in 2:4;
//                                      in 2:4 a word is read every 2nd cycle)
//   B banks (dense):                   nt*KS + k over the four banks taken
//                                      as one 4*DEPTH buffer (bits above the
//                                      bank address select the bank)
// One base sequence of read commands is generated and delayed through a
// shift register; bank A_y taps it 4*y operand stages late and bank group B_x
// 4*x stages late, which staggers the streams as the systolic array needs.
//
// Sequencing: start (in IDLE) latches cfg, then one CLEAR cycle resets the
// slices (sst_rst), then RUN issues the stream, DRAIN waits for the results,
// and done pulses for one cycle. hold=1 stalls the whole datapath (enable=0
// to the slices and banks) in RUN and DRAIN. The first read is issued one
// cycle after CLEAR so that the first step reaches the slices in a B-load
// cycle of their phase bit. The paper places control and tiling logic in the
// FPGA fabric and gives its constraints (M multiple of 4Y, N of 4X, any K);
// the state machine, address layout and hold input are this design's own.
module gemm_ctrl
  import sst_pkg::*;
#(
  parameter int unsigned X     = 10,
  parameter int unsigned Y     = 10,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned PD   = 8 * ((X > Y ? X : Y) - 1) + 1   // tap depth
) (
  input  logic      clk,
  input  logic      rst,
  // job interface
  input  logic      start,
  input  logic      hold,
  input  dtype_e    cfg_dtype,
  input  sparsity_e cfg_sparsity,
  input  logic [11:0] cfg_mt,        // output tiles along M (>=1)
  input  logic [11:0] cfg_nt,        // output tiles along N (>=1)
  input  logic [11:0] cfg_ks,        // operand steps per tile
  output logic      busy,
  output logic      done,
  // to the slices
  output logic      sst_rst,
  output logic      enable,
  output logic      accumulate,
  output dtype_e    d_type,
  output sparsity_e sparsity_level,
  // to the A banks (read command, this cycle)
  output logic [Y-1:0]         a_rd,
  output logic [Y-1:0][AW-1:0] a_addr,
  // to the B bank groups (read command, this cycle)
  output logic [X-1:0]         b_rd,     // read the banks
  output logic [X-1:0]         b_v,      // word belongs to the stream
  output logic [X-1:0][AW+1:0] b_addr,   // dense: bank in [AW+1:AW]
  // completion feedback from slice (Y-1,X-1)
  input  logic      last_valid
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_RUN, S_DRAIN, S_DONE} state_e;

  typedef struct packed {
    logic          av;       // A word valid
    logic [AW-1:0] aa;       // A address
    logic          bv;       // B word valid
    logic          br;       // B read
    logic [AW+1:0] ba;       // B address
  } cmd_t;

  state_e    state;
  logic [11:0] mt_n, nt_n, ks;
  logic [11:0] k, nt, mt;
  logic [AW+1:0] a_base, b_base;
  logic        first_issue, issuing, last_step;
  logic [23:0] cols_seen, cols_total;
  logic        flag_q;
  cmd_t        cmd;
  cmd_t [PD-1:0] pipe;
  logic [11:0] ksb;

  assign enable = (state == S_RUN || state == S_DRAIN) && !hold;
  assign busy   = (state != S_IDLE);
  assign ksb    = two_stage(sparsity_level) ? (ks >> 1) : ks;
  assign last_step = (k == ks - 1) && (nt == nt_n - 1) && (mt == mt_n - 1);

  // Base read command of this cycle.
  always_comb begin
    cmd = '0;
    if (issuing) begin
      cmd.av = 1'b1;
      cmd.aa = AW'(a_base + (AW+2)'(k));
      cmd.bv = 1'b1;
      if (two_stage(sparsity_level)) begin
        cmd.br = !k[0];
        cmd.ba = b_base + (AW+2)'(k >> 1);
      end else begin
        cmd.br = 1'b1;
        cmd.ba = b_base + (AW+2)'(k);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state          <= S_IDLE;
      mt_n           <= '0;
      nt_n           <= '0;
      ks             <= '0;
      d_type         <= DT_INT8;
      sparsity_level <= SP_DENSE;
      k              <= '0;
      nt             <= '0;
      mt             <= '0;
      a_base         <= '0;
      b_base         <= '0;
      first_issue    <= 1'b0;
      issuing        <= 1'b0;
      cols_seen      <= '0;
      cols_total     <= '0;
      flag_q         <= 1'b1;
      pipe           <= '0;
      done           <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mt_n           <= cfg_mt;
          nt_n           <= cfg_nt;
          ks             <= cfg_ks;
          d_type         <= cfg_dtype;
          sparsity_level <= cfg_sparsity;
          cols_total     <= (24'(cfg_mt) * 24'(cfg_nt)) << 2;
          state          <= S_CLEAR;
        end
        S_CLEAR: begin
          k           <= '0;
          nt          <= '0;
          mt          <= '0;
          a_base      <= '0;
          b_base      <= '0;
          cols_seen   <= '0;
          first_issue <= 1'b1;
          issuing     <= 1'b0;
          flag_q      <= 1'b1;
          pipe        <= '0;
          state       <= S_RUN;
        end
        S_RUN, S_DRAIN: if (!hold) begin
          // Shift the delayed command pipe and register the flag of the
          // word now being read, so it reaches slice (0,0) with the data.
          pipe   <= {pipe[PD-2:0], cmd};
          flag_q <= !((issuing && k == '0) || (state == S_RUN && !issuing && !first_issue));
          if (last_valid) cols_seen <= cols_seen + 24'd1;
          if (state == S_RUN) begin
            if (first_issue) begin
              first_issue <= 1'b0;
              issuing     <= 1'b1;
            end else if (issuing) begin
              if (last_step) begin
                issuing <= 1'b0;           // next cycle: flush step
              end else if (k == ks - 1) begin
                k <= '0;
                if (nt == nt_n - 1) begin
                  nt     <= '0;
                  mt     <= mt + 12'd1;
                  a_base <= a_base + (AW+2)'(ks);
                  b_base <= '0;
                end else begin
                  nt     <= nt + 12'd1;
                  b_base <= b_base + (sparsity_level == SP_DENSE ? (AW+2)'(ks) : (AW+2)'(ksb));
                end
              end else begin
                k <= k + 12'd1;
              end
            end else begin
              state <= S_DRAIN;            // flush step issued
            end
          end else if (cols_seen + (last_valid ? 24'd1 : 24'd0) == cols_total) begin
            state <= S_DONE;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign sst_rst    = rst || (state == S_CLEAR);
  assign accumulate = flag_q;

  // Taps of the command pipe: bank A_y / B_x lag 4*y / 4*x operand stages.
  always_comb begin
    for (int y = 0; y < int'(Y); y++) begin
      automatic int d = (two_stage(sparsity_level) ? 8 : 4) * y;
      automatic cmd_t c = (d == 0) ? cmd : pipe[d-1];
      a_rd[y]   = c.av && enable;
      a_addr[y] = c.aa;
    end
    for (int x = 0; x < int'(X); x++) begin
      automatic int d = (two_stage(sparsity_level) ? 8 : 4) * x;
      automatic cmd_t c = (d == 0) ? cmd : pipe[d-1];
      b_rd[x]   = c.br && enable;
      b_v[x]    = c.bv;
      b_addr[x] = c.ba;
    end
  end

  // Buffer capacity rules for a job (checked when it is accepted).
  a_fits_a : assert property (@(posedge clk) disable iff (rst)
    (state == S_IDLE && start) |-> (cfg_mt * cfg_ks <= DEPTH));
  a_fits_c : assert property (@(posedge clk) disable iff (rst)
    (state == S_IDLE && start) |-> (cfg_mt * cfg_nt * 4 <= DEPTH));
  a_min_tile : assert property (@(posedge clk) disable iff (rst)
    (state == S_IDLE && start) |-> (cfg_ks >= (cfg_sparsity == SP_2_4 ? 12'd8 : 12'd4)));

endmodule
