// tb_sst_setup: checks the triangular setup registers. Lane l of the A-side
// triangle must delay its input by l stages of one cycle (dense, 1:3, 1:4)
// or two cycles (2:4). Lane l of the B-side triangle must delay by l loads
// on adv cycles (adv every cycle, or every second cycle in 2:4 mode). A
// stall (en=0) must freeze both.
module tb_sst_setup;
  import sst_pkg::*;

  localparam int W = 8;
  logic clk = 0, rst = 1, en, adv;
  sparsity_e sp;
  logic [3:0][W-1:0] din, da, db;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sst_setup #(.W(W), .ADV_LOAD(1'b0)) dut_a (.clk, .rst, .en, .sp, .adv, .din, .dout(da));
  sst_setup #(.W(W), .ADV_LOAD(1'b1)) dut_b (.clk, .rst, .en, .sp, .adv, .din, .dout(db));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input sparsity_e s_);
    logic [3:0][W-1:0] hist [$];     // inputs of enabled cycles, newest first
    logic [3:0][W-1:0] bhist [$];    // inputs of enabled adv cycles, newest first
    int s, n;
    sp = s_;
    s = two_stage(s_) ? 2 : 1;
    rst = 1; en = 0; din = '0;
    @(negedge clk);
    rst = 0;
    n = 0;
    for (int c = 0; c < 60; c++) begin
      en  = (c % 11 != 7);
      adv = !two_stage(s_) || (n % 2 == 0);
      for (int l = 0; l < 4; l++) din[l] = W'($urandom);
      #1;
      // Combinational outputs before the edge: lane 0 direct, others delayed.
      if (en) begin
        for (int l = 0; l < 4; l++) begin
          logic [W-1:0] ea, eb;
          ea = (l == 0) ? din[0] : ((hist.size() >= s * l) ? hist[s * l - 1][l] : W'(0));
          eb = (l == 0) ? din[0] : ((bhist.size() >= l) ? bhist[l - 1][l] : W'(0));
          checks += 2;
          if (da[l] !== ea) begin failures++; $display("FAIL A sp%0d lane %0d", s_, l); end
          if (db[l] !== eb) begin failures++; $display("FAIL B sp%0d lane %0d", s_, l); end
        end
      end
      @(posedge clk);
      if (en) begin
        hist.push_front(din);
        if (adv) bhist.push_front(din);
        n++;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    sp = SP_DENSE; en = 0; adv = 1; din = '0;
    @(negedge clk);
    run(SP_DENSE);
    run(SP_2_4);
    run(SP_1_3);
    run(SP_1_4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
