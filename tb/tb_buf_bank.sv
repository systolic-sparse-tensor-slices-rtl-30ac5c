// tb_buf_bank: checks the buffer bank against an array model. Random writes
// and reads (including a read of the word written in the same cycle, which
// returns the old word), the read-enable hold of rd_data, and the reset value.
module tb_buf_bank;
  localparam int W = 40, DEPTH = 512, AW = 9;
  logic clk = 0, rst = 1, we = 0, rd_en = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rd_data;
  logic [W-1:0] model [DEPTH];
  logic [W-1:0] expect_q;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  buf_bank #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    checks++;
    if (rd_data !== '0) begin failures++; $display("FAIL reset value"); end
    // Fill the whole bank so every later read is of a known word.
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    expect_q = '0;
    for (int n = 0; n < 20000; n++) begin
      we    = $urandom_range(1);
      rd_en = $urandom_range(3) != 0;
      waddr = AW'($urandom);
      raddr = ($urandom_range(3) == 0) ? waddr : AW'($urandom);
      wdata = {$urandom, $urandom};
      if (rd_en) expect_q = model[raddr];
      @(posedge clk);
      if (we) model[waddr] = wdata;
      @(negedge clk);
      checks++;
      if (rd_data !== expect_q) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d: %h vs %h", n, rd_data, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
