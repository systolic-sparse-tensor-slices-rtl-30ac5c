// tb_sst_out_buffer: feeds the output buffer with results that finish along
// anti-diagonals (SPE(i,j) at step T0+i+j), for several back-to-back tiles
// spaced 4 to 6 steps apart and with idle cycles between steps, and checks
// that column j of each tile comes out, complete, on step T0+3+j with
// valid_out set, and that valid_out is low otherwise.
module tb_sst_out_buffer;
  import sst_pkg::*;

  logic clk = 0, rst = 1, step;
  logic [3:0][3:0][31:0] c;
  logic [3:0][3:0] done;
  logic [3:0][31:0] c_data;
  logic valid_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sst_out_buffer dut (.clk, .rst, .step, .c, .done, .c_data, .valid_out);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int starts[5];
    int st;
    logic [31:0] val [5][4][4];
    starts = '{0, 4, 9, 13, 19};
    for (int t = 0; t < 5; t++)
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) val[t][i][j] = $urandom;
    step = 0; c = '0; done = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    st = 0;
    while (st < 30) begin
      step = ($urandom_range(3) != 0);
      c = '0; done = '0;
      if (step) begin
        for (int t = 0; t < 5; t++)
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < 4; j++)
              if (st == starts[t] + i + j) begin
                done[i][j] = 1'b1;
                c[i][j]    = val[t][i][j];
              end
      end
      #1;
      begin
        bit exp_v;
        int et, ej;
        exp_v = 0; et = 0; ej = 0;
        for (int t = 0; t < 5; t++)
          for (int j = 0; j < 4; j++)
            if (step && st == starts[t] + 3 + j) begin exp_v = 1; et = t; ej = j; end
        checks++;
        if (valid_out !== exp_v) begin
          failures++; $display("FAIL valid_out at step %0d got %b exp %b step=%b done=%b", st, valid_out, exp_v, step, done);
        end
        if (exp_v)
          for (int i = 0; i < 4; i++) begin
            checks++;
            if (c_data[i] !== val[et][i][ej]) begin
              failures++; $display("FAIL tile %0d col %0d row %0d", et, ej, i);
            end
          end
      end
      @(negedge clk);
      if (step) st++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
