// tb_b_bank_mux: exhaustive over modes, bank select and valid with random
// bank words; checks every lane of every column against the mode table
// (dense: lane 0 from the selected bank; 1:3: lanes 0-2 from banks 0-2 and
// lane 3 zero; 2:4 and 1:4: lane k from bank k; not valid: all zero).
module tb_b_bank_mux;
  import sst_pkg::*;
  sparsity_e sp;
  logic valid;
  logic [1:0] sel;
  logic [NB-1:0][SA-1:0][DW-1:0] bank;
  b_lanes_t [SA-1:0] lanes;
  int checks = 0, failures = 0;

  b_bank_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 50; rep++)
      for (int m = 0; m < 4; m++)
        for (int s = 0; s < 4; s++)
          for (int v = 0; v < 2; v++) begin
            sp = sparsity_e'(m); sel = 2'(s); valid = v[0];
            for (int k = 0; k < NB; k++)
              for (int c = 0; c < SA; c++) bank[k][c] = 16'($urandom);
            #1;
            for (int c = 0; c < SA; c++)
              for (int l = 0; l < 4; l++) begin
                logic [15:0] e;
                if (!valid) e = '0;
                else if (sp == SP_DENSE) e = (l == 0) ? bank[sel][c] : '0;
                else if (sp == SP_1_3) e = (l < 3) ? bank[l][c] : '0;
                else e = bank[l][c];
                checks++;
                if (lanes[c][l] !== e) begin
                  failures++;
                  if (failures < 10) $display("FAIL sp%0d sel%0d v%0d col%0d lane%0d", m, s, v, c, l);
                end
              end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
