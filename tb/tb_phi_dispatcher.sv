// Testbench for phi_dispatcher: random units, weight tiles and partial sums; each
// channel must output the selected weight (sign-extended) or partial sum, negated for -1.
`timescale 1ns/1ps
module tb_phi_dispatcher;
  import phi_pkg::*;
  int checks = 0, failures = 0;
  unit_t [7:0] units; wvec_t [15:0] wtile; pvec_t psum [4]; pvec_t chan [8];
  phi_dispatcher dut (.*);
  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int c = 0; c < 8; c++) units[c] = unit_t'($urandom);
      for (int r = 0; r < 16; r++) for (int l = 0; l < 32; l++) wtile[r][l] = wt_t'($urandom);
      for (int s = 0; s < 4; s++) for (int l = 0; l < 32; l++) psum[s][l] = ps_t'($urandom);
      #1;
      for (int c = 0; c < 8; c++)
        for (int l = 0; l < 32; l++) begin
          int e;
          e = units[c].is_psum ? int'(psum[units[c].idx[1:0]][l]) : int'(wtile[units[c].idx][l]);
          if (units[c].neg) e = -e;
          checks++;
          if (chan[c][l] != ps_t'(e)) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
