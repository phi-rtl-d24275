// Testbench for phi_reconfig_adder_tree: the 3/3/2 split of the paper's example plus
// random splits of the 8 channels into 1-4 groups; each output must be the lane-wise sum
// of its group, unused outputs zero.
`timescale 1ns/1ps
module tb_phi_reconfig_adder_tree;
  import phi_pkg::*;
  int checks = 0, failures = 0;
  pvec_t in_data [8]; logic [3:0][3:0] cnt; logic [2:0] n_rows; pvec_t out_data [4];
  phi_reconfig_adder_tree dut (.*);
  initial begin
    for (int t = 0; t < 400; t++) begin
      int left, st;
      for (int c = 0; c < 8; c++) for (int l = 0; l < 32; l++) in_data[c][l] = ps_t'($signed($urandom % 2001) - 1000);
      cnt = '0;
      if (t == 0) begin n_rows = 3; cnt[0] = 3; cnt[1] = 3; cnt[2] = 2; end
      else begin
        n_rows = 3'(1 + $urandom % 4); left = 8;
        for (int s = 0; s < int'(n_rows); s++) begin
          cnt[s] = (s == int'(n_rows) - 1) ? 4'(left) : 4'(1 + $urandom % (left - (int'(n_rows) - 1 - s)));
          left -= int'(cnt[s]);
          if (left < 0) left = 0;
        end
      end
      #1;
      st = 0;
      for (int s = 0; s < 4; s++) begin
        for (int l = 0; l < 32; l++) begin
          int e;
          e = 0;
          if (s < int'(n_rows)) for (int c = st; c < st + int'(cnt[s]) && c < 8; c++) e += int'(in_data[c][l]);
          checks++;
          if (out_data[s][l] != ps_t'(e)) failures++;
        end
        if (s < int'(n_rows)) st += int'(cnt[s]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
