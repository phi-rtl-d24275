// Testbench for phi_psum_buffer (4 banks, 256 rows): checks the reset contents, then
// random conflict-free writes on all four banks in the same cycle and reads against a
// row model.
`timescale 1ns/1ps
module tb_phi_psum_buffer;
  import phi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [3:0] we; logic [7:0] w_addr [4]; pvec_t w_data [4];
  logic [7:0] r_addr [4]; pvec_t r_data [4];
  phi_psum_buffer dut (.*);
  pvec_t model [256];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0;
    for (int b = 0; b < 4; b++) begin w_addr[b] = 0; w_data[b] = '0; r_addr[b] = 8'(b); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 256; r++) begin
      model[r] = '0;
      r_addr[r % 4] = 8'(r);
      #1;
      checks++;
      if (r_data[r % 4] != '0) failures++;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int b = 0; b < 4; b++) begin
        we[b]     = $urandom % 2;
        w_addr[b] = 8'(($urandom % 64) * 4 + b);
        for (int i = 0; i < $bits(pvec_t); i += 32) w_data[b][i +: 32] = $urandom;
        r_addr[b] = 8'(($urandom % 64) * 4 + b);
      end
      #1;
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (r_data[b] != model[r_addr[b]]) failures++;
      end
      @(posedge clk);
      for (int b = 0; b < 4; b++) if (we[b]) model[w_addr[b]] = w_data[b];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
