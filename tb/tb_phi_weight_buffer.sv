// Testbench for phi_weight_buffer: writes 32 weight tiles row by row, then reads each
// tile back as a whole (also through partition numbers above 31, which wrap).
`timescale 1ns/1ps
module tb_phi_weight_buffer;
  import phi_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we; logic [6:0] w_part; logic [3:0] w_row; wvec_t w_data;
  logic [6:0] r_part; wvec_t [15:0] r_tile;
  phi_weight_buffer dut (.*);
  wvec_t model [32][16];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; w_part = 0; w_row = 0; w_data = '0; r_part = 0;
    for (int p = 0; p < 32; p++)
      for (int r = 0; r < 16; r++) begin
        @(negedge clk);
        we = 1; w_part = 7'(p); w_row = 4'(r);
        for (int i = 0; i < 256; i += 32) w_data[i +: 32] = $urandom;
        model[p][r] = w_data;
      end
    @(negedge clk); we = 0;
    for (int p = 0; p < 64; p++) begin
      r_part = 7'(p);
      #1;
      for (int r = 0; r < 16; r++) begin
        checks++;
        if (r_tile[r] != model[p % 32][r]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
