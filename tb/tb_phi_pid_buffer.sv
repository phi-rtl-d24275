// Testbench for phi_pid_buffer: writes random pattern IDs for every (row, partition) of
// a 256-row x 112-partition matrix, then reads every 16-ID word and compares.
`timescale 1ns/1ps
module tb_phi_pid_buffer;
  import phi_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we; logic [7:0] w_row; logic [6:0] w_part; logic [7:0] w_pid;
  logic [7:0] r_row; logic [2:0] r_group; logic [15:0][7:0] r_word;
  phi_pid_buffer dut (.*);
  logic [7:0] model [256][112];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; w_row = 0; w_part = 0; w_pid = 0; r_row = 0; r_group = 0;
    for (int p = 0; p < 112; p++)
      for (int r = 0; r < 256; r++) begin
        @(negedge clk);
        we = 1; w_row = 8'(r); w_part = 7'(p); w_pid = 8'($urandom % 129);
        model[r][p] = w_pid;
      end
    @(negedge clk); we = 0;
    for (int r = 0; r < 256; r++)
      for (int g = 0; g < 7; g++) begin
        r_row = 8'(r); r_group = 3'(g);
        #1;
        for (int b = 0; b < 16; b++) begin
          checks++;
          if (r_word[b] != model[r][g * 16 + b]) begin
            failures++;
            if (failures < 5) $display("row %0d part %0d: %0d vs %0d", r, g * 16 + b, r_word[b], model[r][g * 16 + b]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
