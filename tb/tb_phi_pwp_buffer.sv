// Testbench for phi_pwp_buffer: fills all 16 banks x 128 entries with random PWP rows
// and reads them back through all 16 read ports at once with random addresses.
`timescale 1ns/1ps
module tb_phi_pwp_buffer;
  import phi_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we; logic [3:0] w_bank; logic [6:0] w_addr; wvec_t w_data;
  logic [15:0][6:0] r_addr; wvec_t r_data [16];
  phi_pwp_buffer dut (.*);
  wvec_t model [16][128];

  function automatic wvec_t rnd();
    wvec_t v;
    for (int i = 0; i < 256; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; w_bank = 0; w_addr = 0; w_data = '0; r_addr = '0;
    for (int b = 0; b < 16; b++)
      for (int a = 0; a < 128; a++) begin
        @(negedge clk);
        we = 1; w_bank = 4'(b); w_addr = 7'(a); w_data = rnd();
        model[b][a] = w_data;
      end
    @(negedge clk); we = 0;
    for (int t = 0; t < 500; t++) begin
      for (int b = 0; b < 16; b++) r_addr[b] = 7'($urandom);
      #1;
      for (int b = 0; b < 16; b++) begin
        checks++;
        if (r_data[b] != model[b][r_addr[b]]) failures++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
