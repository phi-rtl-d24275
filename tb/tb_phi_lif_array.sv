// Testbench for phi_lif_array: several time steps over 256 rows with random input
// currents, leak shifts 0 and 2 and a threshold, compared with a software LIF model
// (membrane per neuron kept across steps, hard reset to 0 after a spike). Also checks
// the one-cycle latency and that 'clear' zeroes the membranes.
`timescale 1ns/1ps
module tb_phi_lif_array;
  import phi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear; logic [3:0] leak_shift; ps_t vth;
  logic in_valid; logic [7:0] in_row; pvec_t l1, l2;
  logic out_valid; logic [7:0] out_row; logic [31:0] out_spk;
  phi_lif_array dut (.*);
  int V [256][32];
  logic [31:0] exp_spk [256];
  int spikes = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; leak_shift = 0; vth = 16'sd200; in_valid = 0; in_row = 0; l1 = '0; l2 = '0;
    for (int r = 0; r < 256; r++) for (int l = 0; l < 32; l++) V[r][l] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      leak_shift = (t < 3) ? 4'd0 : 4'd2;
      if (t == 4) begin
        @(negedge clk); clear = 1; @(negedge clk); clear = 0;
        for (int r = 0; r < 256; r++) for (int l = 0; l < 32; l++) V[r][l] = 0;
      end
      for (int r = 0; r < 256; r++) begin
        @(negedge clk);
        in_valid = 1; in_row = 8'(r);
        for (int l = 0; l < 32; l++) begin
          int v, nv;
          l1[l] = ps_t'($signed($urandom % 201) - 60);
          l2[l] = ps_t'($signed($urandom % 41) - 20);
          v = V[r][l];
          nv = v - ((leak_shift == 0) ? 0 : (v >>> leak_shift)) + int'(l1[l]) + int'(l2[l]);
          exp_spk[r][l] = nv >= 200;
          V[r][l] = (nv >= 200) ? 0 : nv;
        end
        @(posedge clk);
        #1;
        checks++;
        if (!out_valid || out_row != 8'(r) || out_spk != exp_spk[r]) begin
          failures++;
          if (failures < 5) $display("t %0d row %0d: spk %h exp %h", t, r, out_spk, exp_spk[r]);
        end
        spikes += $countones(out_spk);
      end
      @(negedge clk); in_valid = 0;
    end
    checks++;
    if (spikes == 0) failures++;
    $display("lif: %0d spikes", spikes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
