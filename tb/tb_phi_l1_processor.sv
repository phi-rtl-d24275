// Testbench for phi_l1_processor with real pattern-index, PWP and partial-sum buffers.
// A 28-partition layer is processed as two groups (0: partitions 0-15, 1: 16-27, with
// 28-31 masked off); the PWP buffer is reloaded between groups. Rows have 0 to 16
// assigned patterns, so both the one-cycle and the two-cycle (>8 patterns) cases occur.
// The L1 partial sums are compared with a software model, and the cycle count of each
// run must equal rows + rows with more than 8 patterns.
`timescale 1ns/1ps
module tb_phi_l1_processor;
  import phi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start; logic [2:0] group; logic [8:0] num_rows; logic [7:0] num_parts;
  logic [7:0] pid_row; logic [15:0][7:0] pid_word;
  logic [15:0][6:0] pwp_addr; wvec_t pwp_data [16];
  logic [7:0] ps_addr; pvec_t ps_rdata, ps_wdata; logic ps_we;
  logic busy, done; logic [31:0] cycles, split_rows;
  phi_l1_processor dut (.*);

  logic pwe; logic [7:0] prow; logic [6:0] ppart; logic [7:0] ppid;
  phi_pid_buffer u_pid (.clk, .we(pwe), .w_row(prow), .w_part(ppart), .w_pid(ppid),
                        .r_row(pid_row), .r_group(group), .r_word(pid_word));
  logic wwe; logic [3:0] wbank; logic [6:0] waddr; wvec_t wdata;
  phi_pwp_buffer u_pwp (.clk, .we(wwe), .w_bank(wbank), .w_addr(waddr), .w_data(wdata),
                        .r_addr(pwp_addr), .r_data(pwp_data));
  logic [0:0] pswe; logic [7:0] psa [1]; pvec_t pswd [1], psrd [1];
  assign pswe[0] = ps_we; assign psa[0] = ps_addr; assign pswd[0] = ps_wdata; assign ps_rdata = psrd[0];
  phi_psum_buffer #(.BANKS(1)) u_ps (.clk, .rst_n, .we(pswe), .w_addr(psa), .w_data(pswd),
                                     .r_addr(psa), .r_data(psrd));

  int ids [256][32];
  int E [256][32];
  localparam int ROWS = 256;

  function automatic int pwpv(int part, int id, int l);
    return ((part * 31 + id * 7 + l * 3) % 41) - 20;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_split;
    start = 0; group = 0; num_rows = 9'(ROWS); num_parts = 28;
    pwe = 0; prow = 0; ppart = 0; ppid = 0; wwe = 0; wbank = 0; waddr = 0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) for (int l = 0; l < 32; l++) E[r][l] = 0;
    for (int r = 0; r < ROWS; r++) begin
      int dens;
      dens = $urandom % 5;   // 0: empty row ... 4: nearly full
      for (int p = 0; p < 32; p++) begin
        @(negedge clk);
        ids[r][p] = (($urandom % 4) < dens) ? 1 + $urandom % 128 : 0;
        pwe = 1; prow = 8'(r); ppart = 7'(p); ppid = 8'(ids[r][p]);
      end
    end
    @(negedge clk); pwe = 0;
    for (int g = 0; g < 2; g++) begin
      for (int b = 0; b < 16; b++) for (int a = 0; a < 128; a++) begin
        @(negedge clk);
        wwe = 1; wbank = 4'(b); waddr = 7'(a);
        for (int l = 0; l < 32; l++) wdata[l] = wt_t'(pwpv(g * 16 + b, a + 1, l));
      end
      @(negedge clk); wwe = 0;
      exp_split = 0;
      for (int r = 0; r < ROWS; r++) begin
        int n;
        n = 0;
        for (int b = 0; b < 16; b++) begin
          int p;
          p = g * 16 + b;
          if (p < 28 && ids[r][p] != 0) begin
            n++;
            for (int l = 0; l < 32; l++) E[r][l] += pwpv(p, ids[r][p], l);
          end
        end
        if (n > 8) exp_split++;
      end
      group = 3'(g);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      @(posedge clk iff done);
      @(negedge clk);
      checks++;
      if (int'(cycles) != ROWS + exp_split || int'(split_rows) != exp_split) begin
        failures++; $display("group %0d: %0d cycles, %0d split, expected %0d split", g, cycles, split_rows, exp_split);
      end
      $display("group %0d: %0d rows in %0d cycles (%0d rows with >8 patterns)", g, ROWS, cycles, split_rows);
    end
    for (int r = 0; r < ROWS; r++) for (int l = 0; l < 32; l++) begin
      checks++;
      if (u_ps.g_bank[0].mem[r][l] != ps_t'(E[r][l])) begin
        failures++;
        if (failures < 5) $display("row %0d lane %0d: %0d vs %0d", r, l, u_ps.g_bank[0].mem[r][l], E[r][l]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
