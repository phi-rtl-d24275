// Testbench for phi_prefetcher with a real pattern-index buffer and a DRAM model.
// Group 1 of a 30-partition layer (partitions 16..29; 30, 31 must be ignored) gets random
// pattern IDs drawn from a small set per partition. The prefetcher must load exactly the
// distinct (partition, pattern) pairs that occur, each once, with the DRAM line of
// address base + partition*128 + ID-1, into bank partition mod 16 at ID-1.
`timescale 1ns/1ps
module tb_phi_prefetcher;
  import phi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start; logic [2:0] group; logic [8:0] num_rows; logic [7:0] num_parts;
  logic [31:0] base_addr; logic [7:0] pid_row; logic [15:0][7:0] pid_word;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid; logic [31:0] dram_req_addr; wvec_t dram_rsp_data;
  logic pwp_we; logic [3:0] pwp_bank; logic [6:0] pwp_addr; wvec_t pwp_data;
  logic busy, done; logic [31:0] loads;
  phi_prefetcher dut (.*);

  logic pwe; logic [7:0] prow; logic [6:0] ppart; logic [7:0] ppid;
  phi_pid_buffer u_pid (.clk, .we(pwe), .w_row(prow), .w_part(ppart), .w_pid(ppid),
                        .r_row(pid_row), .r_group(group), .r_word(pid_word));
  phi_dram_model u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
                         .req_addr(dram_req_addr), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));

  bit needed [16][128];
  int got [16][128];
  int n_needed = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (pwp_we) begin
    logic [31:0] a;
    a = 32'h1000 + 32'((16 + int'(pwp_bank)) * 128 + int'(pwp_addr));
    got[pwp_bank][pwp_addr]++;
    checks++;
    if (pwp_data != u_dram.line(a)) begin failures++; $display("data mismatch bank %0d id %0d", pwp_bank, pwp_addr); end
  end

  initial begin
    start = 0; group = 1; num_rows = 200; num_parts = 30; base_addr = 32'h1000;
    pwe = 0; prow = 0; ppart = 0; ppid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 16; p < 32; p++)
      for (int r = 0; r < 256; r++) begin
        @(negedge clk);
        pwe = 1; prow = 8'(r); ppart = 7'(p);
        ppid = ($urandom % 3 == 0) ? 8'd0 : 8'(1 + (($urandom % 6) * 17 + p) % 128);
        if (ppid != 0 && p < 30 && r < 200) needed[p - 16][ppid - 1] = 1;
      end
    @(negedge clk); pwe = 0;
    foreach (needed[b, i]) if (needed[b][i]) n_needed++;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(posedge clk iff done);
    @(negedge clk);
    foreach (needed[b, i]) begin
      checks++;
      if (got[b][i] != (needed[b][i] ? 1 : 0)) begin
        failures++;
        if (failures < 5) $display("bank %0d id %0d loaded %0d times, needed %0d", b, i, got[b][i], needed[b][i]);
      end
    end
    checks++;
    if (int'(loads) != n_needed || u_dram.reads != n_needed) begin
      failures++; $display("loads %0d dram %0d needed %0d", loads, u_dram.reads, n_needed);
    end
    $display("prefetch: %0d of %0d PWPs loaded", n_needed, 14 * 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
