// Testbench for phi_controller: runs tiles of 40, 16, 17, 1, 112, 33 and 20 partitions
// with random row counts (the last one without the neuron phase). Pattern-ID writes are
// reported partition by partition in increasing order while the tile streams in. Checks
// that no group is prefetched before its IDs are complete, that some groups start while
// rows are still arriving (L1 overlaps preprocessing), and, with responders with responders that answer prefetch and L1 starts after random
// delays, and checks the phase order PRE -> DRAIN -> (PF -> L1) x groups -> NEURON x rows
// -> done, one group per 16 partitions (rounded up).
`timescale 1ns/1ps
module tb_phi_controller;
  import phi_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, fire, act_done, pre_idle, pf_done, l1_done, id_valid; logic [6:0] id_part;
  logic [8:0] num_rows; logic [7:0] num_parts;
  logic in_pre, flush, pf_start, l1_start, nrn_valid, busy, done;
  logic [2:0] group; logic [7:0] nrn_row;
  phi_controller dut (.*);
  string trace = "";
  int nrn = 0, flushes = 0, seen = 0, overlap = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // responders
  always @(posedge clk) begin
    if (pf_start) begin
      checks++;
      if (!(seen > 16 * (int'(group) + 1) || pre_idle)) begin failures++; $display("group %0d started early: parts %0d seen %0d pre_idle %0d t=%0t", group, num_parts, seen, pre_idle, $time); end
      if (in_pre) overlap++;
      trace = {trace, $sformatf("P%0d", group)};
      fork begin repeat (3 + $urandom % 10) @(posedge clk); pf_done <= 1; @(posedge clk); pf_done <= 0; end join_none
    end
    if (l1_start) begin
      trace = {trace, $sformatf("L%0d", group)};
      fork begin repeat (3 + $urandom % 10) @(posedge clk); l1_done <= 1; @(posedge clk); l1_done <= 0; end join_none
    end
    if (nrn_valid) begin
      checks++;
      if (int'(nrn_row) != nrn) failures++;
      nrn++;
    end
    if (flush) flushes++;
    if (id_valid && int'(id_part) + 1 > seen) seen = int'(id_part) + 1;
  end

  initial begin
    int parts_list [7] = '{40, 16, 17, 1, 112, 33, 20};
    string exp;
    id_valid = 0; id_part = 0; fire = 1; start = 0; act_done = 0; pre_idle = 0; pf_done = 0; l1_done = 0; num_rows = 100; num_parts = 40;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 7; t++) begin
      fire = t != 6;   // last tile keeps its partial sums: no neuron phase
      num_parts = 8'(parts_list[t]);
      num_rows  = 9'(1 + $urandom % 256);
      trace = ""; nrn = 0; flushes = 0; exp = ""; seen = 0;
      for (int g = 0; g < (parts_list[t] + 15) / 16; g++) exp = {exp, $sformatf("P%0dL%0d", g, g)};
      pre_idle = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      checks++;
      if (!in_pre) failures++;
      for (int p = 0; p < parts_list[t]; p++) begin
        int n;
        n = 1 + $urandom % 4;
        for (int i = 0; i < n; i++) begin
          id_valid = 1; id_part = 7'(p);
          @(negedge clk);
          id_valid = 0;
          repeat ($urandom % 3) @(negedge clk);
        end
      end
      repeat (10) @(negedge clk);
      act_done = 1; @(negedge clk); act_done = 0;
      checks++;
      if (!flush || in_pre) failures++;
      repeat (5) @(negedge clk);
      pre_idle = 1;
      @(posedge clk iff done);
      @(negedge clk);
      checks++;
      if (trace != exp) begin failures++; $display("parts %0d: trace %s, expected %s", num_parts, trace, exp); end
      checks++;
      if (nrn != (fire ? int'(num_rows) : 0) || flushes < 5) begin failures++; $display("nrn %0d flushes %0d", nrn, flushes); end
      checks++;
      if (busy) failures++;
    end
    checks++;
    if (overlap == 0) begin failures++; $display("no group started during preprocessing"); end
    $display("overlapped group starts: %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
