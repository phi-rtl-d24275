// Testbench for phi_pack_buffer: random pushes and pops against a queue model, filling
// the buffer to its full capacity (309 packs) to check 'in_ready' and 'count'.
`timescale 1ns/1ps
module tb_phi_pack_buffer;
  import phi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  pack_t in_pack, out_pack;
  logic [8:0] count;
  phi_pack_buffer dut (.*);
  pack_t model [$];
  localparam int DEPTH = (4096 * 8) / $bits(pack_t);
  int cyc = 0, saw_full = 0;

  function automatic pack_t rnd();
    pack_t p;
    for (int i = 0; i < $bits(pack_t); i += 32) p[i +: 32] = $urandom;
    return p;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_pack = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // phase 1: mostly push (fill up), phase 2: mostly pop
      in_valid  = (cyc < 1000) ? ($urandom % 8 != 0) : ($urandom % 3 == 0);
      out_ready = (cyc < 1000) ? ($urandom % 8 == 0) : ($urandom % 3 != 0);
      in_pack   = rnd();
      #1;
      checks++;
      if (int'(count) != model.size() || in_ready != (model.size() < DEPTH) ||
          out_valid != (model.size() > 0)) begin
        failures++; $display("status mismatch: count %0d model %0d", count, model.size());
      end
      if (out_valid && model.size() > 0) begin
        checks++;
        if (out_pack != model[0]) begin failures++; $display("data mismatch"); end
      end
      if (model.size() == DEPTH) saw_full++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_pack);
    end
    checks++;
    if (saw_full == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
