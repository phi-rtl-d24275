// Testbench for phi_pattern_matcher: loads 128 random patterns (some slots left empty),
// streams random spike rows with random output back-pressure, and compares pattern ID,
// +1/-1 masks and nonzero count with a software model of the minimum-nonzero rule.
// Also checks the latency of 128 cycles and one-row-per-cycle throughput.
`timescale 1ns/1ps
module tb_phi_pattern_matcher;
  import phi_pkg::*;
  localparam int NP = 128;
  localparam int NROWS = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pat_we; logic [6:0] pat_addr; logic [15:0] pat_data;
  logic in_valid, in_ready; logic [7:0] in_row; logic [6:0] in_part; logic [15:0] in_act;
  logic out_valid, out_ready; l2row_t out_l2; logic [7:0] out_pid; logic busy;

  phi_pattern_matcher dut (.*);

  logic [15:0] pats [NP];
  logic [15:0] acts [NROWS];
  int sent = 0, got = 0, cyc = 0, first_in = -1, first_out = -1;

  function automatic void model(input logic [15:0] a, output logic [7:0] id,
                                output logic [15:0] p, output logic [15:0] n, output int nz);
    nz = $countones(a); id = 0; p = a; n = 0;
    for (int i = 0; i < NP; i++) begin
      int c;
      if (pats[i] == 0) continue;
      c = $countones(a ^ pats[i]);
      if (c < nz || (c == nz && id == 0)) begin
        nz = c; id = 8'(i + 1); p = a & ~pats[i]; n = ~a & pats[i];
      end
    end
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc++;

  initial begin
    pat_we = 0; pat_addr = 0; pat_data = 0; in_valid = 0; in_row = 0; in_part = 0; in_act = 0;
    out_ready = 1;
    for (int i = 0; i < NP; i++) begin
      pats[i] = (i % 17 == 5) ? 16'h0 : 16'($urandom) & 16'($urandom);
    end
    for (int r = 0; r < NROWS; r++) begin
      // rows close to a pattern, plus some random and all-zero rows
      if (r % 10 == 0) acts[r] = 0;
      else if (r % 3 == 0) acts[r] = 16'($urandom) & 16'($urandom);
      else acts[r] = pats[$urandom % NP] ^ (16'h1 << ($urandom % 16));
    end
    acts[1] = pats[3];   // exact match
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < NP; i++) begin
      pat_we <= 1; pat_addr <= 7'(i); pat_data <= pats[i];
      @(posedge clk);
    end
    pat_we <= 0;
    @(posedge clk);
    // stream: first 200 rows with ready always high (throughput/latency), rest random
    while (sent < NROWS) begin
      in_valid <= 1; in_act <= acts[sent]; in_row <= 8'(sent); in_part <= 7'(sent % 5);
      @(posedge clk iff in_ready);
      if (first_in < 0) first_in = int'($time / 10);
      sent++;
    end
    in_valid <= 0;
  end

  always @(posedge clk) begin
    if (rst_n && got >= 200) out_ready <= ($urandom % 3) != 0;
    if (rst_n && out_valid && out_ready) begin
      logic [7:0] id; logic [15:0] p, n; int nz;
      if (first_out < 0) first_out = int'($time / 10);
      model(acts[got], id, p, n, nz);
      checks++;
      if (out_pid !== id || out_l2.pos !== p || out_l2.neg !== n || int'(out_l2.nnz) != nz ||
          out_l2.row !== 8'(got) || out_l2.part !== 7'(got % 5)) begin
        failures++;
        if (failures < 10)
          $display("row %0d: act=%h got id=%0d pos=%h neg=%h nnz=%0d exp id=%0d pos=%h neg=%h nnz=%0d",
                   got, acts[got], out_pid, out_l2.pos, out_l2.neg, out_l2.nnz, id, p, n, nz);
      end
      got++;
      if (got == 200) begin
        // rows 0..199 left at one per cycle
        checks++;
        if (int'($time / 10) - first_out != 199) begin failures++; $display("throughput: %0d cycles", int'($time / 10) - first_out); end
      end
      if (got == NROWS) begin
        checks++;
        if (first_out - first_in != NP) begin
          failures++; $display("latency %0d, expected %0d", first_out - first_in, NP);
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
