// Testbench for phi_l2_processor with real weight and partial-sum buffers around it.
// Streams 400 random valid packs back to back (rows of a pack in distinct banks, each
// row = partial-sum unit plus +/-1 weight units), including packs that reuse the previous
// pack's rows, and compares the partial-sum buffer with a software model at the end.
// Checks the rate of one pack per cycle.
`timescale 1ns/1ps
module tb_phi_l2_processor;
  import phi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready; pack_t in_pack;
  logic [6:0] w_part; wvec_t [15:0] w_tile;
  logic [7:0] ps_raddr [4], ps_waddr [4]; pvec_t ps_rdata [4], ps_wdata [4];
  logic [3:0] ps_we; logic busy; logic [31:0] packs_done;
  phi_l2_processor dut (.*);

  logic wwe; logic [6:0] wpart; logic [3:0] wrow; wvec_t wdata;
  phi_weight_buffer u_wb (.clk, .we(wwe), .w_part(wpart), .w_row(wrow), .w_data(wdata),
                          .r_part(w_part), .r_tile(w_tile));
  phi_psum_buffer u_ps (.clk, .rst_n, .we(ps_we), .w_addr(ps_waddr), .w_data(ps_wdata),
                        .r_addr(ps_raddr), .r_data(ps_rdata));

  int W [8][16][32];
  int P [256][32];
  localparam int NP = 400;
  pack_t packs [NP];
  int t_first, t_last;
  pvec_t dump [256];
  for (genvar b = 0; b < 4; b++) begin : g_dump
    always_comb for (int i = 0; i < 64; i++) dump[i * 4 + b] = u_ps.g_bank[b].mem[i];
  end

  function automatic pack_t make_pack(input pack_t prev, input bit reuse);
    pack_t p = '0;
    int used = 0, nr;
    logic [3:0] banks = 0;
    nr = 1 + $urandom % 4;
    p.part = 7'($urandom % 8);
    for (int s = 0; s < nr; s++) begin
      int row, n;
      if (used >= 8) break;
      do row = (reuse && s < int'(prev.n_rows)) ? int'(prev.row_id[s]) : $urandom % 256;
      while (banks[row % 4] && !(reuse && s < int'(prev.n_rows)));
      if (banks[row % 4]) break;
      banks[row % 4] = 1;
      n = 1 + $urandom % 3;
      if (used + 1 + n > 8) n = 8 - used - 1;
      if (n < 1) break;
      p.row_id[s] = 8'(row);
      p.row_units[s] = 4'(n + 1);
      p.u[used] = '{is_psum: 1'b1, idx: 4'(s), neg: 1'b0};
      for (int j = 1; j <= n; j++) p.u[used + j] = '{is_psum: 1'b0, idx: 4'($urandom % 16), neg: 1'($urandom % 2)};
      used += n + 1;
      p.n_rows = 3'(s + 1);
    end
    return p;
  endfunction

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_pack = '0; wwe = 0; wpart = 0; wrow = 0; wdata = '0;
    for (int r = 0; r < 256; r++) for (int l = 0; l < 32; l++) P[r][l] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 8; p++) for (int r = 0; r < 16; r++) begin
      @(negedge clk);
      wwe = 1; wpart = 7'(p); wrow = 4'(r);
      for (int l = 0; l < 32; l++) begin W[p][r][l] = $signed($urandom % 255) - 127; wdata[l] = wt_t'(W[p][r][l]); end
    end
    @(negedge clk); wwe = 0;
    packs[0] = make_pack('0, 0);
    for (int i = 1; i < NP; i++) packs[i] = make_pack(packs[i-1], ($urandom % 3) == 0);
    // model
    foreach (packs[i]) begin
      int u;
      u = 0;
      for (int s = 0; s < int'(packs[i].n_rows); s++) begin
        int r;
        int acc [32];
        r = packs[i].row_id[s];
        for (int l = 0; l < 32; l++) acc[l] = P[r][l];
        for (int j = 1; j < int'(packs[i].row_units[s]); j++)
          for (int l = 0; l < 32; l++)
            acc[l] += (packs[i].u[u + j].neg ? -1 : 1) * W[packs[i].part][packs[i].u[u + j].idx][l];
        for (int l = 0; l < 32; l++) P[r][l] = int'(ps_t'(acc[l]));
        u += int'(packs[i].row_units[s]);
      end
    end
    t_first = int'($time / 10);
    for (int i = 0; i < NP; i++) begin
      in_valid = 1; in_pack = packs[i];
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk); @(negedge clk);
    checks++;
    if (packs_done != NP) begin failures++; $display("packs_done %0d", packs_done); end
    for (int r = 0; r < 256; r++)
      for (int l = 0; l < 32; l++) begin
        checks++;
        if (dump[r][l] != ps_t'(P[r][l])) begin
          failures++;
          if (failures < 5) $display("row %0d lane %0d: %0d vs %0d", r, l, dump[r][l], P[r][l]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
