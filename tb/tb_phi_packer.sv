// Testbench for phi_packer. A directed part reproduces a bank conflict (rows 1 and 5 share
// partial-sum bank 01) and an eviction; a random part streams compressed rows of several
// partitions with random back-pressure. Every pack is checked for: at most 8 units, one
// partition, no two rows in one bank, each row's partial-sum unit first with index = its
// slot, and every input row coming out exactly once with its columns and signs.
`timescale 1ns/1ps
module tb_phi_packer;
  import phi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic flush, in_valid, in_ready, out_valid, out_ready, empty, evict_event;
  crow_t in_row; pack_t out_pack;
  phi_packer dut (.*);

  int pending [string];
  pack_t packs [$];
  int n_in = 0, n_rows_out = 0, evicts = 0, units_out = 0;

  function automatic string key_in(crow_t r);
    string s = $sformatf("%0d:%0d:", r.part, r.row);
    for (int j = 0; j < int'(r.cnt); j++) s = {s, $sformatf("%0d%s,", r.col[j], r.neg[j] ? "-" : "+")};
    return s;
  endfunction

  task automatic send(input int part, input int row, input int cnt);
    crow_t r = '0;
    logic [15:0] used = 0;
    r.part = 7'(part); r.row = 8'(row); r.cnt = 3'(cnt);
    for (int j = 0; j < cnt; j++) begin
      int c;
      do c = $urandom % 16; while (used[c]);
      used[c] = 1;
    end
    begin
      int j = 0;
      for (int c = 0; c < 16; c++) if (used[c]) begin r.col[j] = 4'(c); r.neg[j] = 1'($urandom % 2); j++; end
    end
    if (pending.exists(key_in(r))) pending[key_in(r)]++; else pending[key_in(r)] = 1;
    n_in++;
    @(negedge clk);
    in_row = r; in_valid = 1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic do_flush();
    @(negedge clk);
    flush = 1;
    #1;
    while (!empty) begin @(negedge clk); #1; end
    flush = 0;
    @(posedge clk);
  endtask

  logic rand_ready = 0;
  always @(posedge clk) if (rand_ready) out_ready <= ($urandom % 4) != 0;

  // pack checker
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      pack_t p;
      int pos;
      logic [3:0] banks;
      p = out_pack; pos = 0; banks = 0;
      packs.push_back(p);
      checks++;
      if (p.n_rows == 0 || p.n_rows > 4) begin failures++; $display("bad n_rows %0d", p.n_rows); end
      for (int s = 0; s < int'(p.n_rows); s++) begin
        string k;
        k = $sformatf("%0d:%0d:", p.part, p.row_id[s]);
        checks++;
        if (banks[p.row_id[s][1:0]]) begin failures++; $display("bank conflict in pack"); end
        banks[p.row_id[s][1:0]] = 1;
        if (!p.u[pos].is_psum || p.u[pos].idx != 4'(s) || p.u[pos].neg) begin
          failures++; $display("psum unit wrong at slot %0d", s);
        end
        for (int j = 1; j < int'(p.row_units[s]); j++) begin
          if (p.u[pos + j].is_psum) begin failures++; $display("unexpected psum unit"); end
          k = {k, $sformatf("%0d%s,", p.u[pos + j].idx, p.u[pos + j].neg ? "-" : "+")};
        end
        pos += int'(p.row_units[s]);
        checks++;
        if (!pending.exists(k) || pending[k] == 0) begin failures++; $display("row not expected: %s", k); end
        else pending[k]--;
        n_rows_out++;
      end
      units_out += pos;
      checks++;
      if (pos > 8) begin failures++; $display("pack over 8 units"); end
    end
    if (rst_n && evict_event) evicts++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog: n_in=%0d packs=%0d out_ready=%0d out_valid=%0d in_valid=%0d flushing=%0d", n_in, packs.size(), out_ready, out_valid, in_valid, dut.flushing);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flush = 0; in_valid = 0; in_row = '0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // Directed: row 1 and row 5 conflict on bank 01 -> two packs after the flush.
    send(0, 1, 1);
    send(0, 5, 1);
    do_flush();
    checks++;
    if (packs.size() != 2 || packs[0].n_rows != 1 || packs[1].n_rows != 1) begin
      failures++; $display("conflict case: %0d packs", packs.size());
    end
    // Directed: rows 0 and 1 take 6+2 units of window 0; row 2 (6 units) fits nowhere
    // after rows 4 (6 units) fill window 1 -> the fullest window is evicted.
    packs.delete();
    send(1, 0, 5);  // 6 units -> window 0
    send(1, 1, 1);  // 2 units -> window 0 (best fit), now full
    send(1, 4, 5);  // bank 00 busy in window 0, goes to window 1 (6 units)
    send(1, 2, 5);  // 6 units: fits nowhere -> evict fullest (window 0)
    @(posedge clk);
    checks++;
    if (packs.size() != 1 || packs[0].n_rows != 2 || packs[0].row_id[0] != 0 || packs[0].row_id[1] != 1) begin
      failures++; $display("eviction case wrong: %0d packs", packs.size());
    end
    do_flush();
    // Random stream over partitions with random back-pressure.
    rand_ready = 1;
    for (int part = 2; part < 12; part++)
      for (int i = 0; i < 60; i++) begin
        int c;
        c = ($urandom % 8 == 0) ? 3 + $urandom % 5 : 1 + $urandom % 2;
        send(part, $urandom % 256, c);
      end
    do_flush();
    repeat (5) @(posedge clk);
    checks++;
    if (n_rows_out != n_in) begin failures++; $display("rows in %0d out %0d", n_in, n_rows_out); end
    checks++;
    if (evicts == 0) failures++;
    $display("packer: %0d rows, %0d packs, %0d evictions, %0d units", n_in, packs.size(), evicts, units_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
