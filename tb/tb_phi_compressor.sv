// Testbench for phi_compressor: random Level-2 rows (many empty, some with more than
// 7 nonzeros) with random back-pressure; every nonzero must come out once, in column
// order, with its sign, in chunks of at most 7 (every chunk but a row's last one full), and
// all-zero rows must vanish.
`timescale 1ns/1ps
module tb_phi_compressor;
  import phi_pkg::*;
  localparam int N = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  l2row_t in_row; crow_t out_row;
  phi_compressor dut (.*);

  // expected stream of (row, col, neg) nonzeros and chunk boundaries
  int exp_row[$], exp_col[$], exp_neg[$], exp_part[$];
  int chunks = 0, big_rows = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_row = '0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
      logic [15:0] pos, neg;
      case (r % 4)
        0: begin pos = 0; neg = 0; end
        1: begin pos = 16'(1 << ($urandom % 16)); neg = 0; end
        2: begin pos = 16'($urandom) & 16'($urandom) & 16'($urandom); neg = 16'($urandom) & 16'($urandom) & 16'($urandom) & ~pos; end
        default: begin pos = 16'($urandom); neg = 16'($urandom) & ~pos; end
      endcase
      if ($countones(pos | neg) > 7) big_rows++;
      for (int i = 0; i < 16; i++)
        if (pos[i] || neg[i]) begin exp_row.push_back(r % 256); exp_part.push_back(r % 3); exp_col.push_back(i); exp_neg.push_back(neg[i]); end
      in_row.row <= 8'(r); in_row.part <= 7'(r % 3); in_row.pos <= pos; in_row.neg <= neg;
      in_row.nnz <= 5'($countones(pos | neg));
      in_valid <= 1;
      @(posedge clk iff in_ready);
    end
    in_valid <= 0;
    repeat (50) @(posedge clk);
    checks++;
    if (exp_row.size() != 0) begin failures++; $display("%0d nonzeros never came out", exp_row.size()); end
    checks++;
    if (big_rows == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) out_ready <= ($urandom % 4) != 0;
    if (rst_n && out_valid && out_ready) begin
      chunks++;
      checks++;
      if (out_row.cnt == 0 || out_row.cnt > 7) failures++;
      // a chunk is full (7) unless it ends its row
      begin
        int rem;
        rem = 0;
        while (rem < exp_row.size() && exp_row[rem] == int'(out_row.row) && exp_part[rem] == int'(out_row.part)) rem++;
        checks++;
        if (int'(out_row.cnt) != ((rem < 7) ? rem : 7)) begin
          failures++;
          if (failures < 10) $display("chunk of %0d with %0d nonzeros left", out_row.cnt, rem);
        end
      end
      for (int j = 0; j < int'(out_row.cnt); j++) begin
        checks++;
        if (exp_row.size() == 0) begin failures++; $display("extra nonzero"); end
        else begin
          if (int'(out_row.row) != exp_row[0] || int'(out_row.col[j]) != exp_col[0] ||
              int'(out_row.neg[j]) != exp_neg[0] || int'(out_row.part) != exp_part[0]) begin
            failures++;
            if (failures < 10) $display("mismatch part %0d row %0d col %0d neg %0d, exp row %0d col %0d neg %0d",
                       out_row.part, out_row.row, out_row.col[j], out_row.neg[j], exp_row[0], exp_col[0], exp_neg[0]);
          end
          void'(exp_row.pop_front()); void'(exp_col.pop_front()); void'(exp_neg.pop_front()); void'(exp_part.pop_front());
        end
      end
    end
  end
endmodule
