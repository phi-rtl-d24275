// phi_compressor: Preprocessor step 4.
// Takes Level-2 sparse rows from the pattern matcher, drops rows without nonzeros and turns
// the +1/-1 masks into a list of column indices with signs (the compressed row). A pack has
// UNITS=8 units and each row needs one of them for its partial sum, so a compressed row
// carries at most 7 nonzeros. The paper states that larger rows do not occur; this design
// still handles them by emitting the row as several compressed rows of at most 7 nonzeros
// (same row index), lowest columns first.
// Interface: valid/ready in and out. Timing: one register stage; a row with up to
// 7 nonzeros passes at one row per cycle, a larger row takes one cycle per chunk.
module phi_compressor
  import phi_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  l2row_t in_row,
  output logic   out_valid,
  input  logic   out_ready,
  output crow_t  out_row
);
  localparam int MAXN = UNITS - 1;

  logic              hold_v;
  logic [ROW_W-1:0]  hold_row;
  logic [PART_W-1:0] hold_part;
  logic [K_TILE-1:0] rem_pos, rem_neg;

  logic [K_TILE-1:0] take_mask;
  logic              last_chunk;
  crow_t             chunk;
  logic [UNITS-2:0][3:0] ccol;
  logic [UNITS-2:0]      cneg;
  int unsigned       c;

  always_comb begin
    ccol       = '0;
    cneg       = '0;
    take_mask  = '0;
    c          = 0;
    for (int i = 0; i < K_TILE; i++) begin
      if ((rem_pos[i] || rem_neg[i]) && c < MAXN) begin
        ccol[c] = 4'(i);
        cneg[c] = rem_neg[i];
        take_mask[i] = 1'b1;
        c = c + 1;
      end
    end
    chunk      = '{row: hold_row, part: hold_part, cnt: 3'(c), col: ccol, neg: cneg};
    last_chunk = ((rem_pos | rem_neg) & ~take_mask) == '0;
  end

  assign out_valid = hold_v;
  assign out_row   = chunk;
  assign in_ready  = !hold_v || (out_ready && last_chunk);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_v    <= 1'b0;
      hold_row  <= '0;
      hold_part <= '0;
      rem_pos   <= '0;
      rem_neg   <= '0;
    end else begin
      if (hold_v && out_ready) begin
        rem_pos <= rem_pos & ~take_mask;
        rem_neg <= rem_neg & ~take_mask;
        if (last_chunk) hold_v <= 1'b0;
      end
      if (in_valid && in_ready && in_row.nnz != '0) begin
        hold_v    <= 1'b1;
        hold_row  <= in_row.row;
        hold_part <= in_row.part;
        rem_pos   <= in_row.pos;
        rem_neg   <= in_row.neg;
      end
    end
  end
endmodule
