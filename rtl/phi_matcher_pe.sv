// phi_matcher_pe: one Matcher unit of the 1-D systolic pattern matcher.
// It holds one 16-bit pattern. A spike row arrives with the best candidate found so far
// (fewest Level-2 nonzeros); the unit forms the difference activation - pattern
// (+1 where the row has a 1 the pattern lacks, -1 where the pattern has a 1 the row lacks),
// popcounts it, and keeps its own candidate when it has fewer nonzeros, or as many as a
// row that has no pattern yet (the paper drops the pattern only when it is worse than the
// plain bit sparsity). Ties between patterns go to the lower ID. An all-zero pattern is
// an empty slot and never matches. One register stage: latency 1 cycle, one row per cycle,
// stalled as a whole by 'adv'.
module phi_matcher_pe
  import phi_pkg::*;
#(
  parameter logic [PID_W-1:0] PAT_ID = 8'd1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              adv,        // pipeline advance
  input  logic              pat_we,     // load this unit's pattern
  input  logic [K_TILE-1:0] pat_data,
  input  logic              in_valid,
  input  l2row_t            in_best,
  input  logic [K_TILE-1:0] in_act,
  input  logic [PID_W-1:0]  in_id,
  output logic              out_valid,
  output l2row_t            out_best,
  output logic [K_TILE-1:0] out_act,
  output logic [PID_W-1:0]  out_id
);
  logic [K_TILE-1:0] pattern;
  logic [K_TILE-1:0] pos, neg;
  logic [NNZ_W-1:0]  nnz;
  logic              take;

  always_comb begin
    pos  = in_act & ~pattern;
    neg  = ~in_act & pattern;
    nnz  = NNZ_W'($countones(pos | neg));
    take = (pattern != '0) &&
           ((nnz < in_best.nnz) || ((nnz == in_best.nnz) && (in_id == '0)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pattern   <= '0;
      out_valid <= 1'b0;
      out_best  <= '0;
      out_act   <= '0;
      out_id    <= '0;
    end else begin
      if (pat_we) pattern <= pat_data;
      if (adv) begin
        out_valid <= in_valid;
        out_act   <= in_act;
        out_best  <= in_best;
        out_id    <= in_id;
        if (take) begin
          out_best.pos <= pos;
          out_best.neg <= neg;
          out_best.nnz <= nnz;
          out_id       <= PAT_ID;
        end
      end
    end
  end
endmodule
