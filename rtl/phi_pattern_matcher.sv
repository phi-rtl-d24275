// phi_pattern_matcher: the Phi pattern matcher (Preprocessor step 1-3).
// A spike row of one K partition (16 bits) enters and is compared, one unit per stage,
// with the NUM_PAT offline-calibrated patterns held in a chain of phi_matcher_pe units
// (1-D systolic array, as in the paper). The chain starts from the baseline "no pattern"
// candidate: the row itself as +1 entries, pattern ID 0. At the end of the chain the row
// carries the minimum-nonzero choice: the pattern ID (to the pattern-index buffer) and the
// Level-2 sparse row (+1/-1 masks and nonzero count, to the compressor).
// Interface: valid/ready on input and output; patterns are written by index while the
// chain is empty ('busy' low). Timing: one row per cycle, latency NUM_PAT cycles.
// The systolic organisation and the min-popcount rule follow the paper; the tie rules,
// the load port and the stall scheme are this design's choices.
// Lint note: rst_n is reported as used both synchronously and asynchronously only because
// the assertions below name it in 'disable iff'; the logic uses it as an asynchronous reset.
module phi_pattern_matcher
  import phi_pkg::*;
#(
  parameter int NUM_P = NUM_PAT
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // pattern load
  input  logic                     pat_we,
  input  logic [$clog2(NUM_P)-1:0] pat_addr,   // pattern ID - 1
  input  logic [K_TILE-1:0]        pat_data,
  // spike rows
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [ROW_W-1:0]         in_row,
  input  logic [PART_W-1:0]        in_part,
  input  logic [K_TILE-1:0]        in_act,
  // result
  output logic                     out_valid,
  input  logic                     out_ready,
  output l2row_t                   out_l2,
  output logic [PID_W-1:0]         out_pid,
  output logic                     busy
);
  logic              v   [NUM_P+1];
  l2row_t            b   [NUM_P+1];
  logic [K_TILE-1:0] a   [NUM_P+1];
  logic [PID_W-1:0]  id  [NUM_P+1];
  logic              adv;
  logic [NUM_P:1]    vbits;

  assign adv = !v[NUM_P] || out_ready;
  assign in_ready = adv;

  always_comb begin
    v[0]      = in_valid;
    a[0]      = in_act;
    id[0]     = '0;
    b[0].row  = in_row;
    b[0].part = in_part;
    b[0].pos  = in_act;
    b[0].neg  = '0;
    b[0].nnz  = NNZ_W'($countones(in_act));
  end

  for (genvar i = 0; i < NUM_P; i++) begin : g_pe
    phi_matcher_pe #(.PAT_ID(PID_W'(i + 1))) u_pe (
      .clk, .rst_n, .adv,
      .pat_we   (pat_we && (pat_addr == ($clog2(NUM_P))'(i))),
      .pat_data,
      .in_valid (v[i]),   .in_best (b[i]),   .in_act (a[i]),   .in_id (id[i]),
      .out_valid(v[i+1]), .out_best(b[i+1]), .out_act(a[i+1]), .out_id(id[i+1])
    );
  end

  always_comb for (int i = 1; i <= NUM_P; i++) vbits[i] = v[i];
  assign busy      = |vbits[NUM_P:1];
  assign out_valid = v[NUM_P];
  assign out_l2    = b[NUM_P];
  assign out_pid   = id[NUM_P];

  // Patterns must not change while rows are in flight.
  assert property (@(posedge clk) disable iff (!rst_n) pat_we |-> !busy);
endmodule
