// phi_pid_buffer: the Level-1 pattern index buffer. It holds the M x K/k matrix of
// pattern IDs (0 = no pattern) produced by the pattern matcher, stored as words of
// 16 IDs: the 16 consecutive partitions of one row that the L1 processor examines per
// cycle. Word address = row * GROUPS + partition/16. The default size is the paper's
// 28 KB: 256 rows x 7 groups x 16 partitions (K up to 1792 per layer).
// Interface: byte-lane write of one ID, asynchronous read of one 16-ID word.
module phi_pid_buffer
  import phi_pkg::*;
#(
  parameter int BYTES  = 28672,
  parameter int ROWS   = M_ROWS,
  parameter int GROUPS = BYTES / (ROWS * K_TILE)
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [ROW_W-1:0]              w_row,
  input  logic [PART_W-1:0]             w_part,
  input  logic [PID_W-1:0]              w_pid,
  input  logic [ROW_W-1:0]              r_row,
  input  logic [$clog2(GROUPS)-1:0]     r_group,
  output logic [K_TILE-1:0][PID_W-1:0]  r_word
);
  localparam int DEPTH = ROWS * GROUPS;
  localparam int AW    = $clog2(DEPTH);
  logic [K_TILE-1:0][PID_W-1:0] mem [DEPTH];
  logic [AW-1:0] wa, ra;

  assign wa     = AW'(int'(w_row) * GROUPS + int'(w_part) / K_TILE);
  assign ra     = AW'(int'(r_row) * GROUPS + int'(r_group));
  assign r_word = mem[ra];

  always_ff @(posedge clk) begin
    if (we) mem[wa][int'(w_part) % K_TILE] <= w_pid;
  end
endmodule
