// phi_psum_buffer: banked partial-sum buffer for one output tile (ROWS rows x 32 lanes).
// Row r lives in bank r mod BANKS at address r / BANKS. Every bank has one asynchronous
// read port and one write port, so a pack whose rows sit in different banks (which the
// packer guarantees) reads and writes all its partial sums in the same cycle. The L1
// partial sums use one bank, the L2 partial sums four (the bank count of the paper's
// Figure 4). Reset clears the contents. The paper gives 128 KB of partial-sum storage in
// total; this buffer holds one output tile per processor (2 x 16 KB at 16-bit sums).
// Lint note: rst_n is reported as used both synchronously and asynchronously only because
// the assertions below name it in 'disable iff'; the logic uses it as an asynchronous reset.
module phi_psum_buffer
  import phi_pkg::*;
#(
  parameter int BANKS = PSUM_BANKS,
  parameter int ROWS  = M_ROWS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [BANKS-1:0]         we,
  input  logic [ROW_W-1:0]         w_addr [BANKS],   // row index (bank bits ignored)
  input  pvec_t                    w_data [BANKS],
  input  logic [ROW_W-1:0]         r_addr [BANKS],
  output pvec_t                    r_data [BANKS]
);
  localparam int DEPTH = ROWS / BANKS;
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    pvec_t mem [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
      end else if (we[b]) begin
        mem[AW'(int'(w_addr[b]) / BANKS)] <= w_data[b];
      end
    end
    assign r_data[b] = mem[AW'(int'(r_addr[b]) / BANKS)];
    // Writes must address the bank the row belongs to.
    assert property (@(posedge clk) disable iff (!rst_n)
                     we[b] |-> (int'(w_addr[b]) % BANKS) == b);
  end
endmodule
