// phi_pwp_buffer: the pattern-weight product buffer. 16 banks, one per K partition of
// the current group of 16 partitions; each bank holds the PWP rows (32 lanes) of the 128
// patterns of its partition, addressed by pattern ID - 1. Default size 16 x 128 x 32 x
// 8 bit = 64 KB, the paper's figure. Interface: one write port (from the prefetcher),
// one asynchronous read port per bank, so the L1 processor can read all 16 banks at once.
module phi_pwp_buffer
  import phi_pkg::*;
#(
  parameter int BANKS = 16,
  parameter int NUM_P = NUM_PAT
) (
  input  logic                               clk,
  input  logic                               we,
  input  logic [$clog2(BANKS)-1:0]           w_bank,
  input  logic [$clog2(NUM_P)-1:0]           w_addr,
  input  wvec_t                              w_data,
  input  logic [BANKS-1:0][$clog2(NUM_P)-1:0] r_addr,
  output wvec_t                              r_data [BANKS]
);
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    wvec_t mem [NUM_P];
    always_ff @(posedge clk) begin
      if (we && w_bank == ($clog2(BANKS))'(b)) mem[w_addr] <= w_data;
    end
    assign r_data[b] = mem[r_addr[b]];
  end
endmodule
