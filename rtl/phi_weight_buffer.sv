// phi_weight_buffer: holds k x n weight tiles (16 rows x 32 lanes x 8 bit = 512 B each)
// for the L2 processor. The paper's 16 KB gives 32 tiles; tile slot = partition mod 32.
// Interface: write of one weight row, asynchronous read of a whole 16-row tile, which the
// dispatcher indexes by column (W0..W15).
module phi_weight_buffer
  import phi_pkg::*;
#(
  parameter int BYTES = 16384,
  parameter int TILES = BYTES / (K_TILE * N_LANES * W_W / 8)
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [PART_W-1:0]      w_part,
  input  logic [3:0]             w_row,
  input  wvec_t                  w_data,
  input  logic [PART_W-1:0]      r_part,
  output wvec_t [K_TILE-1:0]     r_tile
);
  localparam int AW = $clog2(TILES);
  wvec_t [K_TILE-1:0] mem [TILES];
  always_ff @(posedge clk) begin
    if (we) mem[AW'(w_part % TILES)][w_row] <= w_data;
  end
  assign r_tile = mem[AW'(r_part % TILES)];
endmodule
