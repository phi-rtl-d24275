// phi_pkg: types and constants shared by the Phi pattern-sparsity SNN accelerator.
// The tile sizes (k=16 spike columns per partition, n=32 output lanes, m=256 rows),
// the 128 patterns per partition, the 8-unit pack, the 8 adder-tree channels and the
// 16 PWP banks follow the paper. Data widths (8-bit weights and PWPs, 16-bit partial
// sums) and the pack field encodings are this design's own choices.
package phi_pkg;
  localparam int K_TILE     = 16;   // spike columns per K partition
  localparam int N_LANES    = 32;   // SIMD lanes = output columns per tile
  localparam int M_ROWS     = 256;  // rows per output tile
  localparam int NUM_PAT    = 128;  // patterns per partition
  localparam int PID_W      = 8;    // pattern ID: 0 = none, 1..128 = pattern
  localparam int UNITS      = 8;    // units per pack
  localparam int PSUM_BANKS = 4;    // partial-sum banks (row mod 4)
  localparam int ROW_W      = 8;    // row index inside a tile
  localparam int PART_W     = 7;    // partition index (up to 112 partitions)
  localparam int W_W        = 8;    // weight / PWP element width
  localparam int PSUM_W     = 16;   // partial-sum / membrane width
  localparam int NNZ_W      = 5;    // 0..16 nonzeros in a row

  typedef logic signed [W_W-1:0]    wt_t;
  typedef logic signed [PSUM_W-1:0] ps_t;
  typedef wt_t [N_LANES-1:0]        wvec_t;   // one weight / PWP row
  typedef ps_t [N_LANES-1:0]        pvec_t;   // one partial-sum row

  // One row of the Level-2 sparse matrix as produced by the pattern matcher.
  typedef struct packed {
    logic [ROW_W-1:0]  row;
    logic [PART_W-1:0] part;
    logic [K_TILE-1:0] pos;    // +1 correction positions
    logic [K_TILE-1:0] neg;    // -1 correction positions
    logic [NNZ_W-1:0]  nnz;
  } l2row_t;

  // A compressed row: up to UNITS-1 nonzeros (one unit is kept for the partial sum).
  typedef struct packed {
    logic [ROW_W-1:0]              row;
    logic [PART_W-1:0]             part;
    logic [2:0]                    cnt;    // nonzeros, 1..7
    logic [UNITS-2:0][3:0]         col;    // column index per nonzero
    logic [UNITS-2:0]              neg;    // 1: value -1, 0: value +1
  } crow_t;

  // One pack unit: label, index, value (Sec. 4.2.2).
  typedef struct packed {
    logic       is_psum;   // label: 1 = partial sum (p), 0 = weight (w)
    logic [3:0] idx;       // column index (w) or psum index within the pack (p)
    logic       neg;       // value: 1 means -1
  } unit_t;

  typedef struct packed {
    unit_t [UNITS-1:0]                  u;
    logic  [PSUM_BANKS-1:0][3:0]        row_units;  // units used per row slot
    logic  [PSUM_BANKS-1:0][ROW_W-1:0]  row_id;
    logic  [2:0]                        n_rows;     // 1..4 row slots in use
    logic  [PART_W-1:0]                 part;       // K partition of this pack
  } pack_t;
endpackage
