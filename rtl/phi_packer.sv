// phi_packer: Preprocessor steps 5-6, row packing for the Level-2 processor.
// Compressed rows are packed into 8-unit packs. A row takes one partial-sum unit
// (label p, index = its slot among the pack's partial sums, value +1) followed by one
// weight unit per nonzero (label w, index = column, value +1/-1). NUM_WIN windows each
// hold an incomplete pack. For every window a conflict detector performs the space check
// (nonzeros < free units, i.e. the row and its partial-sum unit fit) and the bank check
// (no row already in the pack maps to the same partial-sum bank, bank = row mod 4).
// The controller puts the row into the fitting window that is fullest (best fit, lower
// index on a tie). If none fits, the fullest window is sent to the pack buffer and the row
// starts a fresh pack there. A pack only holds rows of one K partition: when a row of a
// new partition arrives, or 'flush' is raised, all non-empty windows are sent out first,
// one per cycle. Interface: valid/ready on both sides; 'empty' is high when no window
// holds data. Timing: one row per cycle when no flush is pending.
// The window/conflict-detector organisation, the space and bank checks and the eviction of
// the most-filled pack follow the paper; two windows and four banks are read from its
// Figure 4; best fit and the partition flush are this design's choices.
// Lint note: rst_n is reported as used both synchronously and asynchronously only because
// the assertions below name it in 'disable iff'; the logic uses it as an asynchronous reset.
module phi_packer
  import phi_pkg::*;
#(
  parameter int NUM_WIN = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  flush,
  input  logic  in_valid,
  output logic  in_ready,
  input  crow_t in_row,
  output logic  out_valid,
  input  logic  out_ready,
  output pack_t out_pack,
  output logic  empty,
  output logic  evict_event    // a pack left because no window fitted (statistic)
);
  typedef struct packed {
    pack_t                 p;
    logic [3:0]            used;
    logic [PSUM_BANKS-1:0] banks;
  } win_t;

  win_t win [NUM_WIN];

  logic [NUM_WIN-1:0] fits, nonempty;
  logic               flushing, any_fit, found;
  localparam int WW = (NUM_WIN > 1) ? $clog2(NUM_WIN) : 1;
  logic [WW-1:0]      sel, fullest, first_ne;
  logic [1:0]         bank;
  logic [3:0]         need;

  function automatic win_t add_row(win_t w, crow_t r);
    win_t       o = w;
    logic [3:0] pos = w.used;
    logic [1:0] slot = w.p.n_rows[1:0];
    o.p.u[pos[2:0]] = '{is_psum: 1'b1, idx: 4'(slot), neg: 1'b0};
    for (int j = 0; j < UNITS - 1; j++)
      if (j < int'(r.cnt))
        o.p.u[3'(int'(pos) + 1 + j)] = '{is_psum: 1'b0, idx: r.col[j], neg: r.neg[j]};
    o.p.row_units[slot] = 4'(r.cnt) + 4'd1;
    o.p.row_id[slot]    = r.row;
    o.p.n_rows          = w.p.n_rows + 3'd1;
    o.p.part            = r.part;
    o.used              = w.used + 4'(r.cnt) + 4'd1;
    o.banks[r.row[1:0]] = 1'b1;
    return o;
  endfunction

  always_comb begin
    bank     = in_row.row[1:0];
    need     = 4'(in_row.cnt) + 4'd1;
    flushing = 1'b0;
    for (int w = 0; w < NUM_WIN; w++) begin
      nonempty[w] = win[w].used != '0;
      fits[w]     = (need <= 4'(UNITS) - win[w].used) && !win[w].banks[bank];
      if (flush && nonempty[w]) flushing = 1'b1;
      if (in_valid && nonempty[w] && win[w].p.part != in_row.part) flushing = 1'b1;
    end
    any_fit  = |fits;
    sel      = '0;
    fullest  = '0;
    first_ne = '0;
    for (int w = NUM_WIN - 1; w >= 0; w--) begin
      if (nonempty[w]) first_ne = WW'(w);
    end
    for (int w = 0; w < NUM_WIN; w++) begin
      if (win[w].used > win[fullest].used) fullest = WW'(w);
    end
    found = 1'b0;
    for (int w = 0; w < NUM_WIN; w++) begin
      if (fits[w] && (!found || win[w].used > win[sel].used)) begin
        sel   = WW'(w);
        found = 1'b1;
      end
    end
    if (!any_fit) sel = fullest;

    empty     = !(|nonempty);
    out_valid = 1'b0;
    out_pack  = win[first_ne].p;
    in_ready  = 1'b0;
    if (flushing) begin
      out_valid = 1'b1;
    end else if (in_valid) begin
      if (any_fit) begin
        in_ready = 1'b1;
      end else begin
        out_valid = 1'b1;
        out_pack  = win[fullest].p;
        in_ready  = out_ready;
      end
    end
  end

  assign evict_event = !flushing && in_valid && !any_fit && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < NUM_WIN; w++) win[w] <= '0;
    end else if (flushing) begin
      if (out_ready) win[first_ne] <= '0;
    end else if (in_valid && in_ready) begin
      if (any_fit) win[sel] <= add_row(win[sel], in_row);
      else         win[sel] <= add_row('0, in_row);
    end
  end

  // A row never needs more units than a pack holds (the compressor caps it at 7 nonzeros).
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_row.cnt != 3'd0);
endmodule
