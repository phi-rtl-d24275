// phi_controller: sequences the processing of one output tile (ROWS x 32 outputs over a
// K dimension of num_parts partitions of 16). Two sequencers run side by side.
// Main sequencer:
//   PRE     spike rows stream through matcher, compressor and packer while the L2
//           processor consumes packs; ends when the host signals the last row (act_done).
//   DRAIN   the packer is flushed; wait until the preprocessing path and the L2
//           processor are empty (pre_idle).
//   L1WAIT  wait for the group sequencer to finish the last group.
//   NEURON  rows 0..num_rows-1, one per cycle, are read from both partial-sum buffers,
//           cleared, and sent to the spiking neuron array.
//           Skipped when 'fire' was low at start: the partial sums are then kept, and
//           the next tile, over the next slice of K, accumulates onto them. A layer
//           with K above one tile's limit runs as several tiles, the last one firing.
//   then 'done' pulses and the controller is idle again.
// Group sequencer, for each group g of 16 partitions: wait until the group's pattern IDs
//   are complete, then PF (prefetch the used PWPs) and L1 (L1 processor over all rows).
//   Partitions arrive in increasing order, so group g is complete once the matcher has
//   written an ID of partition 16(g+1) or later, or once the preprocessor has drained.
//   L1 work on one group thus overlaps preprocessing of the next groups and L2 work.
// Interface: id_valid/id_part report each pattern-ID write; all other signals are
// single-cycle strobes (start, act_done, pf_done, l1_done, pf_start, l1_start) or levels.
// The paper names the controller only and states that L1 and L2 work overlap with
// preprocessing; how it is sequenced here is this design's own.
// Lint note: rst_n is reported as used both synchronously and asynchronously only because
// the assertion below names it in 'disable iff'; the logic uses it as an asynchronous reset.
module phi_controller
  import phi_pkg::*;
#(
  parameter int GROUPS = 7
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      fire,        // run the neuron phase after this tile
  input  logic [ROW_W:0]            num_rows,
  input  logic [PART_W:0]           num_parts,
  input  logic                      act_done,
  input  logic                      pre_idle,
  input  logic                      id_valid,    // a pattern ID is written this cycle
  input  logic [PART_W-1:0]         id_part,     // ... for this partition
  input  logic                      pf_done,
  input  logic                      l1_done,
  output logic                      in_pre,      // accepting spike rows
  output logic                      flush,
  output logic                      pf_start,
  output logic                      l1_start,
  output logic [$clog2(GROUPS)-1:0] group,
  output logic                      nrn_valid,
  output logic [ROW_W-1:0]          nrn_row,
  output logic                      busy,
  output logic                      done
);
  typedef enum logic [2:0] {C_IDLE, C_PRE, C_DRAIN, C_L1WAIT, C_NRN} cstate_t;
  typedef enum logic [2:0] {G_IDLE, G_WAIT, G_PF, G_PFW, G_L1, G_L1W, G_FIN} gstate_t;
  cstate_t         st;
  gstate_t         gs;
  logic            fire_q;
  logic [ROW_W:0]  r;
  logic [PART_W:0] n_groups;
  logic [PART_W:0] parts_seen;   // 1 + highest partition whose ID has been written
  logic            ready_g;

  assign n_groups  = (num_parts + (PART_W+1)'(K_TILE - 1)) / (PART_W+1)'(K_TILE);
  assign ready_g   = (st == C_L1WAIT) ||
                     (int'(parts_seen) > (int'(group) + 1) * K_TILE);
  assign in_pre    = st == C_PRE;
  assign flush     = st == C_DRAIN;
  assign pf_start  = gs == G_PF;
  assign l1_start  = gs == G_L1;
  assign nrn_valid = st == C_NRN;
  assign nrn_row   = r[ROW_W-1:0];
  assign busy      = st != C_IDLE;

  // main sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= C_IDLE;
      r      <= '0;
      done   <= 1'b0;
      fire_q <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        C_IDLE:   if (start) begin
          st     <= C_PRE;
          fire_q <= fire;
        end
        C_PRE:    if (act_done) st <= C_DRAIN;
        C_DRAIN:  if (pre_idle) st <= C_L1WAIT;
        C_L1WAIT: if (gs == G_FIN) begin
          r <= '0;
          if (fire_q) st <= C_NRN;
          else begin
            st   <= C_IDLE;
            done <= 1'b1;
          end
        end
        C_NRN: begin
          r <= r + 1'b1;
          if (r + 1'b1 == num_rows) begin
            st   <= C_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // group sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gs         <= G_IDLE;
      group      <= '0;
      parts_seen <= '0;
    end else begin
      if (id_valid && (PART_W+1)'(id_part) >= parts_seen) parts_seen <= (PART_W+1)'(id_part) + 1'b1;
      case (gs)
        G_IDLE, G_FIN: if (st == C_IDLE && start) begin
          gs         <= G_WAIT;
          group      <= '0;
          parts_seen <= '0;
        end else if (gs == G_FIN && st != C_L1WAIT) gs <= G_IDLE;
        G_WAIT: if (ready_g) gs <= G_PF;
        G_PF:   gs <= G_PFW;
        G_PFW:  if (pf_done) gs <= G_L1;
        G_L1:   gs <= G_L1W;
        G_L1W:  if (l1_done) begin
          if ((PART_W+1)'(group) + 1'b1 == n_groups) gs <= G_FIN;
          else begin
            group <= group + 1'b1;
            gs    <= G_WAIT;
          end
        end
        default: gs <= G_IDLE;
      endcase
    end
  end

  // the host streams partitions in increasing order
  assert property (@(posedge clk) disable iff (!rst_n)
                   id_valid && st == C_PRE |-> (PART_W+1)'(id_part) + 1'b1 >= parts_seen);
endmodule
