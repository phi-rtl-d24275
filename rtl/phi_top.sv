// phi_top: the Phi accelerator for one output tile of an SNN layer (M x K spikes times
// K x N weights, tile m=256 rows, n=32 outputs, K split into partitions of k=16).
//   Preprocessor: phi_pattern_matcher -> phi_compressor -> phi_packer. Pattern IDs go to
//     the pattern-index buffer, packs to the L2 pack buffer.
//   L2 path: phi_l2_processor takes packs, reads the weight buffer and accumulates into
//     the 4-bank L2 partial-sum buffer while spike rows are still arriving.
//   L1 path: per group of 16 partitions, phi_prefetcher loads the used PWPs from DRAM into
//     the 16-bank PWP buffer, then phi_l1_processor accumulates them into the L1 partial sums.
//   Neuron: L1 + L2 partial sums of each row go to the 32 LIF neurons; spikes leave on spk_*.
//   phi_controller sequences the phases. A group's prefetch and L1 pass start as soon as
//     the matcher has written all its pattern IDs, overlapping the preprocessing of later
//     partitions and the L2 work.
// Host protocol: write the weight tiles (w_*), pulse 'start', then for each partition, in
// increasing order, load
// its patterns (pat_*, only while pat_ready) and stream its rows (act_*), and raise
// act_done once the last row has been accepted. Spike rows of the tile appear on spk_*,
// then 'done' pulses. DRAM holds the PWPs at cfg_pwp_base + partition*128 + ID-1.
// A layer whose K exceeds one tile (GROUPS*16 partitions) runs as several tiles over
// successive K slices with cfg_fire low on all but the last: partial sums then stay in
// the buffers and no spikes are produced until the last slice.
// The spike output would feed the preprocessor of the next layer; here it leaves the chip
// and the host streams it back, which is this design's simplification.
// Lint note: rst_n is reported as used both synchronously and asynchronously only because
// the assertions below name it in 'disable iff'; the logic uses it as an asynchronous reset.
module phi_top
  import phi_pkg::*;
#(
  parameter int NUM_P  = NUM_PAT,
  parameter int ROWS   = M_ROWS,
  parameter int GROUPS = 7
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  logic                     start,
  input  logic                     cfg_fire,      // 0: keep partial sums for the next K slice
  input  logic [ROW_W:0]           cfg_rows,
  input  logic [PART_W:0]          cfg_parts,
  input  logic [3:0]               cfg_leak,
  input  ps_t                      cfg_vth,
  input  logic [31:0]              cfg_pwp_base,
  input  logic                     clear_membrane,
  // patterns of the current partition
  input  logic                     pat_we,
  input  logic [$clog2(NUM_P)-1:0] pat_addr,
  input  logic [K_TILE-1:0]        pat_data,
  output logic                     pat_ready,
  // spike rows
  input  logic                     act_valid,
  output logic                     act_ready,
  input  logic [ROW_W-1:0]         act_row,
  input  logic [PART_W-1:0]        act_part,
  input  logic [K_TILE-1:0]        act_bits,
  input  logic                     act_done,
  // weights
  input  logic                     w_we,
  input  logic [PART_W-1:0]        w_part,
  input  logic [3:0]               w_row,
  input  wvec_t                    w_data,
  // DRAM (PWP reads)
  output logic                     dram_req_valid,
  input  logic                     dram_req_ready,
  output logic [31:0]              dram_req_addr,
  input  logic                     dram_rsp_valid,
  input  wvec_t                    dram_rsp_data,
  // output spikes
  output logic                     spk_valid,
  output logic [ROW_W-1:0]         spk_row,
  output logic [N_LANES-1:0]       spk_bits,
  output logic                     busy,
  output logic                     done,
  // statistics
  output logic [31:0]              stat_packs,
  output logic [31:0]              stat_evicts,
  output logic [31:0]              stat_pwp_loads,
  output logic [31:0]              stat_l1_split_rows,
  output logic [31:0]              stat_l1_cycles,
  output logic [31:0]              stat_l2_rows
);
  localparam int GW = $clog2(GROUPS);

  // ---------------- controller ----------------
  logic in_pre, flush, pf_start, l1_start, nrn_valid, ctrl_done, pre_idle, pf_done, l1_done;
  logic [GW-1:0]    group;
  logic [ROW_W-1:0] nrn_row;

  // ---------------- preprocessor ----------------
  logic   m_out_valid, m_busy, c_in_ready, c_out_valid, p_in_ready;
  l2row_t m_out_l2;
  logic [PID_W-1:0] m_out_pid;
  crow_t  c_out;
  logic   pk_valid, pk_ready, pk_empty, pk_evict;
  pack_t  pk;
  logic   pb_out_valid, pb_out_ready;
  pack_t  pb_out;

  phi_controller #(.GROUPS(GROUPS)) u_ctrl (
    .clk, .rst_n, .start, .fire(cfg_fire), .num_rows(cfg_rows), .num_parts(cfg_parts),
    .act_done, .pre_idle, .id_valid(m_out_valid && c_in_ready), .id_part(m_out_l2.part),
    .pf_done, .l1_done,
    .in_pre, .flush, .pf_start, .l1_start, .group, .nrn_valid, .nrn_row,
    .busy, .done(ctrl_done)
  );

  logic m_in_ready;
  assign act_ready = in_pre && m_in_ready;
  assign pat_ready = !m_busy;

  phi_pattern_matcher #(.NUM_P(NUM_P)) u_match (
    .clk, .rst_n, .pat_we, .pat_addr, .pat_data,
    .in_valid(act_valid && in_pre), .in_ready(m_in_ready),
    .in_row(act_row), .in_part(act_part), .in_act(act_bits),
    .out_valid(m_out_valid), .out_ready(c_in_ready),
    .out_l2(m_out_l2), .out_pid(m_out_pid), .busy(m_busy)
  );

  phi_compressor u_comp (
    .clk, .rst_n, .in_valid(m_out_valid), .in_ready(c_in_ready), .in_row(m_out_l2),
    .out_valid(c_out_valid), .out_ready(p_in_ready), .out_row(c_out)
  );

  phi_packer u_pack (
    .clk, .rst_n, .flush, .in_valid(c_out_valid), .in_ready(p_in_ready), .in_row(c_out),
    .out_valid(pk_valid), .out_ready(pk_ready), .out_pack(pk), .empty(pk_empty),
    .evict_event(pk_evict)
  );

  phi_pack_buffer u_pbuf (
    .clk, .rst_n, .in_valid(pk_valid), .in_ready(pk_ready), .in_pack(pk),
    .out_valid(pb_out_valid), .out_ready(pb_out_ready), .out_pack(pb_out), .count()
  );

  // ---------------- pattern-index buffer ----------------
  logic [ROW_W-1:0] pid_rrow, pf_pid_row, l1_pid_row;
  logic [K_TILE-1:0][PID_W-1:0] pid_word;
  logic pf_busy;
  assign pid_rrow = pf_busy ? pf_pid_row : l1_pid_row;

  phi_pid_buffer #(.ROWS(ROWS), .GROUPS(GROUPS), .BYTES(ROWS * GROUPS * K_TILE)) u_pid (
    .clk, .we(m_out_valid && c_in_ready), .w_row(m_out_l2.row), .w_part(m_out_l2.part),
    .w_pid(m_out_pid), .r_row(pid_rrow), .r_group(group), .r_word(pid_word)
  );

  // ---------------- L1 path ----------------
  logic                 pwp_we;
  logic [3:0]           pwp_bank;
  logic [$clog2(NUM_P)-1:0] pwp_waddr;
  wvec_t                pwp_wdata;
  logic [K_TILE-1:0][$clog2(NUM_P)-1:0] pwp_raddr;
  wvec_t                pwp_rdata [K_TILE];
  logic                 l1_busy;
  logic [31:0]          l1_cycles, l1_split;

  phi_prefetcher #(.NUM_P(NUM_P), .GROUPS(GROUPS)) u_pf (
    .clk, .rst_n, .start(pf_start), .group, .num_rows(cfg_rows), .num_parts(cfg_parts),
    .base_addr(cfg_pwp_base), .pid_row(pf_pid_row), .pid_word,
    .dram_req_valid, .dram_req_ready, .dram_req_addr, .dram_rsp_valid, .dram_rsp_data,
    .pwp_we, .pwp_bank, .pwp_addr(pwp_waddr), .pwp_data(pwp_wdata),
    .busy(pf_busy), .done(pf_done), .loads()
  );

  // accumulate prefetch loads over all groups of the tile
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 stat_pwp_loads <= '0;
    else if (start && !busy)    stat_pwp_loads <= '0;
    else if (dram_req_valid && dram_req_ready) stat_pwp_loads <= stat_pwp_loads + 1;
  end

  phi_pwp_buffer #(.BANKS(K_TILE), .NUM_P(NUM_P)) u_pwp (
    .clk, .we(pwp_we), .w_bank(pwp_bank), .w_addr(pwp_waddr), .w_data(pwp_wdata),
    .r_addr(pwp_raddr), .r_data(pwp_rdata)
  );

  logic [ROW_W-1:0] l1_ps_addr;
  pvec_t            l1_ps_rdata, l1_ps_wdata;
  logic             l1_ps_we;

  phi_l1_processor #(.NUM_P(NUM_P), .GROUPS(GROUPS)) u_l1 (
    .clk, .rst_n, .start(l1_start), .group, .num_rows(cfg_rows), .num_parts(cfg_parts),
    .pid_row(l1_pid_row), .pid_word, .pwp_addr(pwp_raddr), .pwp_data(pwp_rdata),
    .ps_addr(l1_ps_addr), .ps_rdata(l1_ps_rdata), .ps_we(l1_ps_we), .ps_wdata(l1_ps_wdata),
    .busy(l1_busy), .done(l1_done), .cycles(l1_cycles), .split_rows(l1_split)
  );

  // the L1 counters restart with every group: add them up over the tile
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_l1_split_rows <= '0;
      stat_l1_cycles     <= '0;
    end else if (start && !busy) begin
      stat_l1_split_rows <= '0;
      stat_l1_cycles     <= '0;
    end else if (l1_done) begin
      stat_l1_split_rows <= stat_l1_split_rows + l1_split;
      stat_l1_cycles     <= stat_l1_cycles + l1_cycles;
    end
  end

  // L1 partial sums: one bank; the neuron phase reads and clears.
  logic [0:0] l1b_we_v;
  logic [ROW_W-1:0] l1b_waddr [1], l1b_raddr [1];
  pvec_t      l1b_wdata [1], l1b_rdata [1];
  always_comb begin
    l1b_raddr[0] = nrn_valid ? nrn_row : l1_ps_addr;
    l1b_waddr[0] = l1b_raddr[0];
    l1b_we_v[0]  = nrn_valid || l1_ps_we;
    l1b_wdata[0] = nrn_valid ? '0 : l1_ps_wdata;
  end
  assign l1_ps_rdata = l1b_rdata[0];

  phi_psum_buffer #(.BANKS(1), .ROWS(ROWS)) u_l1ps (
    .clk, .rst_n, .we(l1b_we_v), .w_addr(l1b_waddr), .w_data(l1b_wdata),
    .r_addr(l1b_raddr), .r_data(l1b_rdata)
  );

  // ---------------- L2 path ----------------
  logic [PART_W-1:0]   wb_rpart;
  wvec_t [K_TILE-1:0]  wb_tile;
  logic [ROW_W-1:0]    l2_raddr [PSUM_BANKS], l2_waddr [PSUM_BANKS];
  logic [ROW_W-1:0]    l2b_raddr [PSUM_BANKS], l2b_waddr [PSUM_BANKS];
  pvec_t               l2_rdata [PSUM_BANKS], l2_wdata [PSUM_BANKS], l2b_wdata [PSUM_BANKS];
  logic [PSUM_BANKS-1:0] l2_we, l2b_we;
  logic                l2_busy, l2_in_ready;

  phi_weight_buffer u_wbuf (
    .clk, .we(w_we), .w_part, .w_row, .w_data, .r_part(wb_rpart), .r_tile(wb_tile)
  );

  assign pb_out_ready = l2_in_ready;

  phi_l2_processor u_l2 (
    .clk, .rst_n, .in_valid(pb_out_valid), .in_ready(l2_in_ready), .in_pack(pb_out),
    .w_part(wb_rpart), .w_tile(wb_tile),
    .ps_raddr(l2_raddr), .ps_rdata(l2_rdata), .ps_we(l2_we), .ps_waddr(l2_waddr),
    .ps_wdata(l2_wdata), .busy(l2_busy), .packs_done(stat_packs)
  );

  always_comb begin
    for (int b = 0; b < PSUM_BANKS; b++) begin
      l2b_raddr[b] = l2_raddr[b];
      l2b_waddr[b] = l2_waddr[b];
      l2b_wdata[b] = l2_wdata[b];
    end
    l2b_we = l2_we;
    if (nrn_valid) begin
      l2b_raddr[nrn_row[1:0]] = nrn_row;
      l2b_waddr[nrn_row[1:0]] = nrn_row;
      l2b_wdata[nrn_row[1:0]] = '0;
      l2b_we                  = '0;
      l2b_we[nrn_row[1:0]]    = 1'b1;
    end
  end

  phi_psum_buffer #(.BANKS(PSUM_BANKS), .ROWS(ROWS)) u_l2ps (
    .clk, .rst_n, .we(l2b_we), .w_addr(l2b_waddr), .w_data(l2b_wdata),
    .r_addr(l2b_raddr), .r_data(l2_rdata)
  );

  // rows accumulated by the L2 processor (statistic)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              stat_l2_rows <= '0;
    else if (start && !busy) stat_l2_rows <= '0;
    else if (!nrn_valid)     stat_l2_rows <= stat_l2_rows + 32'($countones(l2_we));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              stat_evicts <= '0;
    else if (start && !busy) stat_evicts <= '0;
    else if (pk_evict)       stat_evicts <= stat_evicts + 1;
  end

  assign pre_idle = !m_busy && !m_out_valid && !c_out_valid && pk_empty && !pk_valid &&
                    !pb_out_valid && !l2_busy;

  // ---------------- spiking neuron array ----------------
  phi_lif_array #(.ROWS(ROWS)) u_lif (
    .clk, .rst_n, .clear(clear_membrane), .leak_shift(cfg_leak), .vth(cfg_vth),
    .in_valid(nrn_valid), .in_row(nrn_row), .l1(l1b_rdata[0]), .l2(l2_rdata[nrn_row[1:0]]),
    .out_valid(spk_valid), .out_row(spk_row), .out_spk(spk_bits)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= ctrl_done;
  end

  // The neuron phase owns the partial-sum buffers exclusively.
  assert property (@(posedge clk) disable iff (!rst_n) nrn_valid |-> !l2_busy && !l1_busy);
endmodule
