// End-to-end testbench for phi_top at its default parameters (128 patterns, 256-row tile,
// 32 lanes, 7 partition groups). One layer tile of ROWS x (PARTS*16) spikes times
// (PARTS*16) x 32 weights is run for three time steps.
// The reference is the plain spike x weight product: Phi sparsity is lossless, so the
// currents the accelerator integrates must equal it exactly. Step 0 uses a threshold no
// membrane reaches, and the membranes are compared with the product; step 1 uses a real
// threshold with leak and the output spikes are compared with a LIF model.
// Patterns are random 16-bit vectors with 2-8 ones; PWPs (pattern x weight tile) are
// computed here and placed in a DRAM model. Spike rows are drawn as all-zero rows, exact
// patterns, patterns with 1-2 flipped bits, one-hot rows and dense random rows, so that
// every mechanism occurs; each is counted and a failure is recorded for any that never
// happens. Step 2 runs K as two slices, the first with cfg_fire low so that its partial
// sums carry over to the second.
`timescale 1ns/1ps
module tb_phi_top;
  import phi_pkg::*;
  localparam int ROWS  = 256;
  localparam int PARTS = 20;      // K = 320: two partition groups, the second partly used
  localparam int VTH1  = 150;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, cfg_fire; logic [8:0] cfg_rows; logic [7:0] cfg_parts; logic [3:0] cfg_leak; ps_t cfg_vth;
  logic [31:0] cfg_pwp_base; logic clear_membrane;
  logic pat_we; logic [6:0] pat_addr; logic [15:0] pat_data; logic pat_ready;
  logic act_valid, act_ready, act_done; logic [7:0] act_row; logic [6:0] act_part; logic [15:0] act_bits;
  logic w_we; logic [6:0] w_part; logic [3:0] w_row; wvec_t w_data;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid; logic [31:0] dram_req_addr; wvec_t dram_rsp_data;
  logic spk_valid; logic [7:0] spk_row; logic [31:0] spk_bits; logic busy, done;
  logic [31:0] stat_packs, stat_evicts, stat_pwp_loads, stat_l1_split_rows, stat_l1_cycles, stat_l2_rows;

  phi_top dut (.*);
  phi_dram_model u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
                         .req_addr(dram_req_addr), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));

  logic [15:0] pats [PARTS][128];
  int          W    [PARTS][16][32];
  logic [15:0] act  [ROWS][PARTS];
  int          V    [ROWS][32];
  logic [31:0] spk_got [ROWS];
  int          spk_cnt;

  // mechanism counters
  int n_match = 0, n_nopat = 0, n_minus = 0, n_split = 0, n_conflict = 0, n_partflush = 0;
  int n_spikes = 0, n_stall = 0, n_accum = 0, n_overlap = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.m_out_valid && dut.c_in_ready) begin
      if (dut.m_out_pid != 0) n_match++;
      else if (dut.m_out_l2.nnz != 0) n_nopat++;
      if (dut.m_out_l2.neg != 0) n_minus++;
      if (dut.m_out_l2.nnz > 7) n_split++;
    end
    if (dut.c_out_valid && dut.p_in_ready)
      for (int w = 0; w < 2; w++)
        if (dut.u_pack.win[w].banks[dut.c_out.row[1:0]]) n_conflict++;
    if (dut.u_pack.flushing && !dut.flush) n_partflush++;
    if (act_valid && !act_ready && dut.in_pre) n_stall++;
    if (dut.pf_start && dut.in_pre) n_overlap++;
    if (spk_valid) begin spk_got[spk_row] = spk_bits; spk_cnt++; end
  end

  // weights of partitions p0.. written as local partitions 0..np-1
  task automatic load_weights(input int p0, input int np);
    for (int p = 0; p < np; p++) for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      w_we = 1; w_part = 7'(p); w_row = 4'(i);
      for (int l = 0; l < 32; l++) w_data[l] = wt_t'(W[p0 + p][i][l]);
    end
    @(negedge clk); w_we = 0;
  endtask

  // one tile over partitions p0..p0+np-1
  task automatic run_step(input int vth, input int leak, input int p0, input int np, input bit fire);
    cfg_vth = ps_t'(vth); cfg_leak = 4'(leak); cfg_fire = fire;
    cfg_parts = 8'(np); cfg_pwp_base = 32'h0001_0000 + 32'(p0 * 128);
    spk_cnt = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int pp = 0; pp < np; pp++) begin
      int p;
      p = p0 + pp;
      #1; while (!pat_ready) begin @(negedge clk); #1; end
      for (int i = 0; i < 128; i++) begin
        pat_we = 1; pat_addr = 7'(i); pat_data = pats[p][i];
        @(negedge clk);
      end
      pat_we = 0;
      for (int r = 0; r < ROWS; r++) begin
        act_valid = 1; act_row = 8'(r); act_part = 7'(pp); act_bits = act[r][p];
        #1; while (!act_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      act_valid = 0;
    end
    act_done = 1; @(negedge clk); act_done = 0;
    @(posedge clk iff done);
    @(negedge clk);
  endtask

  initial begin
    int t0, t1;
    start = 0; cfg_fire = 1; cfg_rows = 9'(ROWS); cfg_parts = 8'(PARTS); cfg_leak = 0; cfg_vth = 0;
    cfg_pwp_base = 32'h0001_0000; clear_membrane = 0;
    pat_we = 0; pat_addr = 0; pat_data = 0; act_valid = 0; act_row = 0; act_part = 0; act_bits = 0;
    act_done = 0; w_we = 0; w_part = 0; w_row = 0; w_data = '0;
    // data
    for (int p = 0; p < PARTS; p++) begin
      for (int i = 0; i < 16; i++) for (int l = 0; l < 32; l++) W[p][i][l] = $signed($urandom % 15) - 7;
      for (int q = 0; q < 128; q++) begin
        logic [15:0] v;
        do v = 16'($urandom) & 16'($urandom); while ($countones(v) < 2 || $countones(v) > 8);
        pats[p][q] = v;
      end
      for (int q = 0; q < 128; q++) begin
        wvec_t line;
        for (int l = 0; l < 32; l++) begin
          int s;
          s = 0;
          for (int i = 0; i < 16; i++) if (pats[p][q][i]) s += W[p][i][l];
          line[l] = wt_t'(s);
        end
        u_dram.mem[int'(cfg_pwp_base) + p * 128 + q] = line;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights(0, PARTS);

    for (int step = 0; step < 3; step++) begin
      // spike activations of this step
      for (int r = 0; r < ROWS; r++) for (int p = 0; p < PARTS; p++) begin
        int k;
        k = $urandom % 10;
        case (k)
          0, 1: act[r][p] = 0;
          2, 3: act[r][p] = pats[p][$urandom % 128];
          4, 5, 6: act[r][p] = pats[p][$urandom % 128] ^ (16'h1 << ($urandom % 16)) ^
                              ((k == 6) ? (16'h1 << ($urandom % 16)) : 16'h0);
          7: act[r][p] = 16'h1 << ($urandom % 16);
          default: act[r][p] = 16'($urandom) | 16'($urandom);
        endcase
      end
      t0 = int'($time / 10);
      if (step < 2) run_step(step == 0 ? 30000 : VTH1, step == 0 ? 0 : 3, 0, PARTS, 1'b1);
      else begin
        // K in two slices: the first keeps its partial sums and must fire nothing
        run_step(VTH1, 3, 0, PARTS / 2, 1'b0);
        checks++;
        if (spk_cnt != 0) begin failures++; $display("first K slice produced spikes"); end
        else n_accum++;
        load_weights(PARTS / 2, PARTS - PARTS / 2);
        run_step(VTH1, 3, PARTS / 2, PARTS - PARTS / 2, 1'b1);
      end
      t1 = int'($time / 10);
      $display("step %0d: %0d cycles, %0d packs, %0d evictions, %0d PWP loads, %0d L1 two-cycle rows, %0d L1 cycles",
               step, t1 - t0, stat_packs, stat_evicts, stat_pwp_loads, stat_l1_split_rows, stat_l1_cycles);
      // reference
      checks++;
      if (spk_cnt != ROWS) begin failures++; $display("%0d spike rows", spk_cnt); end
      for (int r = 0; r < ROWS; r++) begin
        logic [31:0] es;
        for (int l = 0; l < 32; l++) begin
          int cur, nv;
          cur = 0;
          for (int p = 0; p < PARTS; p++) for (int i = 0; i < 16; i++) if (act[r][p][i]) cur += W[p][i][l];
          nv = V[r][l] - ((step == 0) ? 0 : (V[r][l] >>> 3)) + cur;
          es[l] = nv >= ((step == 0) ? 30000 : VTH1);
          V[r][l] = es[l] ? 0 : nv;
          if (step == 0) begin
            checks++;
            if (dut.u_lif.vmem[r][l] != ps_t'(V[r][l])) begin
              failures++;
              if (failures < 6) $display("row %0d lane %0d: membrane %0d, product %0d", r, l, dut.u_lif.vmem[r][l], V[r][l]);
            end
          end
        end
        checks++;
        if (spk_got[r] != es) begin
          failures++;
          if (failures < 6) $display("step %0d row %0d: spikes %h expected %h", step, r, spk_got[r], es);
        end
        n_spikes += $countones(spk_got[r]);
      end
      checks++;
      if (stat_pwp_loads == 0 || int'(stat_pwp_loads) > PARTS * 128) failures++;
    end

    $display("mechanisms: match=%0d nopattern=%0d minus1=%0d split=%0d conflict=%0d evict=%0d partflush=%0d l1split=%0d stall=%0d spikes=%0d overlap=%0d",
             n_match, n_nopat, n_minus, n_split, n_conflict, stat_evicts, n_partflush, stat_l1_split_rows, n_stall, n_spikes, n_overlap);
    checks++; if (n_match == 0)     begin failures++; $display("no pattern match"); end
    checks++; if (n_nopat == 0)     begin failures++; $display("no unmatched row"); end
    checks++; if (n_minus == 0)     begin failures++; $display("no -1 correction"); end
    checks++; if (n_split == 0)     begin failures++; $display("no compressor split"); end
    checks++; if (n_conflict == 0)  begin failures++; $display("no bank conflict"); end
    checks++; if (stat_evicts == 0) begin failures++; $display("no eviction"); end
    checks++; if (n_partflush == 0) begin failures++; $display("no partition flush"); end
    checks++; if (stat_l1_split_rows == 0) begin failures++; $display("no two-cycle L1 row"); end
    checks++; if (n_overlap == 0)   begin failures++; $display("no L1 group started during preprocessing"); end
    checks++; if (n_accum == 0)     begin failures++; $display("no split-K accumulation"); end
    checks++; if (n_spikes == 0)    begin failures++; $display("no spikes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
