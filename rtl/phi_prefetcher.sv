// phi_prefetcher: PWP prefetcher of the L1 processor.
// Only a fraction of the 128 precomputed pattern-weight products (PWPs) of a partition
// is used by a tile, so the prefetcher first scans the pattern-index matrix of the
// current group of 16 partitions (one row of 16 IDs per cycle) and marks every
// (partition, pattern) pair that occurs, then requests exactly the marked PWPs from DRAM
// and writes them into the PWP buffer bank of their partition, at address ID-1.
// DRAM interface: valid/ready request with a line address
// (base + partition*128 + ID-1, one 32 x 8-bit PWP row per line); responses return in
// request order with rsp_valid. Up to MAX_OUT requests are outstanding.
// Timing: 'start' pulse; num_rows cycles of scan, then one request per cycle while the
// DRAM accepts; 'done' pulses when the last response is written. 'loads' counts the
// PWPs fetched by the last run. Scanning before loading is this design's choice; the
// paper says the prefetcher reads the pattern index and loads only the needed PWPs.
module phi_prefetcher
  import phi_pkg::*;
#(
  parameter int NUM_P   = NUM_PAT,
  parameter int GROUPS  = 7,
  parameter int MAX_OUT = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [$clog2(GROUPS)-1:0]    group,
  input  logic [ROW_W:0]               num_rows,
  input  logic [PART_W:0]              num_parts,
  input  logic [31:0]                  base_addr,
  // pattern index buffer read
  output logic [ROW_W-1:0]             pid_row,
  input  logic [K_TILE-1:0][PID_W-1:0] pid_word,
  // DRAM
  output logic                         dram_req_valid,
  input  logic                         dram_req_ready,
  output logic [31:0]                  dram_req_addr,
  input  logic                         dram_rsp_valid,
  input  wvec_t                        dram_rsp_data,
  // PWP buffer write
  output logic                         pwp_we,
  output logic [3:0]                   pwp_bank,
  output logic [$clog2(NUM_P)-1:0]     pwp_addr,
  output wvec_t                        pwp_data,
  output logic                         busy,
  output logic                         done,
  output logic [31:0]                  loads
);
  localparam int PW = $clog2(NUM_P);
  localparam int TW = $clog2(MAX_OUT);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_FETCH, S_WAIT} state_t;
  typedef struct packed { logic [3:0] bank; logic [PW-1:0] id; } tag_t;

  state_t             state;
  logic [ROW_W:0]     row;
  logic [3:0]         bank;
  logic [NUM_P-1:0]   need [K_TILE];
  tag_t               tags [MAX_OUT];
  logic [TW-1:0]      t_wp, t_rp;
  logic [TW:0]        t_cnt;
  logic               found;
  logic [PW-1:0]      ff;
  logic [PART_W:0]    part_base;

  assign part_base = (PART_W+1)'(int'(group) * K_TILE);
  assign pid_row   = row[ROW_W-1:0];
  assign busy      = state != S_IDLE;

  // first needed pattern of the current bank
  always_comb begin
    found = 1'b0;
    ff    = '0;
    for (int i = NUM_P - 1; i >= 0; i--)
      if (need[bank][i]) begin
        found = 1'b1;
        ff    = PW'(i);
      end
  end

  assign dram_req_valid = (state == S_FETCH) && found && (t_cnt != (TW+1)'(MAX_OUT));
  assign dram_req_addr  = base_addr + 32'((int'(part_base) + int'(bank)) * NUM_P + int'(ff));

  assign pwp_we   = dram_rsp_valid;
  assign pwp_bank = tags[t_rp].bank;
  assign pwp_addr = tags[t_rp].id;
  assign pwp_data = dram_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      row   <= '0;
      bank  <= '0;
      t_wp  <= '0;
      t_rp  <= '0;
      t_cnt <= '0;
      done  <= 1'b0;
      loads <= '0;
      for (int b = 0; b < K_TILE; b++) need[b] <= '0;
      for (int t = 0; t < MAX_OUT; t++) tags[t] <= '0;
    end else begin
      done <= 1'b0;
      if (dram_rsp_valid) t_rp <= t_rp + 1'b1;
      t_cnt <= t_cnt + ((dram_req_valid && dram_req_ready) ? (TW+1)'(1) : '0)
                     - (dram_rsp_valid ? (TW+1)'(1) : '0);
      case (state)
        S_IDLE: if (start) begin
          state <= S_SCAN;
          row   <= '0;
          bank  <= '0;
          loads <= '0;
          for (int b = 0; b < K_TILE; b++) need[b] <= '0;
        end
        S_SCAN: begin
          for (int b = 0; b < K_TILE; b++)
            if (pid_word[b] != '0 && (int'(part_base) + b) < int'(num_parts))
              need[b][PW'(pid_word[b] - 1'b1)] <= 1'b1;
          row <= row + 1'b1;
          if (row + 1'b1 == num_rows) state <= S_FETCH;
        end
        S_FETCH: begin
          if (dram_req_valid && dram_req_ready) begin
            need[bank][ff] <= 1'b0;
            tags[t_wp]     <= '{bank: bank, id: ff};
            t_wp           <= t_wp + 1'b1;
            loads          <= loads + 1;
          end else if (!found) begin
            if (bank == 4'(K_TILE - 1)) state <= S_WAIT;
            else bank <= bank + 1'b1;
          end
        end
        S_WAIT: if (t_cnt == '0) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
