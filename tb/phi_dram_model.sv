// phi_dram_model: behavioural model of the off-chip DRAM as seen by the PWP prefetcher.
// Accepts one line read per cycle when not stalling (random stalls), returns the line
// LAT cycles later, in order. Line contents come from an associative array that the
// testbench fills; lines never written read as a function of the address.
// Not synthesizable; testbench use only.
module phi_dram_model
  import phi_pkg::*;
#(
  parameter int LAT = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [31:0] req_addr,
  output logic        rsp_valid,
  output wvec_t       rsp_data
);
  wvec_t mem [int];
  int    reads = 0;
  typedef struct { int t; logic [31:0] a; } req_t;
  req_t  q [$];
  int    cyc = 0;

  function automatic wvec_t line(input logic [31:0] a);
    wvec_t v;
    if (mem.exists(int'(a))) return mem[int'(a)];
    for (int l = 0; l < N_LANES; l++) v[l] = wt_t'(a * 7 + l * 13);
    return v;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      q.delete();
    end else begin
      if (req_valid && req_ready) begin
        q.push_back('{t: cyc + LAT, a: req_addr});
        reads <= reads + 1;
      end
      req_ready <= ($urandom % 4) != 0;
      if (q.size() > 0 && q[0].t <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_data  <= line(q[0].a);
        void'(q.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end
endmodule
