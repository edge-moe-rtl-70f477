// dram_model: behavioural model of the off-chip DRAM for the testbenches.
// NP independent word ports with the mem_req_t / mem_rsp_t protocol: a
// request is taken in the cycle it is valid, a read returns one cycle later,
// a write lands at the clock edge. Ports are served in index order, so a
// later port's write wins on a clash. Testbenches fill and inspect `mem`
// directly. Not synthesizable intent; it stands in for the DRAM chip.
module dram_model
  import edge_moe_pkg::*;
#(
  parameter int unsigned NP    = 1,
  parameter int unsigned DEPTH = 1 << 16
)(
  input  logic     clk,
  input  mem_req_t req [NP],
  output mem_rsp_t rsp [NP]
);
  logic [31:0] mem [DEPTH];
  int unsigned reads = 0, writes = 0;

  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      rsp[p].rvalid <= req[p].valid && !req[p].we;
      rsp[p].rdata  <= (req[p].valid && !req[p].we) ? mem[req[p].addr % DEPTH] : '0;
      if (req[p].valid && req[p].we) mem[req[p].addr % DEPTH] <= req[p].wdata;
      if (req[p].valid) begin
        if (req[p].we) writes <= writes + 1;
        else           reads  <= reads + 1;
      end
    end
  end
endmodule
