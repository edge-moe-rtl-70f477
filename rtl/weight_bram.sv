// weight_bram: on-chip weight or bias buffer of the Edge-MoE units.
//
// BANKS banks of DEPTH words, each word LANES weights of WB bits. Writes
// go to a single lane of a word (the loader fills the blocked layout one
// weight at a time); reads return a whole word, so the unified linear layer
// gets the weights of LANES outputs per cycle. With BANKS = 2 this is the
// ping-pong expert weight buffer of the paper: the loader writes one bank
// while the compute side reads the other.
//
// Timing: synchronous read, data valid one cycle after rd_addr.
module weight_bram
  import edge_moe_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned DEPTH = 9216,
  parameter int unsigned BANKS = 2,
  localparam int unsigned AWI  = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned BW   = (BANKS > 1) ? $clog2(BANKS) : 1
)(
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [BW-1:0]        wr_bank,
  input  logic [AWI-1:0]       wr_addr,
  input  logic [LW-1:0]        wr_lane,
  input  wgt_t                 wr_data,
  input  logic [BW-1:0]        rd_bank,
  input  logic [AWI-1:0]       rd_addr,
  output wgt_t                 rd_data [LANES]
);

  wgt_t mem [BANKS][DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_addr][wr_lane] <= wr_data;
    rd_data <= mem[rd_bank][rd_addr];
  end

endmodule
