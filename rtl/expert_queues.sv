// expert_queues: patch reordering and grouping for the MoE block.
//
// While the gating unit scores the tokens, every (token, expert, score)
// selection is appended to that expert's queue. The first token an expert
// receives also appends the expert to the metaqueue, the list of experts
// with a non-empty queue; experts never selected are absent from it, so their
// weights are never loaded. The controller then walks the metaqueue and the
// unified linear layer walks each expert's queue (expert-by-expert order,
// Fig. 9d of the paper). A queue holds up to N_TOK entries, one per token, so
// it cannot overflow when each token selects an expert at most once.
// The metaqueue is ordered by first use, which is this design's choice.
//
// Timing: push and clear take effect at the clock edge; the read ports are
// combinational from the stored arrays.
module expert_queues
  import edge_moe_pkg::*;
#(
  parameter int unsigned N_EXP = 16,
  parameter int unsigned N_TOK = 128,
  localparam int unsigned EW   = $clog2(N_EXP),
  localparam int unsigned TW   = $clog2(N_TOK)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic [EW-1:0] push_expert,
  input  logic [TW-1:0] push_token,
  input  act_t          push_score,
  output logic [EW:0]   meta_len,
  input  logic [EW-1:0] meta_idx,
  output logic [EW-1:0] meta_expert,
  input  logic [EW-1:0] rd_expert,
  input  logic [TW-1:0] rd_idx,
  output logic [TW:0]   rd_len,
  output logic [TW-1:0] rd_token,
  output act_t          rd_score
);

  logic [TW-1:0] q_tok   [N_EXP][N_TOK];
  act_t          q_score [N_EXP][N_TOK];
  logic [TW:0]   cnt     [N_EXP];
  logic [EW-1:0] meta    [N_EXP];

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int e = 0; e < N_EXP; e++) cnt[e] <= '0;
      meta_len <= '0;
    end else if (push) begin
      q_tok[push_expert][cnt[push_expert][TW-1:0]]   <= push_token;
      q_score[push_expert][cnt[push_expert][TW-1:0]] <= push_score;
      cnt[push_expert] <= cnt[push_expert] + 1'b1;
      if (cnt[push_expert] == 0) begin
        meta[meta_len[EW-1:0]] <= push_expert;
        meta_len <= meta_len + 1'b1;
      end
    end
  end

  assign meta_expert = meta[meta_idx];
  assign rd_len      = cnt[rd_expert];
  assign rd_token    = q_tok[rd_expert][rd_idx];
  assign rd_score    = q_score[rd_expert][rd_idx];

  // A queue can hold one entry per token.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> cnt[push_expert] < (TW+1)'(N_TOK));

endmodule
