// moe_gating_unit: task-specific MoE gating network with top-k selection,
// which fills the per-expert queues (the paper's patch reordering and
// grouping).
//
// On start it empties the expert queues and loads the gating weights of the
// current task (an N_EXP x D matrix at w_base) into its buffer, one expert
// per lane. Switching task is only a different w_base, so it costs nothing
// beyond the load every MoE block does anyway. Then, for every token:
//   read     the D inputs into a local buffer;
//   score    D cycles, N_EXP multiply-accumulates per cycle: one logit per expert;
//   top-k    TOPK cycles, each picking the largest remaining logit
//            (ties to the lower expert index);
//   softmax  over the k chosen logits: TOPK cycles of exp(l - l_max) summed,
//            then TOPK cycles dividing and pushing (expert, token, score)
//            into the expert queues.
// The paper gives the gating function and the queueing; the datapath,
// the softmax over the k selected logits and the absence of a gating bias
// are our choices.
//
// Timing: per token about D + D + 3*TOPK + 4 cycles.
module moe_gating_unit
  import edge_moe_pkg::*;
#(
  parameter int unsigned N_EXP = 16,
  parameter int unsigned TOPK  = 4,
  parameter int unsigned MAX_D = 192,
  parameter int unsigned N_TOK = 128,
  localparam int unsigned EW   = $clog2(N_EXP),
  localparam int unsigned TW   = $clog2(N_TOK),
  localparam int unsigned AWD  = $clog2(MAX_D)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  addr_t         in_base,
  input  addr_t         w_base,
  input  logic [15:0]   n_tok,
  input  logic [15:0]   d,
  output logic          busy,
  output logic          done,
  output mem_req_t      mem_req,
  input  mem_rsp_t      mem_rsp,
  output mem_req_t      ld_mem_req,
  input  mem_rsp_t      ld_mem_rsp,
  output logic          q_clear,
  output logic          q_push,
  output logic [EW-1:0] q_expert,
  output logic [TW-1:0] q_token,
  output act_t          q_score
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_TOK, S_RD, S_SCORE, S_TOPK, S_EXP, S_PUSH} state_e;
  state_e st;

  logic            ld_start, ld_busy, ld_done, lw_en, lb_en;
  logic [AWD-1:0]  lw_addr;
  logic            lb_addr;
  logic [EW-1:0]   lw_lane, lb_lane;
  wgt_t            l_data;
  wgt_t            w_word [N_EXP];

  logic [15:0]     ti, i, i_d, nt, dd;
  addr_t           ib;
  act_t            xbuf [MAX_D];
  logic            m_valid, m_first;
  act_t            x_q;
  logic signed [63:0] acc [N_EXP];
  act_t            logit [N_EXP];
  logic [N_EXP-1:0] taken;
  logic [EW-1:0]   sel  [TOPK];
  act_t            sel_e [TOPK];
  logic [$clog2(TOPK+1)-1:0] k;
  logic signed [63:0] esum;
  act_t            e_val, e_arg;

  assign busy     = (st != S_IDLE);
  assign ld_start = (st == S_IDLE) && start;
  assign q_clear  = ld_start;

  weight_loader #(.LANES(N_EXP), .DEPTH(MAX_D), .BDEPTH(2)) u_ld (
    .clk, .rst_n, .start(ld_start), .w_base, .b_base(w_base), .in_dim(d), .out_dim(16'(N_EXP)),
    .with_bias(1'b0), .busy(ld_busy), .done(ld_done), .mem_req(ld_mem_req), .mem_rsp(ld_mem_rsp),
    .w_wr_en(lw_en), .w_wr_addr(lw_addr), .w_wr_lane(lw_lane),
    .b_wr_en(lb_en), .b_wr_addr(lb_addr), .b_wr_lane(lb_lane), .wr_data(l_data));

  weight_bram #(.LANES(N_EXP), .DEPTH(MAX_D), .BANKS(1)) u_w (
    .clk, .wr_en(lw_en), .wr_bank(1'b0), .wr_addr(lw_addr), .wr_lane(lw_lane), .wr_data(l_data),
    .rd_bank(1'b0), .rd_addr(AWD'(i)), .rd_data(w_word));

  // largest logit not yet taken
  logic [EW-1:0] best;
  always_comb begin
    best = '0;
    for (int e = N_EXP - 1; e >= 0; e--)
      if (!taken[e] && (taken[best] || logit[e] >= logit[best])) best = EW'(e);
  end

  always_comb begin
    logic signed [32:0] df;
    df    = 33'(logit[sel[k[$clog2(TOPK+1)-1:0] % TOPK]]) - 33'(logit[sel[0]]);
    e_arg = (df < -33'sd2147483648) ? ACT_MIN : act_t'(df);
  end
  exp_unit u_exp (.x(e_arg), .y(e_val));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; ti <= '0; i <= '0; i_d <= '0; nt <= '0; dd <= '0; ib <= '0;
      m_valid <= 1'b0; m_first <= 1'b0; x_q <= '0; taken <= '0; k <= '0; esum <= '0;
      for (int e = 0; e < N_EXP; e++) acc[e] <= '0;
    end else begin
      done <= 1'b0;
      i_d  <= i;
      if (mem_rsp.rvalid) xbuf[AWD'(i_d)] <= act_t'(mem_rsp.rdata);
      m_valid <= (st == S_SCORE) && (i != dd);
      m_first <= (i == 0);
      x_q     <= xbuf[AWD'(i)];
      if (m_valid)
        for (int e = 0; e < N_EXP; e++)
          acc[e] <= (m_first ? 64'sd0 : acc[e]) + 64'(x_q) * 64'(w_word[e]);
      case (st)
        S_IDLE: if (start) begin ib <= in_base; nt <= n_tok; dd <= d; ti <= '0; st <= S_LOAD; end
        S_LOAD: if (ld_done) st <= S_TOK;
        S_TOK: begin
          if (ti == nt) begin done <= 1'b1; st <= S_IDLE; end
          else begin i <= '0; st <= S_RD; end
        end
        S_RD: if (i == dd) begin i <= '0; st <= S_SCORE; end else i <= i + 1'b1;
        S_SCORE: begin
          if (i == dd - 1) begin i <= dd; end
          else if (i == dd) begin
            if (!m_valid) begin            // last MAC done
              for (int e = 0; e < N_EXP; e++) logit[e] <= sat32(acc[e] >>> WFRAC);
              taken <= '0; k <= '0; st <= S_TOPK;
            end
          end else i <= i + 1'b1;
        end
        S_TOPK: begin
          sel[k % TOPK] <= best;
          taken[best]   <= 1'b1;
          if (k == ($clog2(TOPK+1))'(TOPK - 1)) begin k <= '0; esum <= '0; st <= S_EXP; end
          else k <= k + 1'b1;
        end
        S_EXP: begin
          sel_e[k % TOPK] <= e_val;
          esum <= esum + 64'(e_val);
          if (k == ($clog2(TOPK+1))'(TOPK - 1)) begin k <= '0; st <= S_PUSH; end
          else k <= k + 1'b1;
        end
        S_PUSH: begin
          if (k == ($clog2(TOPK+1))'(TOPK - 1)) begin k <= '0; ti <= ti + 1'b1; st <= S_TOK; end
          else k <= k + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    mem_req = '0;
    if (st == S_RD && i != dd) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = ib + addr_t'(32'(ti) * 32'(dd) + 32'(i));
    end
    q_push   = (st == S_PUSH);
    q_expert = sel[k % TOPK];
    q_token  = TW'(ti);
    q_score  = act_t'((64'(sel_e[k % TOPK]) <<< FRAC) / ((esum == 0) ? 64'sd1 : esum));
  end

endmodule
