// linear_unit: the unified linear layer of Edge-MoE (the paper's technique 4)
// with its weight loader, ping-pong weight and bias buffers and the GELU
// and wide-bias writer.
//
// Every linear layer of the model runs on this one unit, configured per run
// by lin_cfg_t: input and output dimension, dense tokens or the tokens of an
// expert queue (sparse), GELU on/off, and plain write or score-weighted
// accumulation onto the existing output (the latter lets the experts of an
// MoE block add their outputs straight into the residual stream).
//
// How it works. For each token the reader copies the in_dim inputs from DRAM
// into a local buffer. The compute loop is one manually flattened loop over
// (output block ob, input j): every cycle it reads one BRAM word holding the
// weights of LANES outputs for input j and does LANES multiply-accumulates.
// The two indices are separate registers stepped by hand, so in_dim and
// out_dim can change from run to run without breaking the pipeline (the
// paper's manually flattened loop). When a block of LANES sums is complete it
// is handed to the writer, which adds the bias, applies GELU if asked, and
// writes (or reads, weights by the gate score, adds and writes) one output per
// cycle while the next block computes. If the writer still holds the previous
// block, the whole compute pipeline holds for that cycle.
//
// Biases arrive as 16-bit values in one of two formats (attention: 7 integer
// bits; MLP: 5 integer bits) and are widened on load to 7 integer and 11
// fraction bits (the paper's wide bias type), which covers both exactly.
// The loader fills one weight/bias bank while the compute side reads the
// other, so an expert's weights load while the previous expert computes.
//
// Ports: three DRAM ports (loader, reader, writer); the expert queue is read
// through q_idx -> q_token/q_score (combinational, from expert_queues).
// Timing: done pulses when the last output of the run is written. Per token:
// in_dim + 2 cycles of reading, then ceil(out_dim/LANES)*in_dim compute cycles
// plus writer stalls (none while in_dim >= LANES, or 2*LANES when
// accumulating). in_dim must be at least 2.
// What follows the paper: the unit's function, flattened loop, dense/sparse
// reader and writer, weighted accumulation, GELU flag and wide bias. Our
// choices: the token-sequential schedule (the paper overlaps tokens), the
// blocked layout and the fixed-point scaling.
module linear_unit
  import edge_moe_pkg::*;
#(
  parameter int unsigned LANES   = 16,
  parameter int unsigned MAX_IN  = 768,
  parameter int unsigned MAX_OUT = 768,
  parameter int unsigned N_TOK   = 128,
  localparam int unsigned WDEPTH = (MAX_IN * MAX_OUT + LANES - 1) / LANES,
  localparam int unsigned BDEPTH = (MAX_OUT + LANES - 1) / LANES,
  localparam int unsigned WAW    = $clog2(WDEPTH),
  localparam int unsigned BAW    = (BDEPTH > 1) ? $clog2(BDEPTH) : 1,
  localparam int unsigned LW     = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned TW     = $clog2(N_TOK)
)(
  input  logic          clk,
  input  logic          rst_n,
  // weight / bias loading
  input  logic          ld_start,
  input  ld_cfg_t       ld_cfg,
  output logic          ld_busy,
  output logic          ld_done,
  output mem_req_t      ld_mem_req,
  input  mem_rsp_t      ld_mem_rsp,
  // computation
  input  logic          start,
  input  lin_cfg_t      cfg,
  output logic          busy,
  output logic          done,
  output logic [TW-1:0] q_idx,
  input  logic [TW-1:0] q_token,
  input  act_t          q_score,
  output mem_req_t      rd_mem_req,
  input  mem_rsp_t      rd_mem_rsp,
  output mem_req_t      wr_mem_req,
  input  mem_rsp_t      wr_mem_rsp
);

  // ---------------- weight and bias buffers (ping-pong) ----------------
  logic           lw_en, lb_en;
  logic [WAW-1:0] lw_addr;
  logic [BAW-1:0] lb_addr;
  logic [LW-1:0]  lw_lane, lb_lane;
  wgt_t           l_data;
  logic           ld_bank;
  wgt_t           w_word [LANES];
  wgt_t           b_word [LANES];
  logic [WAW-1:0] w_rd_addr;
  logic [BAW-1:0] b_rd_addr;

  // The load configuration is only valid with ld_start; keep a copy for
  // the loader, which reads the sizes and the bias base during the load.
  ld_cfg_t ld_cfg_q, ld_c;
  assign ld_c = ld_start ? ld_cfg : ld_cfg_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin ld_bank <= 1'b0; ld_cfg_q <= '0; end
    else if (ld_start) begin ld_bank <= ld_cfg.bank; ld_cfg_q <= ld_cfg; end
  end

  weight_loader #(.LANES(LANES), .DEPTH(WDEPTH), .BDEPTH(BDEPTH)) u_loader (
    .clk, .rst_n, .start(ld_start), .w_base(ld_c.w_base), .b_base(ld_c.b_base),
    .in_dim(ld_c.in_dim), .out_dim(ld_c.out_dim), .with_bias(1'b1),
    .busy(ld_busy), .done(ld_done), .mem_req(ld_mem_req), .mem_rsp(ld_mem_rsp),
    .w_wr_en(lw_en), .w_wr_addr(lw_addr), .w_wr_lane(lw_lane),
    .b_wr_en(lb_en), .b_wr_addr(lb_addr), .b_wr_lane(lb_lane), .wr_data(l_data));

  // The bias buffer keeps the raw 16-bit biases; the format is remembered
  // per bank and the bias is widened when its block goes to the writer.
  logic bank_fmt [2];
  lin_cfg_t cfg_q;            // configuration of the running computation
  always_ff @(posedge clk) if (ld_start) bank_fmt[ld_cfg.bank] <= ld_cfg.bias_fmt;

  weight_bram #(.LANES(LANES), .DEPTH(WDEPTH), .BANKS(2)) u_wbuf (
    .clk, .wr_en(lw_en), .wr_bank(ld_bank), .wr_addr(lw_addr), .wr_lane(lw_lane), .wr_data(l_data),
    .rd_bank(cfg_q.bank), .rd_addr(w_rd_addr), .rd_data(w_word));

  weight_bram #(.LANES(LANES), .DEPTH(BDEPTH), .BANKS(2)) u_bbuf (
    .clk, .wr_en(lb_en), .wr_bank(ld_bank), .wr_addr(lb_addr), .wr_lane(lb_lane), .wr_data(l_data),
    .rd_bank(cfg_q.bank), .rd_addr(b_rd_addr), .rd_data(b_word));

  // ---------------- token loop and reader ----------------
  typedef enum logic [2:0] {S_IDLE, S_TOK, S_RD, S_RDW, S_CMP, S_DRAIN, S_FIN} state_e;
  state_e        st;
  logic [15:0]   ti;          // token counter
  logic [TW-1:0] tok;         // current token index
  act_t          score;       // current gate score
  logic [15:0]   rd_i, rd_i_d;
  act_t          xbuf [MAX_IN];

  // flattened loop indices (issue stage)
  logic [15:0]   j, ob, nb;
  logic          iss_valid;
  // MAC stage
  logic          m_valid, m_first, m_last;
  logic [15:0]   m_j, m_ob;
  act_t          x_q;
  logic signed [63:0] acc [LANES];
  logic signed [63:0] acc_new [LANES];
  logic          hold;

  // writer
  logic          wbusy;
  logic signed [63:0] wbuf [LANES];
  wbias_t        wbias [LANES];
  logic [15:0]   w_ob;
  logic [TW-1:0] w_tok;
  act_t          w_score;
  logic [LW:0]   wl;
  logic          w_phase;     // 0: issue (read or write), 1: write after read
  act_t          w_v, w_g, w_out;
  logic [15:0]   w_o;
  logic          w_skip;

  assign busy  = (st != S_IDLE);
  assign q_idx = TW'(ti);
  assign nb    = (cfg_q.out_dim + 16'(LANES) - 1) / 16'(LANES);
  assign hold  = m_valid && m_last && wbusy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; ti <= '0; tok <= '0; score <= '0; rd_i <= '0; rd_i_d <= '0;
      j <= '0; ob <= '0; iss_valid <= 1'b0; cfg_q <= '0;
    end else begin
      done <= 1'b0;
      if (rd_mem_rsp.rvalid) xbuf[rd_i_d] <= act_t'(rd_mem_rsp.rdata);
      rd_i_d <= rd_i;
      case (st)
        S_IDLE: if (start) begin cfg_q <= cfg; ti <= '0; st <= S_TOK; end
        S_TOK: begin
          if (ti == cfg_q.n_tok) st <= S_FIN;
          else begin
            tok   <= cfg_q.sparse ? q_token : TW'(ti);
            score <= cfg_q.sparse ? q_score : ONE;
            rd_i  <= '0;
            st    <= S_RD;
          end
        end
        S_RD: begin
          if (rd_i == cfg_q.in_dim - 1) st <= S_RDW;
          else rd_i <= rd_i + 1'b1;
        end
        S_RDW: begin st <= S_CMP; j <= '0; ob <= '0; iss_valid <= 1'b1; end
        S_CMP: if (!hold) begin
          if (j == cfg_q.in_dim - 1) begin
            j <= '0;
            if (ob == nb - 1) begin iss_valid <= 1'b0; st <= S_DRAIN; end
            else ob <= ob + 1'b1;
          end else j <= j + 1'b1;
        end
        S_DRAIN: if (!m_valid) begin ti <= ti + 1'b1; st <= S_TOK; end
        S_FIN: if (!wbusy && !m_valid) begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    rd_mem_req       = '0;
    rd_mem_req.valid = (st == S_RD);
    rd_mem_req.addr  = cfg_q.in_base + addr_t'(32'(tok) * 32'(cfg_q.in_dim) + 32'(rd_i));
  end

  // ---------------- compute pipeline ----------------
  assign w_rd_addr = WAW'(hold ? (32'(m_ob) * 32'(cfg_q.in_dim) + 32'(m_j))
                               : (32'(ob)   * 32'(cfg_q.in_dim) + 32'(j)));
  assign b_rd_addr = BAW'(m_ob);

  always_comb begin
    for (int l = 0; l < LANES; l++)
      acc_new[l] = (m_first ? 64'sd0 : acc[l]) + 64'(x_q) * 64'(w_word[l]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_first <= 1'b0; m_last <= 1'b0; m_j <= '0; m_ob <= '0; x_q <= '0;
      for (int l = 0; l < LANES; l++) acc[l] <= '0;
    end else if (!hold) begin
      m_valid <= (st == S_CMP) && iss_valid;
      m_first <= (j == 0);
      m_last  <= (j == cfg_q.in_dim - 1);
      m_j     <= j;
      m_ob    <= ob;
      x_q     <= xbuf[j];
      if (m_valid) for (int l = 0; l < LANES; l++) acc[l] <= acc_new[l];
    end
  end

  // ---------------- writer ----------------
  gelu_approx u_gelu (.x(w_v), .y(w_g));

  always_comb begin
    w_o    = 16'(32'(w_ob) * LANES + 32'(wl));
    w_skip = (w_o >= cfg_q.out_dim);
    w_v    = sat32((wbuf[wl[LW-1:0]] >>> WFRAC)
                   + (64'(wbias[wl[LW-1:0]]) <<< (FRAC - WBIAS_FRAC)));
    w_out  = cfg_q.gelu ? w_g : w_v;
    wr_mem_req       = '0;
    wr_mem_req.addr  = cfg_q.out_base + addr_t'(32'(w_tok) * 32'(cfg_q.out_dim) + 32'(w_o));
    if (wbusy && !w_skip) begin
      if (!cfg_q.accum) begin
        wr_mem_req.valid = 1'b1; wr_mem_req.we = 1'b1; wr_mem_req.wdata = w_out;
      end else if (!w_phase) begin
        wr_mem_req.valid = 1'b1;                 // read the existing output
      end else begin
        wr_mem_req.valid = 1'b1; wr_mem_req.we = 1'b1;
        wr_mem_req.wdata = sat32(64'(act_t'(wr_mem_rsp.rdata))
                                 + ((64'(w_score) * 64'(w_out)) >>> FRAC));
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wbusy <= 1'b0; wl <= '0; w_phase <= 1'b0; w_ob <= '0; w_tok <= '0; w_score <= '0;
    end else begin
      if (wbusy) begin
        if (cfg_q.accum && !w_skip && !w_phase) w_phase <= 1'b1;
        else begin
          w_phase <= 1'b0;
          if (wl == (LW+1)'(LANES - 1)) wbusy <= 1'b0;
          else wl <= wl + 1'b1;
        end
      end else if (m_valid && m_last) begin
        // hand a finished block of sums to the writer
        wbusy   <= 1'b1;
        wl      <= '0;
        w_phase <= 1'b0;
        w_ob    <= m_ob;
        w_tok   <= tok;
        w_score <= score;
        for (int l = 0; l < LANES; l++) begin
          wbuf[l]  <= acc_new[l];
          wbias[l] <= widen_bias(b_word[l], bias_fmt_e'(bank_fmt[cfg_q.bank]));
        end
      end
    end
  end

  a_in_dim: assert property (@(posedge clk) disable iff (!rst_n) start |-> cfg.in_dim >= 2);

endmodule
