// patch_embed_unit: the initial patch embedding of the ViT.
//
// The image (IMG_H x IMG_W x CH, channel-last, one value per DRAM word in
// the activation format) is cut into PATCH x PATCH patches in raster order;
// patch n becomes token n. For each patch the unit gathers its
// K = PATCH*PATCH*CH values (flattened as row, column, channel) into a local
// buffer, multiplies them with the D x K embedding matrix held in its
// weight buffer, LANES outputs per cycle, adds the bias and the positional
// embedding of the token (read from DRAM) and writes the token.
// On start the loader fills the weight and bias buffers (blocked layout, as
// for the unified linear layer). The bias uses the attention bias format.
// The paper names this unit and its buffer; the datapath, data layout and
// the use of a positional embedding table are our choices.
//
// Timing: per patch K + 1 gather cycles, ceil(D/LANES)*K compute cycles and
// 2*D write cycles (read the positional embedding, write the token).
module patch_embed_unit
  import edge_moe_pkg::*;
#(
  parameter int unsigned IMG_H = 128,
  parameter int unsigned IMG_W = 256,
  parameter int unsigned PATCH = 16,
  parameter int unsigned CH    = 3,
  parameter int unsigned D     = 192,
  parameter int unsigned LANES = 16,
  localparam int unsigned K      = PATCH * PATCH * CH,
  localparam int unsigned NB     = (D + LANES - 1) / LANES,
  localparam int unsigned WDEPTH = NB * K,
  localparam int unsigned PW     = IMG_W / PATCH,
  localparam int unsigned NTOK   = (IMG_H / PATCH) * PW,
  localparam int unsigned WAW    = $clog2(WDEPTH),
  localparam int unsigned BAW    = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned LW     = (LANES > 1) ? $clog2(LANES) : 1
)(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  addr_t    img_base,
  input  addr_t    w_base,
  input  addr_t    b_base,
  input  addr_t    pos_base,
  input  addr_t    out_base,
  output logic     busy,
  output logic     done,
  output mem_req_t mem_req,
  input  mem_rsp_t mem_rsp,
  output mem_req_t ld_mem_req,
  input  mem_rsp_t ld_mem_rsp
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_TOK, S_GATH, S_CMP, S_WR} state_e;
  state_e st;

  logic           ld_start, ld_busy, ld_done;
  logic           lw_en, lb_en;
  logic [WAW-1:0] lw_addr;
  logic [BAW-1:0] lb_addr;
  logic [LW-1:0]  lw_lane, lb_lane;
  wgt_t           l_data;
  wgt_t           w_word [LANES], b_word [LANES];

  logic [15:0]    tok, gi, gi_d, j, ob;
  logic           iss, m_valid, m_first, m_last;
  logic [15:0]    m_ob;
  act_t           x_q;
  act_t           xbuf [K];
  act_t           ybuf [NB * LANES];
  logic signed [63:0] acc [LANES];
  logic signed [63:0] acc_new [LANES];
  logic [15:0]    wo;
  logic           wph;

  assign busy     = (st != S_IDLE);
  assign ld_start = (st == S_IDLE) && start;

  weight_loader #(.LANES(LANES), .DEPTH(WDEPTH), .BDEPTH(NB)) u_ld (
    .clk, .rst_n, .start(ld_start), .w_base, .b_base, .in_dim(16'(K)), .out_dim(16'(D)),
    .with_bias(1'b1), .busy(ld_busy), .done(ld_done), .mem_req(ld_mem_req), .mem_rsp(ld_mem_rsp),
    .w_wr_en(lw_en), .w_wr_addr(lw_addr), .w_wr_lane(lw_lane),
    .b_wr_en(lb_en), .b_wr_addr(lb_addr), .b_wr_lane(lb_lane), .wr_data(l_data));

  weight_bram #(.LANES(LANES), .DEPTH(WDEPTH), .BANKS(1)) u_w (
    .clk, .wr_en(lw_en), .wr_bank(1'b0), .wr_addr(lw_addr), .wr_lane(lw_lane), .wr_data(l_data),
    .rd_bank(1'b0), .rd_addr(WAW'(32'(ob) * K + 32'(j))), .rd_data(w_word));

  weight_bram #(.LANES(LANES), .DEPTH(NB), .BANKS(1)) u_b (
    .clk, .wr_en(lb_en), .wr_bank(1'b0), .wr_addr(lb_addr), .wr_lane(lb_lane), .wr_data(l_data),
    .rd_bank(1'b0), .rd_addr(BAW'(m_ob)), .rd_data(b_word));

  // gather address of flattened element gi of patch tok
  addr_t g_addr;
  always_comb begin
    int unsigned r, col, chn, py, px;
    chn = 32'(gi) % CH;
    col = (32'(gi) / CH) % PATCH;
    r   = 32'(gi) / (CH * PATCH);
    py  = 32'(tok) / PW;
    px  = 32'(tok) % PW;
    g_addr = img_base + addr_t'(((py * PATCH + r) * IMG_W + px * PATCH + col) * CH + chn);
  end

  always_comb
    for (int l = 0; l < LANES; l++)
      acc_new[l] = (m_first ? 64'sd0 : acc[l]) + 64'(x_q) * 64'(w_word[l]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; tok <= '0; gi <= '0; gi_d <= '0; j <= '0; ob <= '0; iss <= 1'b0;
      m_valid <= 1'b0; m_first <= 1'b0; m_last <= 1'b0; m_ob <= '0; x_q <= '0; wo <= '0; wph <= 1'b0;
      for (int l = 0; l < LANES; l++) acc[l] <= '0;
    end else begin
      done <= 1'b0;
      gi_d <= gi;
      if (mem_rsp.rvalid && st == S_GATH) xbuf[gi_d] <= act_t'(mem_rsp.rdata);
      // MAC stage
      m_valid <= iss; m_first <= (j == 0); m_last <= (j == 16'(K - 1)); m_ob <= ob; x_q <= xbuf[j];
      if (m_valid) begin
        for (int l = 0; l < LANES; l++) acc[l] <= acc_new[l];
        if (m_last)
          for (int l = 0; l < LANES; l++)
            ybuf[32'(m_ob) * LANES + l] <= sat32((acc_new[l] >>> WFRAC)
                + (64'(widen_bias(b_word[l], BIAS_ATTN)) <<< (FRAC - WBIAS_FRAC)));
      end
      case (st)
        S_IDLE: if (start) begin tok <= '0; st <= S_LOAD; end
        S_LOAD: if (ld_done) st <= S_TOK;
        S_TOK: begin
          if (tok == 16'(NTOK)) begin done <= 1'b1; st <= S_IDLE; end
          else begin gi <= '0; st <= S_GATH; end
        end
        S_GATH: if (gi == 16'(K)) begin j <= '0; ob <= '0; iss <= 1'b1; st <= S_CMP; end
                else gi <= gi + 1'b1;
        S_CMP: begin
          if (iss) begin
            if (j == 16'(K - 1)) begin
              j <= '0;
              if (ob == 16'(NB - 1)) iss <= 1'b0; else ob <= ob + 1'b1;
            end else j <= j + 1'b1;
          end else if (!m_valid) begin wo <= '0; wph <= 1'b0; st <= S_WR; end
        end
        S_WR: begin
          wph <= !wph;
          if (wph) begin
            if (wo == 16'(D - 1)) begin tok <= tok + 1'b1; st <= S_TOK; end
            else wo <= wo + 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    mem_req = '0;
    if (st == S_GATH && gi != 16'(K)) begin
      mem_req.valid = 1'b1; mem_req.addr = g_addr;
    end else if (st == S_WR && !wph) begin
      mem_req.valid = 1'b1; mem_req.addr = pos_base + addr_t'(32'(tok) * D + 32'(wo));
    end else if (st == S_WR && wph) begin
      mem_req.valid = 1'b1; mem_req.we = 1'b1;
      mem_req.addr  = out_base + addr_t'(32'(tok) * D + 32'(wo));
      mem_req.wdata = sat32(64'(ybuf[wo]) + 64'(act_t'(mem_rsp.rdata)));
    end
  end

endmodule
