// edge_moe_top: the Edge-MoE accelerator for multi-task ViT inference.
//
// One instance of every compute unit, a layer sequencer and sixteen DRAM
// word ports. The units are time-shared across the whole network: a single
// unified linear unit (with a ping-pong weight buffer) runs every linear
// layer, including the QKV, projection, MLP and expert layers; the attention
// units run Q x K with online softmax and M' x V with on-the-fly
// normalisation; the gating unit and expert queues turn the MoE layers into
// expert-by-expert sparse runs of the linear unit.
//
// DRAM ports (each a word port with single-cycle read latency, served by the
// memory system outside this module, the paper's AXI masters):
//   0 patch-embed weight loader  1 patch-embed data   2 LN parameter loader
//   3 LN data                    4 gating loader      5 gating data
//   6 residual adder             7 QxK: Q             8 QxK: K
//   9 QxK: scores and stats     10 M'V: scores/stats 11 M'V: V
//  12 M'V: output               13 linear loader     14 linear reader
//  15 linear writer
// The DRAM layout (image, weights of every layer, activation buffers) is
// fixed by the parameters; see edge_moe_ctrl and the lay_* functions in
// edge_moe_pkg.
//
// Interface: hold task_id and pulse start; done pulses once the last layer
// has been written, the encoder output then is the NTOK x D matrix at
// out_base. stats counts events (layers, experts run and skipped, weight
// load stalls and overlap, task switches).
//
// Parameters default to the M3ViT configuration the paper evaluates (ViT-S
// sized backbone, 16 experts, 128x256 input). The number of DRAM ports, the
// top-k value and the expert hidden size are our choices.
module edge_moe_top
  import edge_moe_pkg::*;
#(
  parameter int unsigned D      = D_MODEL,
  parameter int unsigned HEADS  = N_HEADS,
  parameter int unsigned MLP    = MLP_DIM,
  parameter int unsigned HM     = MOE_HIDDEN,
  parameter int unsigned LAYERS = N_LAYERS,
  parameter int unsigned N_EXP  = N_EXPERTS,
  parameter int unsigned TOPK   = TOP_K,
  parameter int unsigned IMG_H  = edge_moe_pkg::IMG_H,
  parameter int unsigned IMG_W  = edge_moe_pkg::IMG_W,
  parameter int unsigned PATCH  = edge_moe_pkg::PATCH,
  parameter int unsigned CH     = CHANNELS,
  parameter int unsigned P      = P_ATTN,
  parameter int unsigned LANES  = LIN_LANES,
  localparam int unsigned NTOK  = (IMG_H / PATCH) * (IMG_W / PATCH),
  localparam int unsigned NPORT = 16,
  localparam int unsigned TKW   = (N_TASKS > 1) ? $clog2(N_TASKS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [TKW-1:0] task_id,
  output logic           busy,
  output logic           done,
  output addr_t          out_base,
  output mem_req_t       mem_req [NPORT],
  input  mem_rsp_t       mem_rsp [NPORT],
  output stats_t         stats
);

  localparam int unsigned DH   = D / HEADS;
  localparam int unsigned HMAX = (MLP > HM) ? MLP : HM;
  localparam int unsigned IMAX = (HMAX > D) ? HMAX : D;
  localparam int unsigned OMAX = (HMAX > 3 * D) ? HMAX : 3 * D;
  localparam int unsigned EW   = $clog2(N_EXP);
  localparam int unsigned TW   = $clog2(NTOK);

  logic pe_start, pe_busy, pe_done;
  addr_t pe_img, pe_w, pe_b, pe_pos, pe_out;
  logic ln_start, ln_busy, ln_done;
  addr_t ln_in, ln_out, ln_gb;
  logic lin_start, lin_busy, lin_done, ld_start, ld_busy, ld_done;
  lin_cfg_t lin_cfg;
  ld_cfg_t  ld_cfg;
  logic qk_start, mv_start, qk_busy, mv_busy, qk_done, mv_done;
  logic [31:0] qk_iter, mv_iter;
  attn_cfg_t att_cfg;
  logic add_start, add_done;
  addr_t add_a, add_b, add_o;
  logic gate_start, gate_busy, gate_done;
  addr_t gate_in, gate_w;
  logic q_clear, q_push;
  logic [EW-1:0] q_expert, meta_idx, meta_expert, cur_expert;
  logic [TW-1:0] q_token, lin_q_idx, rd_token;
  act_t q_score, rd_score;
  logic [EW:0] meta_len;
  logic [TW:0] rd_len;

  edge_moe_ctrl #(
    .D(D), .HEADS(HEADS), .MLP(MLP), .HM(HM), .LAYERS(LAYERS), .N_EXP(N_EXP),
    .IMG_H(IMG_H), .IMG_W(IMG_W), .PATCH(PATCH), .CH(CH)
  ) u_ctrl (
    .clk, .rst_n, .start, .task_id, .busy, .done, .out_base,
    .pe_start, .pe_img, .pe_w, .pe_b, .pe_pos, .pe_out, .pe_done,
    .ln_start, .ln_in, .ln_out, .ln_gb, .ln_done,
    .lin_start, .lin_cfg, .lin_busy, .lin_done, .ld_start, .ld_cfg, .ld_done,
    .qk_start, .mv_start, .att_cfg, .qk_done, .mv_done,
    .add_start, .add_a, .add_b, .add_o, .add_done,
    .gate_start, .gate_in, .gate_w, .gate_done,
    .meta_len, .meta_idx, .meta_expert, .cur_expert, .cur_len(16'(rd_len)),
    .stats
  );

  patch_embed_unit #(
    .IMG_H(IMG_H), .IMG_W(IMG_W), .PATCH(PATCH), .CH(CH), .D(D), .LANES(LANES)
  ) u_embed (
    .clk, .rst_n, .start(pe_start), .img_base(pe_img), .w_base(pe_w), .b_base(pe_b),
    .pos_base(pe_pos), .out_base(pe_out), .busy(pe_busy), .done(pe_done),
    .mem_req(mem_req[1]), .mem_rsp(mem_rsp[1]), .ld_mem_req(mem_req[0]), .ld_mem_rsp(mem_rsp[0])
  );

  layernorm_unit #(.MAX_D(D)) u_ln (
    .clk, .rst_n, .start(ln_start), .in_base(ln_in), .out_base(ln_out), .gb_base(ln_gb),
    .n_tok(16'(NTOK)), .d(16'(D)), .busy(ln_busy), .done(ln_done),
    .mem_req(mem_req[3]), .mem_rsp(mem_rsp[3]), .ld_mem_req(mem_req[2]), .ld_mem_rsp(mem_rsp[2])
  );

  moe_gating_unit #(.N_EXP(N_EXP), .TOPK(TOPK), .MAX_D(D), .N_TOK(NTOK)) u_gate (
    .clk, .rst_n, .start(gate_start), .in_base(gate_in), .w_base(gate_w),
    .n_tok(16'(NTOK)), .d(16'(D)), .busy(gate_busy), .done(gate_done),
    .mem_req(mem_req[5]), .mem_rsp(mem_rsp[5]), .ld_mem_req(mem_req[4]), .ld_mem_rsp(mem_rsp[4]),
    .q_clear, .q_push, .q_expert, .q_token, .q_score
  );

  expert_queues #(.N_EXP(N_EXP), .N_TOK(NTOK)) u_queues (
    .clk, .rst_n, .clear(q_clear), .push(q_push), .push_expert(q_expert),
    .push_token(q_token), .push_score(q_score), .meta_len, .meta_idx, .meta_expert,
    .rd_expert(cur_expert), .rd_idx(lin_q_idx), .rd_len, .rd_token, .rd_score
  );

  adder_unit u_add (
    .clk, .rst_n, .start(add_start), .a_base(add_a), .b_base(add_b), .o_base(add_o),
    .len(24'(NTOK * D)), .done(add_done), .mem_req(mem_req[6]), .mem_rsp(mem_rsp[6])
  );

  attn_qk_unit #(.P(P), .MAX_DH(DH)) u_qk (
    .clk, .rst_n, .start(qk_start), .cfg(att_cfg), .busy(qk_busy), .done(qk_done),
    .iterations(qk_iter),
    .q_mem_req(mem_req[7]), .q_mem_rsp(mem_rsp[7]), .k_mem_req(mem_req[8]), .k_mem_rsp(mem_rsp[8]),
    .s_mem_req(mem_req[9]), .s_mem_rsp(mem_rsp[9])
  );

  attn_mv_unit #(.P(P), .MAX_DH(DH)) u_mv (
    .clk, .rst_n, .start(mv_start), .cfg(att_cfg), .busy(mv_busy), .done(mv_done),
    .iterations(mv_iter),
    .s_mem_req(mem_req[10]), .s_mem_rsp(mem_rsp[10]), .v_mem_req(mem_req[11]), .v_mem_rsp(mem_rsp[11]),
    .o_mem_req(mem_req[12]), .o_mem_rsp(mem_rsp[12])
  );

  linear_unit #(.LANES(LANES), .MAX_IN(IMAX), .MAX_OUT(OMAX), .N_TOK(NTOK)) u_lin (
    .clk, .rst_n,
    .ld_start, .ld_cfg, .ld_busy, .ld_done, .ld_mem_req(mem_req[13]), .ld_mem_rsp(mem_rsp[13]),
    .start(lin_start), .cfg(lin_cfg), .busy(lin_busy), .done(lin_done),
    .q_idx(lin_q_idx), .q_token(rd_token), .q_score(rd_score),
    .rd_mem_req(mem_req[14]), .rd_mem_rsp(mem_rsp[14]),
    .wr_mem_req(mem_req[15]), .wr_mem_rsp(mem_rsp[15])
  );

endmodule
