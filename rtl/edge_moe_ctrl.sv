// edge_moe_ctrl: layer sequencer of the accelerator.
//
// It runs the whole multi-task ViT for one image, one computation at a time
// on the shared units, the way the paper's top-level loop does: patch
// embedding, then for each encoder layer LN1, the QKV linear layer, Q x K and
// M' x V for every head, the output projection and its residual add, LN2 and
// finally either a dense MLP (even layers) or a task-gated MoE (odd layers).
//
// MoE layers are computed expert by expert (paper Sec. IV-A): the gating unit
// fills the per-expert token queues and the metaqueue; the sequencer then
// walks the metaqueue only, so an expert no token chose is never loaded. The
// two weight banks of the linear unit work as ping-pong buffers: FC1 always
// computes from bank 0 and FC2 from bank 1, so FC2 of an expert is loaded
// while its FC1 runs and FC1 of the next expert while FC2 runs. The dense
// path uses the same trick (projection weights load during the QKV layer,
// FC1 weights during the projection, FC2 weights during FC1).
//
// Expert outputs are weighted by their gate score and accumulated straight
// into the residual stream X, which gives x + sum_k g_k E_k(LN(x)).
//
// Interface: start (with task_id held) runs the model; done pulses at the
// end, the output tokens are then in the X buffer at out_base. Each unit is
// driven by a one-cycle start with its configuration held until its done.
// All buffers live in DRAM at fixed offsets computed from the parameters;
// the layout is the one of the lay_* functions in edge_moe_pkg.
//
// From the paper: the sequence of layers, expert-by-expert MoE with skipping
// of unused experts, task-level gating, attention bias format for the
// attention linear layers and MLP bias format for the MLP and expert layers.
// Our choices: the DRAM layout, which loads are overlapped with which
// computations, and accumulating expert outputs in place.
module edge_moe_ctrl
  import edge_moe_pkg::*;
#(
  parameter int unsigned D      = 192,
  parameter int unsigned HEADS  = 3,
  parameter int unsigned MLP    = 768,
  parameter int unsigned HM     = 384,
  parameter int unsigned LAYERS = 12,
  parameter int unsigned N_EXP  = 16,
  parameter int unsigned IMG_H  = 128,
  parameter int unsigned IMG_W  = 256,
  parameter int unsigned PATCH  = 16,
  parameter int unsigned CH     = 3,
  localparam int unsigned NTOK  = (IMG_H / PATCH) * (IMG_W / PATCH),
  localparam int unsigned EW    = $clog2(N_EXP),
  localparam int unsigned TKW   = (N_TASKS > 1) ? $clog2(N_TASKS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [TKW-1:0] task_id,
  output logic           busy,
  output logic           done,
  output addr_t          out_base,
  // patch embedding
  output logic           pe_start,
  output addr_t          pe_img, pe_w, pe_b, pe_pos, pe_out,
  input  logic           pe_done,
  // layer norm
  output logic           ln_start,
  output addr_t          ln_in, ln_out, ln_gb,
  input  logic           ln_done,
  // linear unit and its weight loader
  output logic           lin_start,
  output lin_cfg_t       lin_cfg,
  input  logic           lin_busy,
  input  logic           lin_done,
  output logic           ld_start,
  output ld_cfg_t        ld_cfg,
  input  logic           ld_done,
  // attention
  output logic           qk_start,
  output logic           mv_start,
  output attn_cfg_t      att_cfg,
  input  logic           qk_done,
  input  logic           mv_done,
  // residual adder
  output logic           add_start,
  output addr_t          add_a, add_b, add_o,
  input  logic           add_done,
  // gating and expert queues
  output logic           gate_start,
  output addr_t          gate_in, gate_w,
  input  logic           gate_done,
  input  logic [EW:0]    meta_len,
  output logic [EW-1:0]  meta_idx,
  input  logic [EW-1:0]  meta_expert,
  output logic [EW-1:0]  cur_expert,
  input  logic [15:0]    cur_len,     // queue length of cur_expert
  // event counters
  output stats_t         stats
);

  localparam int unsigned DH   = D / HEADS;
  localparam int unsigned K    = PATCH * PATCH * CH;
  localparam int unsigned HMAX = (MLP > HM) ? MLP : HM;

  // Global DRAM layout (word addresses).
  localparam int unsigned IMG_BASE = 0;
  localparam int unsigned PE_W     = IMG_BASE + IMG_H * IMG_W * CH;
  localparam int unsigned PE_B     = PE_W + D * K;
  localparam int unsigned POS      = PE_B + D;
  localparam int unsigned L0       = POS + NTOK * D;
  localparam int unsigned ACT      = L0 + lay_all_layers(LAYERS, D, MLP, HM, N_EXP);
  localparam int unsigned X_BUF    = ACT;
  localparam int unsigned XN_BUF   = X_BUF + NTOK * D;
  localparam int unsigned QKV_BUF  = XN_BUF + NTOK * D;
  localparam int unsigned S_BUF    = QKV_BUF + NTOK * 3 * D;
  localparam int unsigned ST_BUF   = S_BUF + NTOK * NTOK;
  localparam int unsigned ATT_BUF  = ST_BUF + 2 * NTOK;
  localparam int unsigned HID_BUF  = ATT_BUF + NTOK * D;
  localparam int unsigned TMP_BUF  = HID_BUF + NTOK * HMAX;
  localparam int unsigned MEM_WORDS = TMP_BUF + NTOK * D;

  // Layer-relative offsets.
  localparam int unsigned O_LN1   = 0;
  localparam int unsigned O_QKVW  = O_LN1 + 2 * D;
  localparam int unsigned O_QKVB  = O_QKVW + 3 * D * D;
  localparam int unsigned O_PRJW  = O_QKVB + 3 * D;
  localparam int unsigned O_PRJB  = O_PRJW + D * D;
  localparam int unsigned O_LN2   = O_PRJB + D;
  localparam int unsigned O_MLP   = O_LN2 + 2 * D;
  localparam int unsigned O_FC1B  = O_MLP + MLP * D;
  localparam int unsigned O_FC2W  = O_FC1B + MLP;
  localparam int unsigned O_FC2B  = O_FC2W + D * MLP;
  localparam int unsigned O_EXP   = O_MLP + N_TASKS * N_EXP * D;
  localparam int unsigned ESZ     = lay_expert_words(D, HM);
  localparam int unsigned SHIFT   = $clog2(DH) / 2;   // 1/sqrt(dh) as a shift

  initial begin
    assert (O_MLP == lay_mlp_off(D));
    assert (MEM_WORDS < (1 << AW)) else $error("DRAM layout exceeds the address space");
  end

  typedef enum logic [4:0] {
    S_IDLE, S_PE, S_LN1, S_LDQKV, S_QKV, S_QK, S_MV, S_PROJ, S_ADD1, S_LN2,
    S_LDFC1, S_FC1, S_FC2, S_ADD2, S_GATE, S_ELD, S_EFC1, S_EFC2, S_NEXT, S_DONE
  } st_e;

  st_e            st;
  logic           ent;        // first cycle in st
  logic           ld_pend;    // a weight load is in flight
  logic [7:0]     layer;
  logic [$clog2(HEADS+1)-1:0] head;
  logic [EW:0]    m;          // metaqueue position
  logic [TKW-1:0] task_q;
  logic           odd;
  addr_t          lb;         // base of the current layer

  assign odd  = layer[0];
  assign busy = (st != S_IDLE);

  function automatic addr_t A(input int unsigned v);
    return addr_t'(v);
  endfunction

  // Expert e weights in the current layer.
  function automatic addr_t exp_base(input addr_t base, input logic [EW-1:0] e);
    return base + A(O_EXP) + addr_t'(32'(e) * ESZ);
  endfunction

  // ---------------------------------------------------------------- configs
  assign meta_idx   = (st == S_EFC2) ? EW'(m + 1'b1) : EW'(m);
  assign out_base = A(X_BUF);
  assign pe_img = A(IMG_BASE);
  assign pe_w   = A(PE_W);
  assign pe_b   = A(PE_B);
  assign pe_pos = A(POS);
  assign pe_out = A(X_BUF);
  assign ln_in  = A(X_BUF);
  assign ln_out = A(XN_BUF);
  assign ln_gb  = lb + ((st == S_LN1) ? A(O_LN1) : A(O_LN2));
  assign gate_in = A(XN_BUF);
  assign gate_w  = lb + A(O_MLP) + addr_t'(32'(task_q) * N_EXP * D);
  assign add_a  = A(X_BUF);
  assign add_b  = A(TMP_BUF);
  assign add_o  = A(X_BUF);

  // Attention of head `head`: Q|K|V of a token are contiguous (3D words).
  always_comb begin
    att_cfg          = '0;
    att_cfg.q_base   = A(QKV_BUF) + addr_t'(32'(head) * DH);
    att_cfg.k_base   = A(QKV_BUF) + addr_t'(32'(head) * DH) + ((st == S_MV) ? A(2 * D) : A(D));
    att_cfg.s_base   = A(S_BUF);
    att_cfg.st_base  = A(ST_BUF);
    att_cfg.o_base   = A(ATT_BUF) + addr_t'(32'(head) * DH);
    att_cfg.stride   = 16'(3 * D);
    att_cfg.o_stride = 16'(D);
    att_cfg.n        = 16'(NTOK);
    att_cfg.dh       = 16'(DH);
    att_cfg.shift    = 4'(SHIFT);
  end

  always_comb begin
    lin_cfg = '0;
    lin_cfg.n_tok = 16'(NTOK);
    unique case (st)
      S_QKV:  begin lin_cfg.in_base = A(XN_BUF); lin_cfg.out_base = A(QKV_BUF);
                    lin_cfg.in_dim = 16'(D); lin_cfg.out_dim = 16'(3 * D); lin_cfg.bank = 1'b0; end
      S_PROJ: begin lin_cfg.in_base = A(ATT_BUF); lin_cfg.out_base = A(TMP_BUF);
                    lin_cfg.in_dim = 16'(D); lin_cfg.out_dim = 16'(D); lin_cfg.bank = 1'b1; end
      S_FC1:  begin lin_cfg.in_base = A(XN_BUF); lin_cfg.out_base = A(HID_BUF);
                    lin_cfg.in_dim = 16'(D); lin_cfg.out_dim = 16'(MLP); lin_cfg.gelu = 1'b1;
                    lin_cfg.bank = 1'b0; end
      S_FC2:  begin lin_cfg.in_base = A(HID_BUF); lin_cfg.out_base = A(TMP_BUF);
                    lin_cfg.in_dim = 16'(MLP); lin_cfg.out_dim = 16'(D); lin_cfg.bank = 1'b1; end
      S_EFC1: begin lin_cfg.in_base = A(XN_BUF); lin_cfg.out_base = A(HID_BUF);
                    lin_cfg.in_dim = 16'(D); lin_cfg.out_dim = 16'(HM); lin_cfg.gelu = 1'b1;
                    lin_cfg.sparse = 1'b1; lin_cfg.bank = 1'b0; lin_cfg.n_tok = cur_len; end
      S_EFC2: begin lin_cfg.in_base = A(HID_BUF); lin_cfg.out_base = A(X_BUF);
                    lin_cfg.in_dim = 16'(HM); lin_cfg.out_dim = 16'(D); lin_cfg.sparse = 1'b1;
                    lin_cfg.accum = 1'b1; lin_cfg.bank = 1'b1; lin_cfg.n_tok = cur_len; end
      default: ;
    endcase
  end

  // Weight loads: which load a state starts on entry.
  always_comb begin
    ld_cfg   = '0;
    ld_start = 1'b0;
    if (ent) begin
      unique case (st)
        S_LDQKV: begin ld_start = 1'b1; ld_cfg.w_base = lb + A(O_QKVW); ld_cfg.b_base = lb + A(O_QKVB);
                       ld_cfg.in_dim = 16'(D); ld_cfg.out_dim = 16'(3 * D);
                       ld_cfg.bias_fmt = BIAS_ATTN; ld_cfg.bank = 1'b0; end
        S_QKV:   begin ld_start = 1'b1; ld_cfg.w_base = lb + A(O_PRJW); ld_cfg.b_base = lb + A(O_PRJB);
                       ld_cfg.in_dim = 16'(D); ld_cfg.out_dim = 16'(D);
                       ld_cfg.bias_fmt = BIAS_ATTN; ld_cfg.bank = 1'b1; end
        S_PROJ:  if (!odd) begin
                       ld_start = 1'b1; ld_cfg.w_base = lb + A(O_MLP); ld_cfg.b_base = lb + A(O_FC1B);
                       ld_cfg.in_dim = 16'(D); ld_cfg.out_dim = 16'(MLP);
                       ld_cfg.bias_fmt = BIAS_MLP; ld_cfg.bank = 1'b0; end
        S_FC1:   begin ld_start = 1'b1; ld_cfg.w_base = lb + A(O_FC2W); ld_cfg.b_base = lb + A(O_FC2B);
                       ld_cfg.in_dim = 16'(MLP); ld_cfg.out_dim = 16'(D);
                       ld_cfg.bias_fmt = BIAS_MLP; ld_cfg.bank = 1'b1; end
        S_ELD:   if (m == 0) begin   // later experts were started under FC2
                       ld_start = 1'b1; ld_cfg.w_base = exp_base(lb, meta_expert);
                       ld_cfg.b_base = exp_base(lb, meta_expert) + A(HM * D);
                       ld_cfg.in_dim = 16'(D); ld_cfg.out_dim = 16'(HM);
                       ld_cfg.bias_fmt = BIAS_MLP; ld_cfg.bank = 1'b0; end
        S_EFC1:  begin ld_start = 1'b1; ld_cfg.w_base = exp_base(lb, cur_expert) + A(HM * D + HM);
                       ld_cfg.b_base = exp_base(lb, cur_expert) + A(HM * D + HM + D * HM);
                       ld_cfg.in_dim = 16'(HM); ld_cfg.out_dim = 16'(D);
                       ld_cfg.bias_fmt = BIAS_MLP; ld_cfg.bank = 1'b1; end
        S_EFC2:  if (32'(m) + 1 < 32'(meta_len)) begin
                       ld_start = 1'b1; ld_cfg.w_base = exp_base(lb, meta_expert);
                       ld_cfg.b_base = exp_base(lb, meta_expert) + A(HM * D);
                       ld_cfg.in_dim = 16'(D); ld_cfg.out_dim = 16'(HM);
                       ld_cfg.bias_fmt = BIAS_MLP; ld_cfg.bank = 1'b0; end
        default: ;
      endcase
    end
  end

  // Unit starts on state entry.
  assign pe_start   = ent && (st == S_PE);
  assign ln_start   = ent && (st == S_LN1 || st == S_LN2);
  assign lin_start  = ent && (st == S_QKV || st == S_PROJ || st == S_FC1 || st == S_FC2 ||
                              st == S_EFC1 || st == S_EFC2);
  assign qk_start   = ent && (st == S_QK);
  assign mv_start   = ent && (st == S_MV);
  assign add_start  = ent && (st == S_ADD1 || st == S_ADD2);
  assign gate_start = ent && (st == S_GATE);

  // Done of the unit the current state started.
  logic unit_done, dn;
  always_comb begin
    unique case (st)
      S_PE:                   unit_done = pe_done;
      S_LN1, S_LN2:           unit_done = ln_done;
      S_QKV, S_PROJ, S_FC1, S_FC2, S_EFC1, S_EFC2: unit_done = lin_done;
      S_QK:                   unit_done = qk_done;
      S_MV:                   unit_done = mv_done;
      S_ADD1, S_ADD2:         unit_done = add_done;
      S_GATE:                 unit_done = gate_done;
      default:                unit_done = 1'b0;
    endcase
  end

  logic fin;   // the current state may advance
  always_comb begin
    unique case (st)
      S_LDQKV, S_LDFC1, S_ELD: fin = !ent && !ld_pend;
      S_QKV, S_FC1, S_EFC1:    fin = !ent && (unit_done || dn) && !ld_pend;
      S_NEXT, S_DONE, S_IDLE:  fin = 1'b1;
      default:                 fin = !ent && (unit_done || dn);
    endcase
  end

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; ent <= 1'b0; ld_pend <= 1'b0; dn <= 1'b0; layer <= '0; head <= '0;
      m <= '0; task_q <= '0; lb <= '0; done <= 1'b0; cur_expert <= '0; stats <= '0;
    end else begin
      done <= 1'b0;
      ent  <= 1'b0;
      if (ld_start) ld_pend <= 1'b1;
      else if (ld_done) ld_pend <= 1'b0;
      if (ent) dn <= 1'b0;
      else if (unit_done) dn <= 1'b1;
      // event counters
      if (ld_pend && lin_busy) stats.load_overlap <= stats.load_overlap + 1;
      if (!ent && ld_pend && (st == S_LDQKV || st == S_LDFC1 || st == S_ELD ||
                              ((st == S_QKV || st == S_FC1 || st == S_EFC1) && dn)))
        stats.load_stall <= stats.load_stall + 1;

      if (fin) begin
        ent <= 1'b1;
        dn  <= 1'b0;
        unique case (st)
          S_IDLE: begin
            ent <= 1'b0;
            if (start) begin
              if (task_id != task_q) stats.task_switches <= stats.task_switches + 1;
              task_q <= task_id; layer <= '0; lb <= A(L0); st <= S_PE; ent <= 1'b1;
            end
          end
          S_PE:    st <= S_LN1;
          S_LN1:   st <= S_LDQKV;
          S_LDQKV: st <= S_QKV;
          S_QKV:   begin head <= '0; st <= S_QK; end
          S_QK:    st <= S_MV;
          S_MV:    if (32'(head) + 1 < HEADS) begin head <= head + 1'b1; st <= S_QK; end
                   else st <= S_PROJ;
          S_PROJ:  st <= S_ADD1;
          S_ADD1:  st <= S_LN2;
          S_LN2:   st <= odd ? S_GATE : S_LDFC1;
          S_LDFC1: st <= S_FC1;
          S_FC1:   st <= S_FC2;
          S_FC2:   st <= S_ADD2;
          S_ADD2:  begin stats.vit_blocks <= stats.vit_blocks + 1; st <= S_NEXT; end
          S_GATE: begin
            m <= '0;
            stats.experts_skipped <= stats.experts_skipped + 16'(32'(N_EXP) - 32'(meta_len));
            st <= (meta_len == 0) ? S_NEXT : S_ELD;
          end
          S_ELD: begin
            if (m == 0) cur_expert <= meta_expert;
            st <= S_EFC1;
          end
          S_EFC1:  st <= S_EFC2;
          S_EFC2: begin
            stats.experts_run <= stats.experts_run + 1;
            if (32'(m) + 1 < 32'(meta_len)) begin
              m <= m + 1'b1; cur_expert <= meta_expert; st <= S_ELD;
            end else begin
              stats.moe_blocks <= stats.moe_blocks + 1;
              st <= S_NEXT;
            end
          end
          S_NEXT: begin
            if (32'(layer) + 1 < LAYERS) begin
              lb    <= lb + addr_t'(lay_layer_words(32'(layer), D, MLP, HM, N_EXP));
              layer <= layer + 1'b1;
              st    <= S_LN1;
            end else begin
              st <= S_DONE;
            end
          end
          S_DONE: begin done <= 1'b1; ent <= 1'b0; st <= S_IDLE; end
          default: st <= S_IDLE;
        endcase
      end
    end
  end

  // Every load is started with no other load in flight.
  a_one_load: assert property (@(posedge clk) disable iff (!rst_n) ld_start |-> !ld_pend);
  // A sparse run needs a non-empty queue.
  a_run_only_chosen: assert property (@(posedge clk) disable iff (!rst_n)
                                      (st == S_EFC1 && ent) |-> (32'(m) < 32'(meta_len)));

endmodule
