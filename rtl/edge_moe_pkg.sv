// edge_moe_pkg: types, widths and model constants shared by the Edge-MoE
// accelerator. Activations are 32-bit signed fixed point with 22 fractional
// bits (10 integer bits), as in the paper; weights are 16-bit signed with 12
// fractional bits (the paper gives only the 16-bit width, the split is this
// design's choice). Every unit reaches DRAM through a word port described by
// mem_req_t / mem_rsp_t: a request is taken in the cycle it is valid and the
// read data returns exactly one cycle later (this port protocol is our own;
// the paper only names an AXI interface).
package edge_moe_pkg;

  localparam int unsigned AW        = 26;   // DRAM word address width
  localparam int unsigned DW        = 32;   // DRAM word width
  localparam int unsigned FRAC      = 22;   // activation fraction bits
  localparam int unsigned WFRAC     = 12;   // weight fraction bits
  localparam int unsigned WB        = 16;   // weight width

  typedef logic signed [31:0] act_t;
  typedef logic signed [15:0] wgt_t;
  typedef logic [AW-1:0]      addr_t;

  // Configuration of one run of the unified linear layer.
  typedef struct packed {
    addr_t       in_base;   // token t input at in_base + t*in_dim
    addr_t       out_base;  // token t output at out_base + t*out_dim
    logic [15:0] in_dim;
    logic [15:0] out_dim;
    logic [15:0] n_tok;     // dense: tokens 0..n_tok-1; sparse: queue length
    logic        sparse;    // tokens come from an expert queue
    logic        gelu;      // apply GELU in the writer
    logic        accum;     // out += score * y instead of out = y
    logic        bank;      // weight bank to compute from
  } lin_cfg_t;

  typedef struct packed {
    addr_t       w_base;
    addr_t       b_base;
    logic [15:0] in_dim;
    logic [15:0] out_dim;
    logic        bias_fmt;  // bias_fmt_e
    logic        bank;      // weight bank to fill
  } ld_cfg_t;

  // Configuration of one attention head for the Q x K and M' x V units.
  // Token i of Q (K, V) starts at q_base + i*stride; scores of row i are at
  // s_base + i*n; (bias, sum) of row i at st_base + 2*i; M'V output token i
  // at o_base + i*o_stride.
  typedef struct packed {
    addr_t       q_base;    // Q (QxK) or unused (M'V)
    addr_t       k_base;    // K (QxK) or V (M'V)
    addr_t       s_base;
    addr_t       st_base;
    addr_t       o_base;
    logic [15:0] stride;
    logic [15:0] o_stride;  // row stride of the M'V output
    logic [15:0] n;
    logic [15:0] dh;
    logic [3:0]  shift;     // scores are scaled by 2^-shift
  } attn_cfg_t;

  localparam act_t ACT_MAX = 32'sh7fff_ffff;
  localparam act_t ACT_MIN = 32'sh8000_0000;
  localparam act_t ONE     = act_t'(1) <<< FRAC;

  typedef struct packed {
    logic          valid;
    logic          we;
    addr_t         addr;
    logic [DW-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic          rvalid;
    logic [DW-1:0] rdata;
  } mem_rsp_t;

  // Bias formats of the unified linear layer (Fig. 10 of the paper):
  // attention biases are 16-bit with 7 integer bits, MLP biases 16-bit with
  // 5 integer bits; both widen to 7 integer + 11 fraction bits.
  typedef enum logic {BIAS_ATTN = 1'b0, BIAS_MLP = 1'b1} bias_fmt_e;
  localparam int unsigned WBIAS_FRAC = 11;
  typedef logic signed [17:0] wbias_t;

  function automatic wbias_t widen_bias(input logic [15:0] raw, input bias_fmt_e fmt);
    logic signed [15:0] s;
    s = raw;
    if (fmt == BIAS_ATTN) return wbias_t'(s) <<< 2;  // 7.9 -> 7.11
    else                  return wbias_t'(s);        // 5.11 -> 7.11
  endfunction

  function automatic act_t sat32(input logic signed [63:0] v);
    if (v > 64'sh7fff_ffff)                   return ACT_MAX;
    else if (v < -64'sh8000_0000)             return ACT_MIN;
    else                                      return act_t'(v);
  endfunction

  // M3ViT configuration (paper Table 4 and Sec. V) and design choices.
  localparam int unsigned D_MODEL    = 192;
  localparam int unsigned N_HEADS    = 3;
  localparam int unsigned MLP_DIM    = 768;
  localparam int unsigned MOE_HIDDEN = 384;  // not given in the paper
  localparam int unsigned N_LAYERS   = 12;
  localparam int unsigned N_EXPERTS  = 16;
  localparam int unsigned TOP_K      = 4;    // not given in the paper
  localparam int unsigned IMG_H      = 128;
  localparam int unsigned IMG_W      = 256;
  localparam int unsigned PATCH      = 16;
  localparam int unsigned CHANNELS   = 3;
  localparam int unsigned P_ATTN     = 4;
  localparam int unsigned LIN_LANES  = 16;   // not given in the paper
  localparam int unsigned N_TASKS    = 2;

  // DRAM layout of one encoder layer (word offsets from the layer base):
  // LN1 gamma|beta (2d), QKV weights (3d x d) and bias (3d), projection
  // weights (d x d) and bias (d), LN2 gamma|beta (2d), then
  //   ViT layer: FC1 (mlp x d, mlp), FC2 (d x mlp, d);
  //   MoE layer: gating matrices (N_TASKS x ne x d), then per expert
  //              FC1 (hm x d, hm) and FC2 (d x hm, d).
  // Layers alternate ViT (even index) and MoE (odd index).
  function automatic int unsigned lay_mlp_off(input int unsigned d);
    return 2*d + 3*d*d + 3*d + d*d + d + 2*d;
  endfunction
  function automatic int unsigned lay_expert_words(input int unsigned d, input int unsigned hm);
    return hm*d + hm + d*hm + d;
  endfunction
  function automatic int unsigned lay_layer_words(input int unsigned l, input int unsigned d,
                                                  input int unsigned mlp, input int unsigned hm,
                                                  input int unsigned ne);
    if (l % 2 == 0) return lay_mlp_off(d) + mlp*d + mlp + d*mlp + d;
    else            return lay_mlp_off(d) + N_TASKS*ne*d + ne*lay_expert_words(d, hm);
  endfunction
  function automatic int unsigned lay_all_layers(input int unsigned nl, input int unsigned d,
                                                 input int unsigned mlp, input int unsigned hm,
                                                 input int unsigned ne);
    int unsigned s;
    s = 0;
    for (int unsigned l = 0; l < nl; l++) s += lay_layer_words(l, d, mlp, hm, ne);
    return s;
  endfunction

  // Event counters of the top level (they only observe, never steer).
  typedef struct packed {
    logic [15:0] vit_blocks;       // ViT (dense MLP) layers run
    logic [15:0] moe_blocks;       // MoE layers run
    logic [15:0] experts_run;      // experts computed
    logic [15:0] experts_skipped;  // experts no token chose (not loaded)
    logic [31:0] load_stall;       // cycles compute waited for a weight load
    logic [31:0] load_overlap;     // cycles a weight load ran under compute
    logic [15:0] task_switches;    // runs whose task differs from the last
  } stats_t;

endpackage
