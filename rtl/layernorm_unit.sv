// layernorm_unit: LayerNorm over the embedding of every token, with its
// own loader and gamma/beta buffer (the "LayerNorm unit", "LayerNorm
// weights BRAM" and "Loader" of the paper, which names them only).
//
// On start the loader copies gamma (D words) and beta (D words, following
// gamma in DRAM) into a two-lane buffer, gamma in lane 0 and beta in lane 1
// of word i. Then, per token:
//   pass 1  read the D inputs into a local buffer, summing x and x*x;
//   stats   mean = sum/D, var = sumsq/D - mean^2 + eps, std = sqrt(var) by a
//           bit-serial integer square root (32 cycles), inv = 1/std by one
//           division;
//   pass 2  write y = (x - mean) * inv * gamma + beta, one per cycle.
// gamma and beta are 16-bit with 12 fraction bits, eps = 2^-20; both choices
// are ours, as is the whole datapath (the paper gives no insides).
//
// Timing: per token about 2*D + 40 cycles, after 2*D + 2 cycles of loading.
module layernorm_unit
  import edge_moe_pkg::*;
#(
  parameter int unsigned MAX_D = 192
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       in_base,
  input  addr_t       out_base,
  input  addr_t       gb_base,
  input  logic [15:0] n_tok,
  input  logic [15:0] d,
  output logic        busy,
  output logic        done,
  output mem_req_t    mem_req,
  input  mem_rsp_t    mem_rsp,
  output mem_req_t    ld_mem_req,
  input  mem_rsp_t    ld_mem_rsp
);

  localparam int unsigned AWD = $clog2(MAX_D);
  localparam act_t EPS = act_t'(4);   // 2^-20 in 22 fraction bits

  typedef enum logic [3:0] {S_IDLE, S_LOAD, S_TOK, S_P1, S_P1W, S_STAT, S_SQRT, S_DIV, S_P2, S_P2W} state_e;
  state_e st;
  addr_t  ib, ob;
  logic [15:0] nt, dd, ti, i, i_d;
  act_t   xbuf [MAX_D];
  logic signed [63:0] sum, sumsq;
  act_t   mean, inv;
  logic [63:0] rad, root, rem;     // square root state
  logic [5:0]  sq_i;
  logic        ld_start, ld_done, ld_busy;
  logic        lw_en, lb_en;
  logic [AWD-1:0] lw_addr;
  logic        lw_lane, lb_lane;
  logic        lb_addr;
  wgt_t        l_data;
  wgt_t        gb [2];

  weight_loader #(.LANES(2), .DEPTH(MAX_D), .BDEPTH(2)) u_ld (
    .clk, .rst_n, .start(ld_start), .w_base(gb_base), .b_base(gb_base), .in_dim(dd), .out_dim(16'd2),
    .with_bias(1'b0), .busy(ld_busy), .done(ld_done), .mem_req(ld_mem_req), .mem_rsp(ld_mem_rsp),
    .w_wr_en(lw_en), .w_wr_addr(lw_addr), .w_wr_lane(lw_lane),
    .b_wr_en(lb_en), .b_wr_addr(lb_addr), .b_wr_lane(lb_lane), .wr_data(l_data));

  weight_bram #(.LANES(2), .DEPTH(MAX_D), .BANKS(1)) u_gb (
    .clk, .wr_en(lw_en), .wr_bank(1'b0), .wr_addr(lw_addr), .wr_lane(lw_lane), .wr_data(l_data),
    .rd_bank(1'b0), .rd_addr(AWD'(i)), .rd_data(gb));

  assign busy     = (st != S_IDLE);
  assign ld_start = (st == S_IDLE) && start;

  // pass-2 datapath
  logic signed [63:0] xn, yv;
  always_comb begin
    xn = ((64'(xbuf[AWD'(i_d)]) - 64'(mean)) * 64'(inv)) >>> FRAC;
    yv = ((xn * 64'(gb[0])) >>> WFRAC) + (64'(gb[1]) <<< (FRAC - WFRAC));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; ib <= '0; ob <= '0; nt <= '0; dd <= '0; ti <= '0; i <= '0; i_d <= '0;
      sum <= '0; sumsq <= '0; mean <= '0; inv <= '0; rad <= '0; root <= '0; rem <= '0; sq_i <= '0;
    end else begin
      done <= 1'b0;
      i_d  <= i;
      if (mem_rsp.rvalid) begin
        xbuf[AWD'(i_d)] <= act_t'(mem_rsp.rdata);
        sum   <= sum + 64'(act_t'(mem_rsp.rdata));
        sumsq <= sumsq + ((64'(act_t'(mem_rsp.rdata)) * 64'(act_t'(mem_rsp.rdata))) >>> FRAC);
      end
      case (st)
        S_IDLE: if (start) begin ib <= in_base; ob <= out_base; nt <= n_tok; dd <= d; ti <= '0; st <= S_LOAD; end
        S_LOAD: if (ld_done) st <= S_TOK;
        S_TOK: begin
          if (ti == nt) begin done <= 1'b1; st <= S_IDLE; end
          else begin i <= '0; sum <= '0; sumsq <= '0; st <= S_P1; end
        end
        S_P1: if (i == dd - 1) st <= S_P1W; else i <= i + 1'b1;
        S_P1W: st <= S_STAT;
        S_STAT: begin
          logic signed [63:0] m, v;
          m = sum / $signed(64'(dd));
          v = sumsq / $signed(64'(dd)) - ((m * m) >>> FRAC) + 64'(EPS);
          if (v < 64'(EPS)) v = 64'(EPS);
          mean <= act_t'(m);
          rad  <= 64'(v) << FRAC;    // sqrt of a 44-fraction-bit value has 22
          root <= '0; rem <= '0; sq_i <= '0;
          st   <= S_SQRT;
        end
        S_SQRT: begin                  // restoring square root, one result bit per cycle
          logic [63:0] r2, trial;
          r2    = (rem << 2) | 64'(rad[63:62]);
          trial = (root << 2) | 64'd1;
          rad   <= rad << 2;
          if (r2 >= trial) begin rem <= r2 - trial; root <= (root << 1) | 64'd1; end
          else begin rem <= r2; root <= root << 1; end
          sq_i <= sq_i + 1'b1;
          if (sq_i == 6'd31) st <= S_DIV;
        end
        S_DIV: begin
          inv <= act_t'((64'd1 << (2 * FRAC)) / ((root == 0) ? 64'd1 : root));
          i <= '0; st <= S_P2;
        end
        S_P2: if (i == dd - 1) st <= S_P2W; else i <= i + 1'b1;
        S_P2W: begin ti <= ti + 1'b1; st <= S_TOK; end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    mem_req = '0;
    if (st == S_P1) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = ib + addr_t'(32'(ti) * 32'(dd) + 32'(i));
    end else if ((st == S_P2 && i != 0) || st == S_P2W) begin
      mem_req.valid = 1'b1; mem_req.we = 1'b1;
      mem_req.addr  = ob + addr_t'(32'(ti) * 32'(dd) + 32'(i_d));
      mem_req.wdata = sat32(yv);
    end
  end

endmodule
