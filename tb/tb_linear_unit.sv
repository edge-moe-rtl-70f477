// tb_linear_unit: runs the unified linear layer (LANES = 4) in three
// configurations and checks every output against a model computed in the
// testbench:
//   1. dense 12 -> 10, attention bias format, plain write; cycle count;
//   2. dense 3 -> 7, MLP bias format, GELU (writer stalls: in_dim < LANES),
//      computed from bank 1 while bank 0 is reloaded (ping-pong);
//   3. sparse 12 -> 10 over an expert queue, GELU, weighted accumulation
//      onto existing outputs.
// Linear parts are checked exactly, GELU outputs to within 0.003.
module tb_linear_unit;
  import edge_moe_pkg::*;
  localparam int L = 4, MI = 32, MO = 24, NT = 8;
  logic clk = 0, rst_n = 0, ld_start = 0, start = 0, ld_busy, ld_done, busy, done;
  ld_cfg_t ld_cfg; lin_cfg_t cfg;
  logic [2:0] q_idx, q_token; act_t q_score;
  mem_req_t req[3]; mem_rsp_t rsp[3];
  int checks = 0, failures = 0, cycles = 0;
  logic [2:0] qt [NT]; act_t qs [NT];
  assign q_token = qt[q_idx];
  assign q_score = qs[q_idx];
  linear_unit #(.LANES(L), .MAX_IN(MI), .MAX_OUT(MO), .N_TOK(NT)) dut (
    .clk, .rst_n, .ld_start, .ld_cfg, .ld_busy, .ld_done, .ld_mem_req(req[0]), .ld_mem_rsp(rsp[0]),
    .start, .cfg, .busy, .done, .q_idx, .q_token, .q_score,
    .rd_mem_req(req[1]), .rd_mem_rsp(rsp[1]), .wr_mem_req(req[2]), .wr_mem_rsp(rsp[2]));
  dram_model #(.NP(3), .DEPTH(1 << 14)) dram (.clk, .req, .rsp);
  always #5 clk = ~clk;
  always @(posedge clk) if (++cycles > 200000) begin
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real phi(input real v);
    real a, h, s, t; int n;
    a = (v < 0.0) ? -v : v;
    if (a > 8.0) return (v < 0.0) ? 0.0 : 1.0;
    n = 400; h = a / n; s = 0.0;
    for (int i = 0; i <= n; i++) begin
      t = $exp(-0.5 * (i*h) * (i*h));
      s += ((i == 0 || i == n) ? 1.0 : ((i % 2) ? 4.0 : 2.0)) * t;
    end
    s = s * h / 3.0 * 0.3989422804014327;
    return (v < 0.0) ? 0.5 - s : 0.5 + s;
  endfunction

  // model: y = sat((sum x*w) >>> 12 + widened bias << 11)
  function automatic act_t model_y(int wb, int bb, int ib, int tok, int o, int ni, logic fmt);
    longint acc; logic signed [15:0] b; longint bw;
    acc = 0;
    for (int i = 0; i < ni; i++)
      acc += longint'(signed'(dram.mem[ib + tok*ni + i])) * longint'(signed'(dram.mem[wb + o*ni + i][15:0]));
    b  = dram.mem[bb + o][15:0];
    bw = (fmt == BIAS_ATTN) ? longint'(b) * 4 : longint'(b);
    return sat32((acc >>> 12) + (bw <<< 11));
  endfunction

  task automatic load(int wb, int bb, int ni, int no, logic fmt, logic bank);
    ld_cfg = '{w_base: addr_t'(wb), b_base: addr_t'(bb), in_dim: 16'(ni), out_dim: 16'(no), bias_fmt: fmt, bank: bank};
    @(negedge clk) ld_start = 1; @(negedge clk) ld_start = 0;
  endtask

  task automatic check_val(act_t got, act_t exp_v, logic gel, string what);
    checks++;
    if (!gel) begin
      if (got != exp_v) begin failures++; if (failures < 8) $display("%s got %h exp %h", what, got, exp_v); end
    end else begin
      real r, g, e;
      r = real'(exp_v) / 4194304.0; e = r * phi(r); g = real'(got) / 4194304.0;
      if (g - e > 0.003 || e - g > 0.003) begin failures++; if (failures < 8) $display("%s gelu got %f exp %f", what, g, e); end
    end
  endtask

  initial begin
    int t0;
    act_t old [NT][MO];
    // inputs: small activations in [-2, 2); weights in [-1, 1)
    for (int k = 0; k < 4096; k++) dram.mem[k] = 32'($signed($urandom_range(0, 1 << 24)) - (1 << 23));
    for (int k = 4096; k < 8192; k++) dram.mem[k] = 32'($signed($urandom_range(0, 1 << 13)) - (1 << 12));
    for (int k = 8192; k < 8400; k++) dram.mem[k] = 32'($signed($urandom_range(0, 1 << 14)) - (1 << 13));
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- 1: dense 12 -> 10, attention bias format ----
    load(4096, 8192, 12, 10, BIAS_ATTN, 1'b0); wait (ld_done); @(negedge clk);
    cfg = '{in_base: addr_t'(0), out_base: addr_t'(10000), in_dim: 16'd12, out_dim: 16'd10, n_tok: 16'(NT),
            sparse: 1'b0, gelu: 1'b0, accum: 1'b0, bank: 1'b0};
    @(negedge clk) start = 1; t0 = cycles; @(negedge clk) start = 0;
    wait (done); @(negedge clk);
    // per token: 1 + 12 + 1 read cycles, 3 blocks x 12 compute cycles, 2 drain;
    // then the writer's last block (LANES cycles) and the done cycle
    checks++; if (cycles - t0 != NT * (14 + 36 + 2) + L + 1) begin failures++; $display("cycles %0d", cycles - t0); end
    for (int t = 0; t < NT; t++) for (int o = 0; o < 10; o++)
      check_val(act_t'(dram.mem[10000 + t*10 + o]), model_y(4096, 8192, 0, t, o, 12, BIAS_ATTN), 1'b0, "dense");

    // ---- 2: dense 3 -> 7, MLP bias, GELU, from bank 1 while bank 0 reloads ----
    load(5000, 8300, 3, 7, BIAS_MLP, 1'b1); wait (ld_done); @(negedge clk);
    cfg = '{in_base: addr_t'(200), out_base: addr_t'(11000), in_dim: 16'd3, out_dim: 16'd7, n_tok: 16'(NT),
            sparse: 1'b0, gelu: 1'b1, accum: 1'b0, bank: 1'b1};
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    load(6000, 8200, 12, 10, BIAS_MLP, 1'b0);
    wait (done); @(negedge clk);
    // the reload into bank 0 overlapped this run
    checks++; if (!ld_busy) failures++;
    wait (!ld_busy); @(negedge clk);
    for (int t = 0; t < NT; t++) for (int o = 0; o < 7; o++)
      check_val(act_t'(dram.mem[11000 + t*7 + o]), model_y(5000, 8300, 200, t, o, 3, BIAS_MLP), 1'b1, "gelu");

    // ---- 3: sparse weighted accumulation over a queue of 5 tokens (bank 0) ----
    for (int t = 0; t < NT; t++) for (int o = 0; o < 10; o++) begin
      dram.mem[12000 + t*10 + o] = 32'($signed($urandom_range(0, 1 << 22)));
      old[t][o] = act_t'(dram.mem[12000 + t*10 + o]);
    end
    qt[0] = 6; qt[1] = 1; qt[2] = 3; qt[3] = 0; qt[4] = 7;
    for (int i = 0; i < NT; i++) qs[i] = act_t'($urandom_range(0, 1 << 22));
    cfg = '{in_base: addr_t'(0), out_base: addr_t'(12000), in_dim: 16'd12, out_dim: 16'd10, n_tok: 16'd5,
            sparse: 1'b1, gelu: 1'b1, accum: 1'b1, bank: 1'b0};
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    wait (done); @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      int qi; qi = -1;
      for (int i = 0; i < 5; i++) if (qt[i] == t) qi = i;
      for (int o = 0; o < 10; o++) begin
        act_t got; got = act_t'(dram.mem[12000 + t*10 + o]);
        if (qi < 0) begin checks++; if (got != old[t][o]) failures++; end
        else begin
          real r, e, g;
          r = real'(model_y(6000, 8200, 0, t, o, 12, BIAS_MLP)) / 4194304.0;
          e = real'(old[t][o]) / 4194304.0 + real'(qs[qi]) / 4194304.0 * r * phi(r);
          g = real'(got) / 4194304.0;
          checks++; if (g - e > 0.003 || e - g > 0.003) begin failures++; if (failures < 8) $display("acc t%0d o%0d got %f exp %f", t, o, g, e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
