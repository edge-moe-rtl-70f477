// tb_moe_gating_unit: 10 tokens of D = 24, 8 experts, top-2, for two tasks
// (two gating weight sets at different base addresses). For every token the
// pushed experts must be the two largest logits (computed exactly in the
// testbench) in descending order, and the pushed scores their softmax over
// the two (real arithmetic, tolerance 1e-5). Also checks q_clear at start.
module tb_moe_gating_unit;
  import edge_moe_pkg::*;
  localparam int D = 24, E = 8, KK = 2, NT = 10;
  logic clk = 0, rst_n = 0, start = 0, busy, done, q_clear, q_push;
  logic [2:0] q_expert; logic [6:0] q_token; act_t q_score;
  addr_t w_base;
  mem_req_t req[2]; mem_rsp_t rsp[2];
  int checks = 0, failures = 0, cycles = 0, clears = 0;
  int pe[$], pt[$]; act_t ps[$];
  moe_gating_unit #(.N_EXP(E), .TOPK(KK), .MAX_D(32), .N_TOK(128)) dut (.clk, .rst_n, .start,
    .in_base(addr_t'(0)), .w_base, .n_tok(16'(NT)), .d(16'(D)), .busy, .done,
    .mem_req(req[0]), .mem_rsp(rsp[0]), .ld_mem_req(req[1]), .ld_mem_rsp(rsp[1]),
    .q_clear, .q_push, .q_expert, .q_token, .q_score);
  dram_model #(.NP(2), .DEPTH(4096)) dram (.clk, .req, .rsp);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n && q_clear) clears++;
    if (rst_n && q_push) begin pe.push_back(q_expert); pt.push_back(q_token); ps.push_back(q_score); end
    if (++cycles > 100000) begin
      failures++; $display("watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
    end
  end
  task automatic run_task(int wb);
    w_base = addr_t'(wb); pe = {}; pt = {}; ps = {};
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    wait (done); @(negedge clk);
    checks++; if (pe.size() != NT*KK) begin failures++; $display("pushes %0d", pe.size()); return; end
    for (int t = 0; t < NT; t++) begin
      longint lg[E]; int b0, b1; real e1, s;
      for (int e = 0; e < E; e++) begin
        longint a; a = 0;
        for (int i = 0; i < D; i++) a += longint'(signed'(dram.mem[t*D+i])) * longint'(signed'(dram.mem[wb + e*D + i][15:0]));
        lg[e] = a >>> 12;
      end
      b0 = 0; for (int e = 1; e < E; e++) if (lg[e] > lg[b0]) b0 = e;
      b1 = (b0 == 0) ? 1 : 0; for (int e = 0; e < E; e++) if (e != b0 && lg[e] > lg[b1]) b1 = e;
      e1 = $exp(real'(lg[b1] - lg[b0]) / 4194304.0); s = 1.0 + e1;
      checks += 4;
      if (pt[2*t] != t || pt[2*t+1] != t) failures++;
      if (pe[2*t] != b0 || pe[2*t+1] != b1) begin failures++; $display("t%0d experts %0d %0d exp %0d %0d", t, pe[2*t], pe[2*t+1], b0, b1); end
      if (real'(ps[2*t]) / 4194304.0 - 1.0/s > 1e-5 || 1.0/s - real'(ps[2*t]) / 4194304.0 > 1e-5) failures++;
      if (real'(ps[2*t+1]) / 4194304.0 - e1/s > 1e-5 || e1/s - real'(ps[2*t+1]) / 4194304.0 > 1e-5) failures++;
    end
  endtask
  initial begin
    for (int k = 0; k < NT*D; k++) dram.mem[k] = 32'($signed($urandom_range(0, 1 << 23)) - (1 << 22));
    for (int k = 1000; k < 1000 + 2*1000; k++) dram.mem[k] = 32'($signed($urandom_range(0, 1 << 13)) - (1 << 12));
    repeat (3) @(negedge clk); rst_n = 1;
    run_task(1000);
    run_task(2000);     // task switch: another gating network
    checks++; if (clears != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
