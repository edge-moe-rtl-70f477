// tb_attn_qk_unit: one head with N = 16 tokens, P = 4 slots, dh = 8.
// Checks every score against q.k computed in the testbench, each row's
// bias (exact maximum) and sum (against real exp, 1e-4 per element), the
// iteration count N*N/P + P - 1 of the paper's Table 2, the K traffic
// (one K token per iteration, N*N/P + P - 1 tokens) and the Q traffic (N
// tokens, each read once), and the total cycle count.
module tb_attn_qk_unit;
  import edge_moe_pkg::*;
  localparam int P = 4, N = 16, DH = 8, SH = 1;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  attn_cfg_t cfg; logic [31:0] iterations;
  mem_req_t req[3]; mem_rsp_t rsp[3];
  int checks = 0, failures = 0, cycles = 0, qreads = 0, kreads = 0;
  attn_qk_unit #(.P(P), .MAX_DH(16)) dut (.clk, .rst_n, .start, .cfg, .busy, .done, .iterations,
    .q_mem_req(req[0]), .q_mem_rsp(rsp[0]), .k_mem_req(req[1]), .k_mem_rsp(rsp[1]),
    .s_mem_req(req[2]), .s_mem_rsp(rsp[2]));
  dram_model #(.NP(3), .DEPTH(1 << 13)) dram (.clk, .req, .rsp);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n && req[0].valid) qreads++;
    if (rst_n && req[1].valid) kreads++;
    if (++cycles > 100000) begin
      failures++; $display("watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
    end
  end
  initial begin
    int t0;
    for (int k = 0; k < 1024; k++) dram.mem[k] = 32'($signed($urandom_range(0, 1 << 23)) - (1 << 22));
    repeat (3) @(negedge clk); rst_n = 1;
    cfg = '{q_base: addr_t'(0), k_base: addr_t'(512), s_base: addr_t'(2048), st_base: addr_t'(4000),
            o_base: addr_t'(0), stride: 16'(DH), o_stride: 16'(DH), n: 16'(N), dh: 16'(DH), shift: 4'(SH)};
    @(negedge clk) start = 1; t0 = cycles; @(negedge clk) start = 0;
    wait (done); @(negedge clk);
    checks++; if (iterations != N*N/P + P - 1) begin failures++; $display("iterations %0d", iterations); end
    checks++; if (kreads != (N*N/P + P - 1) * DH) begin failures++; $display("kreads %0d", kreads); end
    checks++; if (qreads != N * DH) begin failures++; $display("qreads %0d", qreads); end
    checks++; if (cycles - t0 > (N*N/P + P - 1) * DH + 8) begin failures++; $display("cycles %0d", cycles - t0); end
    for (int i = 0; i < N; i++) begin
      act_t mx; real s; mx = ACT_MIN; s = 0;
      for (int j = 0; j < N; j++) begin
        longint a; act_t sc; a = 0;
        for (int d = 0; d < DH; d++) a += longint'(signed'(dram.mem[i*DH+d])) * longint'(signed'(dram.mem[512+j*DH+d]));
        sc = sat32(a >>> (22 + SH));
        checks++; if (act_t'(dram.mem[2048 + i*N + j]) != sc) begin failures++; if (failures < 6) $display("score %0d %0d", i, j); end
        if (sc > mx) mx = sc;
      end
      for (int j = 0; j < N; j++) s += $exp(real'(signed'(dram.mem[2048 + i*N + j]) - mx) / 4194304.0);
      checks += 2;
      if (act_t'(dram.mem[4000 + 2*i]) != mx) begin failures++; $display("bias row %0d", i); end
      if ((real'(signed'(dram.mem[4001 + 2*i])) / 4194304.0 - s) > 1e-4 * N ||
          (s - real'(signed'(dram.mem[4001 + 2*i])) / 4194304.0) > 1e-4 * N) begin failures++; $display("sum row %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
