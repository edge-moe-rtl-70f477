// tb_attn_mv_unit: one head with N = 16, P = 4, dh = 8. Random scores are
// written with their true row maximum and the row sum of exp(x - max)
// (as the Q x K unit would); the output tokens are compared with
// sum_j softmax_ij * V_j computed in real arithmetic (tolerance 2e-5).
// Also checks the iteration count N*N/P + P - 1, the V traffic (one V token
// per iteration) and that each output token is written exactly once.
module tb_attn_mv_unit;
  import edge_moe_pkg::*;
  localparam int P = 4, N = 16, DH = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  attn_cfg_t cfg; logic [31:0] iterations;
  mem_req_t req[3]; mem_rsp_t rsp[3];
  int checks = 0, failures = 0, cycles = 0, vreads = 0, owrites = 0;
  attn_mv_unit #(.P(P), .MAX_DH(16)) dut (.clk, .rst_n, .start, .cfg, .busy, .done, .iterations,
    .s_mem_req(req[0]), .s_mem_rsp(rsp[0]), .v_mem_req(req[1]), .v_mem_rsp(rsp[1]),
    .o_mem_req(req[2]), .o_mem_rsp(rsp[2]));
  dram_model #(.NP(3), .DEPTH(1 << 13)) dram (.clk, .req, .rsp);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n && req[1].valid) vreads++;
    if (rst_n && req[2].valid) owrites++;
    if (++cycles > 100000) begin
      failures++; $display("watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
    end
  end
  initial begin
    for (int k = 0; k < 8192; k++) dram.mem[k] = 0;
    // V at 512 (stride DH); scores at 2048; stats at 4000; output at 6000
    for (int k = 0; k < N*DH; k++) dram.mem[512 + k] = 32'($signed($urandom_range(0, 1 << 24)) - (1 << 23));
    for (int i = 0; i < N; i++) begin
      act_t mx; real s; mx = ACT_MIN; s = 0;
      for (int j = 0; j < N; j++) begin
        dram.mem[2048 + i*N + j] = 32'($signed($urandom_range(0, 1 << 25)) - (1 << 24));
        if (act_t'(dram.mem[2048 + i*N + j]) > mx) mx = act_t'(dram.mem[2048 + i*N + j]);
      end
      for (int j = 0; j < N; j++) s += $exp(real'(signed'(dram.mem[2048 + i*N + j]) - mx) / 4194304.0);
      dram.mem[4000 + 2*i] = mx; dram.mem[4001 + 2*i] = 32'($rtoi(s * 4194304.0));
    end
    repeat (3) @(negedge clk); rst_n = 1;
    cfg = '{q_base: addr_t'(0), k_base: addr_t'(512), s_base: addr_t'(2048), st_base: addr_t'(4000),
            o_base: addr_t'(6000), stride: 16'(DH), o_stride: 16'(DH), n: 16'(N), dh: 16'(DH), shift: 4'(0)};
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    wait (done); @(negedge clk);
    checks++; if (iterations != N*N/P + P - 1) begin failures++; $display("iterations %0d", iterations); end
    checks++; if (vreads != (N*N/P + P - 1) * DH) begin failures++; $display("vreads %0d", vreads); end
    checks++; if (owrites != N * DH) begin failures++; $display("owrites %0d", owrites); end
    for (int i = 0; i < N; i++) begin
      real pr[N]; real mx, s;
      mx = -1e30; s = 0;
      for (int j = 0; j < N; j++) if (real'(signed'(dram.mem[2048+i*N+j])) > mx) mx = real'(signed'(dram.mem[2048+i*N+j]));
      for (int j = 0; j < N; j++) begin pr[j] = $exp((real'(signed'(dram.mem[2048+i*N+j])) - mx) / 4194304.0); s += pr[j]; end
      for (int d = 0; d < DH; d++) begin
        real r, g;
        r = 0; for (int j = 0; j < N; j++) r += pr[j] / s * real'(signed'(dram.mem[512 + j*DH + d])) / 4194304.0;
        g = real'(signed'(dram.mem[6000 + i*DH + d])) / 4194304.0;
        checks++; if (g - r > 2e-5 || r - g > 2e-5) begin failures++; if (failures < 6) $display("out %0d %0d got %f exp %f", i, d, g, r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
