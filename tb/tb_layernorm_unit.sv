// tb_layernorm_unit: normalises 6 random tokens of D = 40 with random
// gamma/beta and compares every output with LayerNorm computed in real
// arithmetic (eps = 2^-20), tolerance 2e-3; two tokens are constant (one
// positive, one negative), so their output must equal beta; one token has a
// clearly negative mean.
module tb_layernorm_unit;
  import edge_moe_pkg::*;
  localparam int D = 40, NT = 6;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  mem_req_t req[2]; mem_rsp_t rsp[2];
  int checks = 0, failures = 0, cycles = 0;
  layernorm_unit #(.MAX_D(64)) dut (.clk, .rst_n, .start, .in_base(addr_t'(0)), .out_base(addr_t'(1000)),
    .gb_base(addr_t'(2000)), .n_tok(16'(NT)), .d(16'(D)), .busy, .done,
    .mem_req(req[0]), .mem_rsp(rsp[0]), .ld_mem_req(req[1]), .ld_mem_rsp(rsp[1]));
  dram_model #(.NP(2), .DEPTH(4096)) dram (.clk, .req, .rsp);
  always #5 clk = ~clk;
  always @(posedge clk) if (++cycles > 100000) begin
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int k = 0; k < NT*D; k++) dram.mem[k] = 32'($signed($urandom_range(0, 1 << 26)) - (1 << 25));
    for (int k = 0; k < D; k++) dram.mem[2*D + k] = 32'(7 << 22);        // token 2 constant
    for (int k = 0; k < D; k++) dram.mem[4*D + k] = dram.mem[4*D + k] - 32'(3 << 22);  // negative mean
    for (int k = 0; k < D; k++) dram.mem[5*D + k] = 32'(-(5 << 22));     // token 5 constant, negative
    for (int k = 0; k < D; k++) begin
      dram.mem[2000 + k]     = 32'($urandom_range(2048, 8192));              // gamma in [0.5, 2]
      dram.mem[2000 + D + k] = 32'(16'($signed($urandom_range(0, 8192)) - 4096)); // beta in [-1, 1]
    end
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    wait (done); @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      real m, v, x;
      m = 0; v = 0;
      for (int k = 0; k < D; k++) m += real'(signed'(dram.mem[t*D + k])) / 4194304.0;
      m /= D;
      for (int k = 0; k < D; k++) begin x = real'(signed'(dram.mem[t*D + k])) / 4194304.0 - m; v += x * x; end
      v = v / D + 1.0 / 1048576.0;
      for (int k = 0; k < D; k++) begin
        real g, b, r, y;
        g = real'(signed'(dram.mem[2000 + k][15:0])) / 4096.0;
        b = real'(signed'(dram.mem[2000 + D + k][15:0])) / 4096.0;
        r = (real'(signed'(dram.mem[t*D + k])) / 4194304.0 - m) / $sqrt(v) * g + b;
        y = real'(signed'(dram.mem[1000 + t*D + k])) / 4194304.0;
        checks++; if (y - r > 2e-3 || r - y > 2e-3) begin failures++; if (failures < 6) $display("t%0d k%0d got %f exp %f", t, k, y, r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
