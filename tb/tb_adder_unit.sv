// tb_adder_unit: adds two random vectors in the DRAM model (including
// saturating cases), checks every element and the cycle count 3*len + 2.
module tb_adder_unit;
  import edge_moe_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  addr_t a_base, b_base, o_base;
  logic [23:0] len;
  mem_req_t req[1]; mem_rsp_t rsp[1];
  int checks = 0, failures = 0, cycles = 0;
  adder_unit dut (.clk, .rst_n, .start, .a_base, .b_base, .o_base, .len, .done, .mem_req(req[0]), .mem_rsp(rsp[0]));
  dram_model #(.NP(1), .DEPTH(4096)) dram (.clk, .req, .rsp);
  always #5 clk = ~clk;
  always @(posedge clk) if (++cycles > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int t0, n;
    repeat (2) @(negedge clk); rst_n = 1;
    n = 300; a_base = 0; b_base = 1000; o_base = 2000; len = 24'(n);
    for (int i = 0; i < n; i++) begin
      dram.mem[i] = $urandom; dram.mem[1000+i] = (i % 7 == 0) ? 32'h7fff_0000 : $urandom;
    end
    dram.mem[0] = 32'h7fff_ffff; dram.mem[1000] = 32'h0000_0005;
    @(negedge clk) start = 1; t0 = cycles; @(negedge clk) start = 0;
    wait (done); @(negedge clk);
    checks++; if (cycles - t0 != 3*n + 2) begin failures++; $display("cycles %0d", cycles - t0); end
    for (int i = 0; i < n; i++) begin
      longint s; s = longint'(signed'(dram.mem[i])) + longint'(signed'(dram.mem[1000+i]));
      if (s > 64'sh7fff_ffff) s = 64'sh7fff_ffff; if (s < -64'sh8000_0000) s = -64'sh8000_0000;
      checks++; if (dram.mem[2000+i] != 32'(s)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
