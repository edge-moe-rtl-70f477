// tb_patch_embed_unit: a 16 x 24 x 2 image cut into 4 x 4 patches (24
// tokens), embedded to D = 10 with LANES = 4. Every output is compared with
// the embedding computed in the testbench from the image, weights, bias and
// positional table (exact integer arithmetic).
module tb_patch_embed_unit;
  import edge_moe_pkg::*;
  localparam int H = 16, W = 24, PS = 4, C = 2, D = 10, L = 4, K = PS*PS*C, NT = (H/PS)*(W/PS);
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  mem_req_t req[2]; mem_rsp_t rsp[2];
  int checks = 0, failures = 0, cycles = 0;
  patch_embed_unit #(.IMG_H(H), .IMG_W(W), .PATCH(PS), .CH(C), .D(D), .LANES(L)) dut (
    .clk, .rst_n, .start, .img_base(addr_t'(0)), .w_base(addr_t'(1000)), .b_base(addr_t'(1500)),
    .pos_base(addr_t'(2000)), .out_base(addr_t'(3000)), .busy, .done,
    .mem_req(req[0]), .mem_rsp(rsp[0]), .ld_mem_req(req[1]), .ld_mem_rsp(rsp[1]));
  dram_model #(.NP(2), .DEPTH(4096)) dram (.clk, .req, .rsp);
  always #5 clk = ~clk;
  always @(posedge clk) if (++cycles > 200000) begin
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int k = 0; k < H*W*C; k++) dram.mem[k] = 32'($urandom_range(0, 1 << 22));   // pixels in [0, 1]
    for (int k = 0; k < D*K; k++) dram.mem[1000 + k] = 32'($signed($urandom_range(0, 1 << 13)) - (1 << 12));
    for (int k = 0; k < D; k++) dram.mem[1500 + k] = 32'($signed($urandom_range(0, 1 << 12)) - (1 << 11));
    for (int k = 0; k < NT*D; k++) dram.mem[2000 + k] = 32'($signed($urandom_range(0, 1 << 22)) - (1 << 21));
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    wait (done); @(negedge clk);
    for (int t = 0; t < NT; t++) for (int o = 0; o < D; o++) begin
      longint acc; act_t y; logic signed [15:0] b;
      acc = 0;
      for (int r = 0; r < PS; r++) for (int cl = 0; cl < PS; cl++) for (int ch = 0; ch < C; ch++) begin
        int py, px, idx;
        py = t / (W/PS); px = t % (W/PS); idx = (r*PS + cl)*C + ch;
        acc += longint'(signed'(dram.mem[((py*PS + r)*W + px*PS + cl)*C + ch]))
             * longint'(signed'(dram.mem[1000 + o*K + idx][15:0]));
      end
      b = dram.mem[1500 + o][15:0];
      y = sat32((acc >>> 12) + (longint'(b) * 4 <<< 11));
      y = sat32(longint'(y) + longint'(signed'(dram.mem[2000 + t*D + o])));
      checks++; if (act_t'(dram.mem[3000 + t*D + o]) != y) begin failures++; if (failures < 6) $display("t%0d o%0d got %h exp %h", t, o, dram.mem[3000+t*D+o], y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
