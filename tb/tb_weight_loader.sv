// tb_weight_loader: loads a random 40 x 24 matrix plus 40 biases into a
// 4-lane weight_bram through the loader and checks every weight lands at
// word (o/4)*in_dim + i, lane o%4, and every bias at word o/4, lane o%4.
// Also checks the load takes out*in + out + 2 cycles (one word per cycle).
module tb_weight_loader;
  import edge_moe_pkg::*;
  localparam int L = 4, D = 256, BD = 16, NI = 24, NO = 40;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  mem_req_t req[1]; mem_rsp_t rsp[1];
  logic w_wr_en, b_wr_en; logic [7:0] w_wr_addr; logic [3:0] b_wr_addr;
  logic [1:0] w_wr_lane, b_wr_lane; wgt_t wr_data;
  wgt_t wmem[D][L], bmem[BD][L];
  int checks = 0, failures = 0, cycles = 0;
  weight_loader #(.LANES(L), .DEPTH(D), .BDEPTH(BD)) dut (.clk, .rst_n, .start, .w_base(addr_t'(100)),
    .b_base(addr_t'(3000)), .in_dim(16'(NI)), .out_dim(16'(NO)), .with_bias(1'b1), .busy, .done,
    .mem_req(req[0]), .mem_rsp(rsp[0]), .w_wr_en, .w_wr_addr, .w_wr_lane, .b_wr_en, .b_wr_addr, .b_wr_lane, .wr_data);
  dram_model #(.NP(1), .DEPTH(4096)) dram (.clk, .req, .rsp);
  always_ff @(posedge clk) begin
    if (w_wr_en) wmem[w_wr_addr][w_wr_lane] <= wr_data;
    if (b_wr_en) bmem[b_wr_addr][b_wr_lane] <= wr_data;
  end
  always #5 clk = ~clk;
  always @(posedge clk) if (++cycles > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int t0;
    for (int k = 0; k < 4096; k++) dram.mem[k] = $urandom;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk) start = 1; t0 = cycles; @(negedge clk) start = 0;
    wait (done); @(negedge clk);
    checks++; if (cycles - t0 != NO*NI + NO + 2) begin failures++; $display("cycles %0d", cycles - t0); end
    for (int o = 0; o < NO; o++) begin
      for (int i = 0; i < NI; i++) begin
        checks++; if (wmem[(o/L)*NI + i][o%L] != wgt_t'(dram.mem[100 + o*NI + i][15:0])) failures++;
      end
      checks++; if (bmem[o/L][o%L] != wgt_t'(dram.mem[3000 + o][15:0])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
