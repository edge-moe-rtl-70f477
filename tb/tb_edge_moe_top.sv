// tb_edge_moe_top: end-to-end test of edge_moe_top at a reduced size
// (D = 16, 2 heads, 16 tokens from a 16x16 two-channel image with 4x4
// patches, one ViT and one MoE layer, 16 experts with top-2 gating, 4 MAC
// lanes). Both tasks are run and every output is compared with a
// floating-point model; see edge_moe_tb_body.svh for what is checked.
module tb_edge_moe_top;
  import edge_moe_pkg::*;
  localparam int D = 16, HEADS = 2, MLP = 32, HM = 16, LAYERS = 2, E = 16, TOPK = 2;
  localparam int H = 16, W = 16, PS = 4, C = 2, P = 4, LANES = 4;
  localparam int NT = (H / PS) * (W / PS);
  localparam longint WATCHDOG = 2000000;
  localparam real TOL_ABS = 0.02, TOL_REL = 0.02;

  edge_moe_top #(
    .D(D), .HEADS(HEADS), .MLP(MLP), .HM(HM), .LAYERS(LAYERS), .N_EXP(E), .TOPK(TOPK),
    .IMG_H(H), .IMG_W(W), .PATCH(PS), .CH(C), .P(P), .LANES(LANES)
  ) dut (
    .clk, .rst_n, .start, .task_id, .busy, .done, .out_base, .mem_req(req), .mem_rsp(rsp), .stats
  );
  dram_model #(.NP(16), .DEPTH(1 << 15)) dram (.clk, .req, .rsp);

`include "edge_moe_tb_body.svh"
endmodule
