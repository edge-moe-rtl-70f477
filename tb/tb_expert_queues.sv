// tb_expert_queues: pushes random (token, expert, score) selections, with
// some experts never chosen, and checks queue lengths, contents and the
// metaqueue (order of first use, unused experts absent) against a model.
module tb_expert_queues;
  import edge_moe_pkg::*;
  localparam int NE = 16, NT = 128;
  logic clk = 0, rst_n = 0, clear = 0, push = 0;
  logic [3:0] push_expert, meta_idx, meta_expert, rd_expert;
  logic [6:0] push_token, rd_idx, rd_token;
  logic [4:0] meta_len;
  logic [7:0] rd_len;
  act_t push_score, rd_score;
  int checks = 0, failures = 0, cycles = 0;
  expert_queues #(.N_EXP(NE), .N_TOK(NT)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (++cycles > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int mtok[NE][$]; act_t msc[NE][$]; int mmeta[$];
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      clear = 1; @(negedge clk); clear = 0;
      for (int e = 0; e < NE; e++) begin mtok[e] = {}; msc[e] = {}; end
      mmeta = {};
      for (int t = 0; t < NT; t++) begin
        int used[NE];
        for (int e = 0; e < NE; e++) used[e] = 0;
        for (int k = 0; k < 4; k++) begin
          int e;
          do e = $urandom_range(0, NE-1); while (used[e] || e == 3 || e == 11 - round);
          used[e] = 1;
          push = 1; push_expert = 4'(e); push_token = 7'(t); push_score = act_t'($urandom);
          if (mtok[e].size() == 0) mmeta.push_back(e);
          mtok[e].push_back(t); msc[e].push_back(push_score);
          @(negedge clk);
        end
      end
      push = 0; @(negedge clk);
      checks++; if (int'(meta_len) != mmeta.size()) begin failures++; $display("meta_len %0d vs %0d", meta_len, mmeta.size()); end
      foreach (mmeta[i]) begin
        meta_idx = 4'(i); #1; checks++; if (int'(meta_expert) != mmeta[i]) failures++;
      end
      for (int e = 0; e < NE; e++) begin
        rd_expert = 4'(e); #1;
        checks++; if (int'(rd_len) != mtok[e].size()) failures++;
        foreach (mtok[e][i]) begin
          rd_idx = 7'(i); #1; checks++;
          if (int'(rd_token) != mtok[e][i] || rd_score != msc[e][i]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
