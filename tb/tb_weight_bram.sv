// tb_weight_bram: writes random weights lane by lane into both banks and
// reads them back word by word, checking the one-cycle read latency and that
// the banks are independent (ping-pong).
module tb_weight_bram;
  import edge_moe_pkg::*;
  localparam int L = 4, D = 64;
  logic clk = 0, wr_en = 0; logic wr_bank = 0, rd_bank = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0; logic [1:0] wr_lane = 0;
  wgt_t wr_data = 0, rd_data[L];
  wgt_t model[2][D][L];
  int checks = 0, failures = 0, cycles = 0;
  weight_bram #(.LANES(L), .DEPTH(D), .BANKS(2)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (++cycles > 100000) begin
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int b = 0; b < 2; b++) for (int a = 0; a < D; a++) for (int l = 0; l < L; l++) begin
      @(negedge clk); wr_en = 1; wr_bank = b[0]; wr_addr = 6'(a); wr_lane = 2'(l);
      wr_data = wgt_t'($urandom); model[b][a][l] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int b = 0; b < 2; b++) for (int a = 0; a < D; a++) begin
      rd_bank = b[0]; rd_addr = 6'(a); @(negedge clk);
      for (int l = 0; l < L; l++) begin checks++; if (rd_data[l] != model[b][a][l]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
