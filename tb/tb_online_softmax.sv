// tb_online_softmax: feeds the paper's example sequence {0.2, 0.1, 0.3} and
// random sequences to online_softmax, then compares bias with the maximum
// and sum with sum(exp(x - max)) computed in real arithmetic.
module tb_online_softmax;
  import edge_moe_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, x_valid = 0;
  act_t x, bias, sum;
  int checks = 0, failures = 0, cycles = 0;
  online_softmax dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 200000) begin
      failures++; $display("watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
    end
  end

  task automatic run_seq(input real xs[$]);
    real mx, s;
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    mx = -1.0e30;
    foreach (xs[i]) if (xs[i] > mx) mx = xs[i];
    s = 0.0;
    foreach (xs[i]) s += $exp(xs[i] - mx);
    foreach (xs[i]) begin
      x = act_t'($rtoi(xs[i] * 4194304.0)); x_valid = 1; @(negedge clk);
    end
    x_valid = 0; @(negedge clk);
    checks += 2;
    if (bias != act_t'($rtoi(mx * 4194304.0))) begin failures++; $display("bias mismatch %f %f", real'(bias)/4194304.0, mx); end
    if ((real'(sum)/4194304.0 - s) > 1e-4 * xs.size() || (s - real'(sum)/4194304.0) > 1e-4 * xs.size()) begin
      failures++; $display("sum mismatch %f %f", real'(sum)/4194304.0, s);
    end
  endtask

  initial begin
    real xs[$];
    repeat (3) @(negedge clk); rst_n = 1;
    xs = '{0.2, 0.1, 0.3};
    run_seq(xs);
    checks++;
    if (sum < act_t'($rtoi(((1.0 + $exp(-0.1)) * $exp(-0.1) + 1.0) * 4194304.0)) - 20 ||
        sum > act_t'($rtoi(((1.0 + $exp(-0.1)) * $exp(-0.1) + 1.0) * 4194304.0)) + 20) failures++;
    for (int t = 0; t < 50; t++) begin
      xs = {};
      for (int i = 0; i < 128; i++) xs.push_back((real'($urandom_range(0, 4000)) - 2000.0) / 250.0);
      run_seq(xs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
