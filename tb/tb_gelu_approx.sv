// tb_gelu_approx: compares gelu_approx with GELU(x) = x*Phi(x), where Phi is
// computed independently by Simpson integration of the Gaussian density
// with $exp. The allowed error is half a table step times the largest slope
// of delta (0.5) plus a few LSB.
module tb_gelu_approx;
  import edge_moe_pkg::*;
  act_t x, y;
  int checks = 0, failures = 0;
  gelu_approx dut (.x(x), .y(y));

  function automatic real phi(input real v);  // standard normal CDF
    real a, h, s, t;
    int  n;
    a = (v < 0.0) ? -v : v;
    if (a > 8.0) return (v < 0.0) ? 0.0 : 1.0;
    n = 400;
    h = a / n;
    s = 0.0;
    for (int i = 0; i <= n; i++) begin
      t = $exp(-0.5 * (i*h) * (i*h));
      s += ((i == 0 || i == n) ? 1.0 : ((i % 2) ? 4.0 : 2.0)) * t;
    end
    s = s * h / 3.0 * 0.3989422804014327;
    return (v < 0.0) ? 0.5 - s : 0.5 + s;
  endfunction

  task automatic check(input act_t xv);
    real xr, ref_v, got, err;
    x = xv; #1;
    xr = real'(xv) / 4194304.0;
    ref_v = xr * phi(xr);
    got = real'(y) / 4194304.0;
    err = got - ref_v; if (err < 0) err = -err;
    checks++;
    if (err > 0.5 / 256.0 + 4.0/4194304.0) begin
      failures++;
      if (failures < 10) $display("gelu mismatch x=%f got=%f ref=%f", xr, got, ref_v);
    end
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(0); check(act_t'(1) <<< 22); check(-(act_t'(1) <<< 22));
    check(act_t'(6) <<< 22); check(-(act_t'(6) <<< 22)); check(act_t'(300) <<< 22);
    for (int i = 0; i < 1500; i++) check(act_t'($urandom_range(0, 32'h0300_0000)) - act_t'(32'h0180_0000)); // [-6, 6]
    for (int i = 0; i < 500; i++)  check(act_t'($urandom_range(0, 32'h0080_0000)) - act_t'(32'h0040_0000)); // [-1, 1]
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
