// tb_exp_unit: checks exp_unit against the simulator's real $exp over
// random and corner arguments (x <= 0), allowing 3 LSB of error.
module tb_exp_unit;
  import edge_moe_pkg::*;
  act_t x, y;
  int checks = 0, failures = 0;
  exp_unit dut (.x(x), .y(y));

  task automatic check(input act_t xv);
    real ref_v, got;
    x = xv; #1;
    ref_v = $exp(real'(xv) / 4194304.0);
    got   = real'(y) / 4194304.0;
    checks++;
    if ((got - ref_v) > 3.0/4194304.0 || (ref_v - got) > 3.0/4194304.0) begin
      failures++;
      if (failures < 10) $display("exp mismatch x=%f got=%f ref=%f", real'(xv)/4194304.0, got, ref_v);
    end
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(0); check(-1); check(-(act_t'(1) <<< 22)); check(-(act_t'(7) <<< 22));
    check(ACT_MIN);
    for (int i = 0; i < 2000; i++) check(-act_t'($urandom_range(0, 32'h0400_0000)));  // x in [-16, 0]
    for (int i = 0; i < 500; i++)  check(-act_t'($urandom_range(0, 32'h0040_0000)));  // x in [-1, 0]
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
