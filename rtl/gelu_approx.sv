// gelu_approx: GELU(x) ~= ReLU(x) - delta(|x|), the paper's low-cost GELU.
//
// delta(x) = ReLU(x) - GELU(x) is even and lies in [0, 1), so only its
// values for x >= 0 are kept, and only their 22 unsigned fraction bits, as
// the paper describes. The table is sampled with a power-of-two step
// (2^-STEP_LOG2 = 2^-8 by default, our choice: the paper gives no value), so the index is |x|
// shifted right. It ends where delta rounds to zero in the 32-bit datatype
// (x = 5.5 for the default step); beyond it the output is plain ReLU(x).
// The nearest sample at or below |x| is used (no interpolation).
// The table is computed at elaboration from delta(x) = x*Q(x), Q the Gaussian
// upper tail, with Q(x) = 1/2 * erfc(x/sqrt 2) evaluated by the positive
// series  erf(z) = 2/sqrt(pi) * exp(-z^2) * sum_n 2^n z^(2n+1) / (2n+1)!!.
//
// Interface: x, y are act_t (22 fraction bits). Combinational.
module gelu_approx
  import edge_moe_pkg::*;
#(
  parameter int unsigned STEP_LOG2 = 8,
  parameter int unsigned DEPTH     = 1408
)(
  input  act_t x,
  output act_t y
);

  function automatic real exp_pos(input real a);  // e^a, a >= 0
    real term, sum;
    term = 1.0; sum = 1.0;
    for (int k = 1; k < 120; k++) begin
      term = term * a / k;
      sum  = sum + term;
    end
    return sum;
  endfunction

  function automatic logic [21:0] delta_q22(input int unsigned idx);
    real xv, z, term, sum, erfv, d;
    xv   = real'(idx) / real'(1 << STEP_LOG2);
    z    = xv / 1.4142135623730951;
    term = z; sum = z;
    for (int n = 1; n < 200; n++) begin
      term = term * 2.0 * z * z / real'(2 * n + 1);
      sum  = sum + term;
    end
    erfv = 1.1283791670955126 * sum / exp_pos(z * z);
    d    = xv * 0.5 * (1.0 - erfv);
    return 22'($rtoi(d * 4194304.0 + 0.5));
  endfunction

  logic [21:0] lut [DEPTH];
  for (genvar i = 0; i < DEPTH; i++) begin : g_lut
    localparam logic [21:0] V = delta_q22(i);
    assign lut[i] = V;
  end

  logic [31:0] ax;
  logic [31:0] idx;
  act_t        relu;

  always_comb begin
    ax   = x[31] ? 32'(-x) : 32'(x);
    idx  = ax >> (FRAC - STEP_LOG2);
    relu = x[31] ? '0 : x;
    if (x == ACT_MIN || idx >= DEPTH) y = relu;
    else                              y = relu - act_t'({10'd0, lut[idx[$clog2(DEPTH)-1:0]]});
  end

endmodule
