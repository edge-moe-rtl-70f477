// exp_unit: fixed-point exponential for non-positive arguments.
//
// The softmax of the paper only ever needs exp(x - b) and exp(b - x_j) with
// the bias b at least as large as the other operand, so the argument is <= 0
// and the result lies in [0, 1]. The paper does not say how its exponent
// hardware works; this unit is the simplest accurate scheme we found:
//   exp(x) = 2^-t  with  t = -x * log2(e)  (22 fraction bits)
//   2^-t   = 2^-n * 2^-f1 * 2^-f2 * (1 - r*ln2)
// where n is the integer part of t (a right shift), f1 and f2 are the top
// two 6-bit groups of the fraction (two 64-entry tables, computed at
// elaboration by a constant function) and r is the remaining 10 fraction bits,
// handled by a first-order correction whose error is far below one LSB.
// A positive argument (never produced by the callers) is clamped to exp(0)=1.
//
// Interface: x and y are act_t (signed, 22 fraction bits). Purely
// combinational; the caller registers the result.
module exp_unit
  import edge_moe_pkg::*;
(
  input  act_t x,
  output act_t y
);

  localparam longint unsigned LOG2E_Q30 = 64'd1549082005;  // log2(e) * 2^30
  localparam longint unsigned LN2_Q30   = 64'd744261118;   // ln(2)   * 2^30

  // 2^-a for 0 <= a < 1, in Q30, by the Taylor series of exp(-a ln 2).
  function automatic logic [31:0] pow2_neg_q30(input real a);
    real term, sum, z;
    z    = a * 0.6931471805599453;
    term = 1.0;
    sum  = 1.0;
    for (int k = 1; k < 30; k++) begin
      term = -term * z / k;
      sum  = sum + term;
    end
    return 32'($rtoi(sum * 1073741824.0 + 0.5));
  endfunction

  logic [31:0] t1 [64];
  logic [31:0] t2 [64];
  for (genvar i = 0; i < 64; i++) begin : g_tab
    localparam logic [31:0] V1 = pow2_neg_q30(real'(i) / 64.0);
    localparam logic [31:0] V2 = pow2_neg_q30(real'(i) / 4096.0);
    assign t1[i] = V1;
    assign t2[i] = V2;
  end

  logic [63:0] t_full;
  logic [31:0] n_int;
  logic [21:0] f;
  logic [63:0] m1, m2, corr;

  always_comb begin
    t_full = 64'(unsigned'(-64'(x))) * LOG2E_Q30 >> 30;  // t with 22 fraction bits
    n_int  = 32'(t_full >> FRAC);
    f      = t_full[21:0];
    m1     = (64'(t1[f[21:16]]) * 64'(t2[f[15:10]])) >> 30;       // Q30
    corr   = (64'(f[9:0]) * LN2_Q30) >> FRAC;                      // r*ln2, Q30
    m2     = m1 - ((m1 * corr) >> 30);
    if (x >= 0)            y = ONE;
    else if (n_int >= 32)  y = '0;
    else                   y = act_t'((m2 >> (30 - FRAC)) >> n_int);
  end

endmodule
