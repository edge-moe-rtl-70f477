// online_softmax: single-pass softmax bias and denominator (Algorithm 1 of
// the paper).
//
// For a stream of scores x_j it keeps the bias b = max(x) and the sum
// s = sum_j exp(x_j - b) at the same time. When a new score exceeds b, the
// sum so far is rescaled by exp(b - x_j) and 1 is added (the new element's
// own term); otherwise exp(x_j - b) is added. The comparison is strict, as
// printed in the algorithm. `clear` sets b to the most negative value of the
// datatype (the paper's -infinity) and s to 0. The order of the scores does
// not matter. One exp_unit is shared by both branches; its argument is the
// negative difference of x and b, computed with saturation so that the
// -infinity start value cannot wrap.
//
// Timing: one score per cycle; bias/sum are registered and show the effect
// of a score in the cycle after x_valid. clear has priority over x_valid.
module online_softmax
  import edge_moe_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic x_valid,
  input  act_t x,
  output act_t bias,
  output act_t sum
);

  logic        new_max;
  logic signed [32:0] diff;
  act_t        arg, e;

  exp_unit u_exp (.x(arg), .y(e));

  always_comb begin
    new_max = (x > bias);
    diff    = new_max ? (33'(bias) - 33'(x)) : (33'(x) - 33'(bias));
    arg     = (diff < -33'sd2147483648) ? ACT_MIN : act_t'(diff);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      bias <= ACT_MIN;
      sum  <= '0;
    end else if (x_valid) begin
      if (new_max) begin
        sum  <= sat32(((64'(sum) * 64'(e)) >>> FRAC) + 64'(ONE));
        bias <= x;
      end else begin
        sum  <= sat32(64'(sum) + 64'(e));
      end
    end
  end

endmodule
