// attn_mv_unit: M' x V with the paper's attention reordering applied "in
// reverse", and the last step of the single-pass softmax.
//
// The slot schedule is the one of attn_qk_unit: slot s works on output row
// g*P + s during iterations g*N + s ... g*N + s + N - 1 while V_(t mod N)
// streams by, so V is read at one token per iteration for any P. Instead of
// producing P scores per iteration, the unit loads the P scores x at those
// positions and turns each into a probability exp(x - b) / s on the fly,
// with the row's bias b and sum s written by the Q x K unit (read when a slot
// starts its row). The probabilities weight V_k and accumulate into a cache
// of P output tokens. When a row has seen all N values of V, its token is
// final and is written back while the slot starts its next row.
//
// One iteration: P + 2 cycles read the starting slot's (b, s) and the P
// scores (one word per cycle on the score port; one shared exp_unit and one
// divider convert them), then dh cycles stream V_k (V port) with P MACs per
// cycle. A finished token is streamed to a write-back buffer during its last
// iteration and written on the output port during the next. Overlapping the
// score reads with the V stream is left out (our simplification); the
// iteration count is the paper's N*N/P + P - 1.
//
// Timing: start with cfg (k_base = V); done pulses after the last write.
// Latency about (N*N/P + P - 1) * (dh + P + 2) cycles.
module attn_mv_unit
  import edge_moe_pkg::*;
#(
  parameter int unsigned P      = 4,
  parameter int unsigned MAX_DH = 64
)(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  attn_cfg_t cfg,
  output logic      busy,
  output logic      done,
  output logic [31:0] iterations,
  output mem_req_t  s_mem_req,
  input  mem_rsp_t  s_mem_rsp,
  output mem_req_t  v_mem_req,
  input  mem_rsp_t  v_mem_rsp,
  output mem_req_t  o_mem_req,
  input  mem_rsp_t  o_mem_rsp
);

  attn_cfg_t   c;
  logic        run;
  logic [15:0] cy, kk, iter_len;
  logic [31:0] t;
  logic [15:0] ph  [P];
  logic [15:0] row [P];
  logic        act [P];
  logic        started [P];
  logic        fin_all;

  logic        d_valid;
  logic [15:0] d_cy;
  logic [15:0] d_ph  [P];
  logic [15:0] d_row [P];
  logic        d_act [P];

  act_t        sl_b [P], sl_s [P], prob [P];
  act_t        cache [P][MAX_DH];

  logic        wb_valid;
  logic [15:0] wb_row, wb_i;
  logic        wb_fill_next;       // a slot finishes in the current data cycle
  logic [15:0] wb_fill_row_next;
  localparam int unsigned SWD = (P > 1) ? $clog2(P) : 1;
  act_t        wb [MAX_DH];
  logic        busy_q;

  assign iter_len = c.dh + 16'(P) + 16'd2;
  assign busy     = run || d_valid || wb_valid || (c.n != 0 && !fin_all);

  always_comb begin
    fin_all = 1'b1;
    for (int s = 0; s < P; s++) if (act[s] || !started[s]) fin_all = 1'b0;
  end

  // ---------------- issue: slot schedule ----------------
  logic iter_end;
  assign iter_end = run && (cy == iter_len - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; cy <= '0; kk <= '0; t <= '0; c <= '0; iterations <= '0;
      for (int s = 0; s < P; s++) begin ph[s] <= '0; row[s] <= '0; act[s] <= 1'b0; started[s] <= 1'b1; end
    end else if (start && !busy) begin
      c <= cfg; run <= 1'b1; cy <= '0; kk <= '0; t <= '0;
      for (int s = 0; s < P; s++) begin
        ph[s] <= '0; row[s] <= 16'(s); act[s] <= (s == 0); started[s] <= (s == 0);
      end
    end else if (run) begin
      if (iter_end) begin
        logic more;
        more = 1'b0;
        cy <= '0;
        kk <= (kk == c.n - 1) ? '0 : kk + 1'b1;
        t  <= t + 1;
        for (int s = 0; s < P; s++) begin
          if (act[s] && !(ph[s] == c.n - 1 && row[s] + 16'(P) >= c.n)) more = 1'b1;
          if (!started[s] && 16'(s) < c.n) more = 1'b1;
          if (act[s]) begin
            if (ph[s] == c.n - 1) begin
              ph[s] <= '0;
              if (row[s] + 16'(P) < c.n) row[s] <= row[s] + 16'(P);
              else act[s] <= 1'b0;
            end else ph[s] <= ph[s] + 1'b1;
          end else if (!started[s] && t + 1 == 32'(s) && 16'(s) < c.n) begin
            act[s] <= 1'b1; started[s] <= 1'b1; ph[s] <= '0;
          end else if (!started[s] && 16'(s) >= c.n) started[s] <= 1'b1;
        end
        if (!more) begin run <= 1'b0; iterations <= t + 1; end
      end else cy <= cy + 1'b1;
    end
  end

  // score-port reads: cy 0/1 = bias/sum of the starting slot, 2..P+1 = scores
  always_comb begin
    s_mem_req = '0; v_mem_req = '0;
    if (run && cy < 2) begin
      for (int s = 0; s < P; s++)
        if (act[s] && ph[s] == 0) begin
          s_mem_req.valid = 1'b1;
          s_mem_req.addr  = c.st_base + addr_t'(32'(row[s]) * 2 + 32'(cy));
        end
    end else if (run && cy < 16'(P) + 2) begin
      for (int s = 0; s < P; s++)
        if (32'(cy) == 32'(s) + 2 && act[s]) begin
          s_mem_req.valid = 1'b1;
          s_mem_req.addr  = c.s_base + addr_t'(32'(row[s]) * 32'(c.n) + 32'(kk));
        end
    end else if (run) begin
      v_mem_req.valid = 1'b1;
      v_mem_req.addr  = c.k_base + addr_t'(32'(kk) * 32'(c.stride) + 32'(cy) - 32'(P) - 2);
    end
  end

  // ---------------- data stage ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_cy <= '0;
      for (int s = 0; s < P; s++) begin d_ph[s] <= '0; d_row[s] <= '0; d_act[s] <= 1'b0; end
    end else begin
      d_valid <= run; d_cy <= cy;
      for (int s = 0; s < P; s++) begin d_ph[s] <= ph[s]; d_row[s] <= row[s]; d_act[s] <= act[s] && run; end
    end
  end

  // softmax normalisation of the incoming score: exp(x - b) / s
  act_t        x_in, b_sel, s_sel, e_val, p_val;
  logic signed [32:0] dx;
  logic [SWD-1:0] psel;
  always_comb begin
    psel  = SWD'(32'(d_cy) - 2);
    x_in  = act_t'(s_mem_rsp.rdata);
    b_sel = sl_b[psel];
    s_sel = sl_s[psel];
    dx    = 33'(x_in) - 33'(b_sel);
    if (dx > 0) dx = '0;                                   // cannot happen: b is the row maximum
    p_val = (s_sel <= 0) ? '0 : act_t'((64'(e_val) <<< FRAC) / 64'(s_sel));
  end
  exp_unit u_exp (.x((dx < -33'sd2147483648) ? ACT_MIN : act_t'(dx)), .y(e_val));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wb_valid <= 1'b0; wb_row <= '0; wb_i <= '0;
      for (int s = 0; s < P; s++) begin sl_b[s] <= '0; sl_s[s] <= ONE; prob[s] <= '0; end
    end else begin
      if (d_valid) begin
        for (int s = 0; s < P; s++) begin
          if (d_act[s] && d_ph[s] == 0 && d_cy == 0) sl_b[s] <= act_t'(s_mem_rsp.rdata);
          if (d_act[s] && d_ph[s] == 0 && d_cy == 1) sl_s[s] <= act_t'(s_mem_rsp.rdata);
        end
        if (d_cy >= 2 && d_cy < 16'(P) + 2) prob[psel] <= p_val;
        if (d_cy >= 16'(P) + 2) begin
          for (int s = 0; s < P; s++) if (d_act[s]) begin
            act_t nv;
            nv = sat32(((d_ph[s] == 0) ? 64'sd0 : 64'(cache[s][d_cy - 16'(P) - 2]))
                       + ((64'(prob[s]) * 64'(act_t'(v_mem_rsp.rdata))) >>> FRAC));
            cache[s][d_cy - 16'(P) - 2] <= nv;
            if (d_ph[s] == c.n - 1) wb[d_cy - 16'(P) - 2] <= nv;
          end
        end
        if (d_cy == iter_len - 1 && wb_fill_next) begin
          wb_valid <= 1'b1; wb_i <= '0; wb_row <= wb_fill_row_next;
        end
      end
      if (wb_valid && !(d_valid && d_cy == iter_len - 1 && wb_fill_next)) begin
        if (wb_i == c.dh - 1) wb_valid <= 1'b0;
        else wb_i <= wb_i + 1'b1;
      end
    end
  end

  // a slot finishing in this iteration (its last V element is in the data stage)
  always_comb begin
    wb_fill_next = 1'b0; wb_fill_row_next = '0;
    for (int s = 0; s < P; s++)
      if (d_act[s] && d_ph[s] == c.n - 1) begin wb_fill_next = 1'b1; wb_fill_row_next = d_row[s]; end
  end

  always_comb begin
    o_mem_req = '0;
    if (wb_valid) begin
      o_mem_req.valid = 1'b1; o_mem_req.we = 1'b1;
      o_mem_req.addr  = c.o_base + addr_t'(32'(wb_row) * 32'(c.o_stride) + 32'(wb_i));
      o_mem_req.wdata = wb[wb_i];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin done <= 1'b0; busy_q <= 1'b0; end
    else begin done <= busy_q && !busy; busy_q <= busy; end
  end

  // A finished token must be written out before the next one is complete.
  a_wb_free: assert property (@(posedge clk) disable iff (!rst_n)
    (d_valid && d_cy == iter_len - 1 && wb_fill_next) |-> (!wb_valid || wb_i == c.dh - 1));

endmodule
