// attn_qk_unit: Q x K^T with the paper's attention reordering and the
// single-pass softmax statistics (techniques 1 and 2 of the paper).
//
// The unit keeps P Q-tokens in local buffers (slots) and streams one K token
// per iteration, multiplying it with every buffered Q token, so the K
// bandwidth is one token per iteration whatever P is. Slot s holds Q row
// g*P + s during iterations g*N + s ... g*N + s + N - 1 while K_(t mod N)
// streams by: each row sees every K exactly once, the outputs a row
// "missed" at the start of the K matrix are made up when K wraps around, and
// a slot is refilled with its next row right after its last output. A head
// takes N*N/P + P - 1 iterations (the paper's Table 2).
//
// One iteration lasts dh cycles: K_k streams one element per cycle on its
// own port, and a slot that starts a row reads its Q row on a second port in
// the same cycles (the Q element is used directly and stored). Each active
// slot does one MAC per cycle. At the end of the iteration each active slot
// has one raw score x = (q . k) * 2^-shift; it is written to DRAM and fed to
// the slot's online_softmax. When a row's N scores are done, its bias b and
// sum s are written next to the scores, so no second pass is needed: the
// M' x V unit turns scores into probabilities while reading them.
// Writes (up to P scores and 2 statistics per iteration) go through a
// pending-write set drained one word per cycle; dh >= P + 2 keeps up.
//
// Timing: start with cfg; done pulses after the last write. Latency is
// (N*N/P + P - 1) * dh cycles plus a few cycles of pipeline and drain.
// Our choices: element-serial token streaming, the write arbitration and the
// score scaling shift (the paper does not mention the attention scale).
module attn_qk_unit
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
  output logic [31:0] iterations,   // iterations of the last run
  output mem_req_t  q_mem_req,
  input  mem_rsp_t  q_mem_rsp,
  output mem_req_t  k_mem_req,
  input  mem_rsp_t  k_mem_rsp,
  output mem_req_t  s_mem_req,
  input  mem_rsp_t  s_mem_rsp
);

  localparam int unsigned SW = (P > 1) ? $clog2(P) : 1;

  attn_cfg_t   c;
  logic        run;                       // issue stage active
  logic [15:0] e, kk;                     // element and K index (issue)
  logic [31:0] t;                         // iteration (issue)
  logic [15:0] ph  [P];                   // position of the slot within its row
  logic [15:0] row [P];
  logic        act [P];
  logic        started [P];
  logic        fin_all;

  // data stage copies
  logic        d_valid;
  logic [15:0] d_e, d_kk;
  logic [15:0] d_ph  [P];
  logic [15:0] d_row [P];
  logic        d_act [P];

  act_t        qbuf [P][MAX_DH];
  logic signed [63:0] acc [P];
  logic signed [63:0] acc_new [P];
  act_t        score [P];

  // softmax
  logic        sm_clear [P];
  logic        sm_valid [P];
  act_t        sm_bias [P], sm_sum [P];

  // pending writes
  logic        sc_pend [P];
  addr_t       sc_addr [P];
  act_t        sc_data [P];
  logic        fin_req [P];
  logic [15:0] fin_row [P];
  logic [1:0]  st_pend;                   // 2: bias and sum, 1: sum
  addr_t       st_addr;
  act_t        st_b, st_s;
  logic        any_pend;
  logic        fin_any;
  logic        busy_q;

  assign busy = run || d_valid || any_pend || (c.n != 0 && !fin_all);

  // ---------------- issue stage ----------------
  logic iter_end;
  assign iter_end = run && (e == c.dh - 1);

  always_comb begin
    fin_all = 1'b1;
    for (int s = 0; s < P; s++) if (act[s] || !started[s]) fin_all = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; e <= '0; kk <= '0; t <= '0; c <= '0; iterations <= '0;
      for (int s = 0; s < P; s++) begin ph[s] <= '0; row[s] <= '0; act[s] <= 1'b0; started[s] <= 1'b1; end
    end else if (start && !busy) begin
      c <= cfg; run <= 1'b1; e <= '0; kk <= '0; t <= '0;
      for (int s = 0; s < P; s++) begin
        ph[s] <= '0; row[s] <= 16'(s);
        act[s] <= (s == 0); started[s] <= (s == 0);
      end
    end else if (run) begin
      if (iter_end) begin
        e  <= '0;
        kk <= (kk == c.n - 1) ? '0 : kk + 1'b1;
        t  <= t + 1;
        for (int s = 0; s < P; s++) begin
          if (act[s]) begin
            if (ph[s] == c.n - 1) begin
              ph[s] <= '0;
              if (row[s] + 16'(P) < c.n) row[s] <= row[s] + 16'(P);
              else act[s] <= 1'b0;
            end else ph[s] <= ph[s] + 1'b1;
          end else if (!started[s] && t + 1 == 32'(s) && 16'(s) < c.n) begin
            act[s] <= 1'b1; started[s] <= 1'b1; ph[s] <= '0;
          end else if (!started[s] && 16'(s) >= c.n) begin
            started[s] <= 1'b1;            // fewer rows than slots
          end
        end
      end else e <= e + 1'b1;
      // stop after the last iteration of the last row
      if (iter_end) begin
        logic more;
        more = 1'b0;
        for (int s = 0; s < P; s++) begin
          if (act[s] && !(ph[s] == c.n - 1 && row[s] + 16'(P) >= c.n)) more = 1'b1;
          if (!started[s] && 16'(s) < c.n) more = 1'b1;
        end
        if (!more) begin run <= 1'b0; iterations <= t + 1; end
      end
    end
  end

  always_comb begin
    k_mem_req = '0; q_mem_req = '0;
    k_mem_req.valid = run;
    k_mem_req.addr  = c.k_base + addr_t'(32'(kk) * 32'(c.stride) + 32'(e));
    for (int s = 0; s < P; s++)
      if (run && act[s] && ph[s] == 0) begin
        q_mem_req.valid = 1'b1;
        q_mem_req.addr  = c.q_base + addr_t'(32'(row[s]) * 32'(c.stride) + 32'(e));
      end
  end

  // ---------------- data stage ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_e <= '0; d_kk <= '0;
      for (int s = 0; s < P; s++) begin d_ph[s] <= '0; d_row[s] <= '0; d_act[s] <= 1'b0; end
    end else begin
      d_valid <= run; d_e <= e; d_kk <= kk;
      for (int s = 0; s < P; s++) begin d_ph[s] <= ph[s]; d_row[s] <= row[s]; d_act[s] <= act[s] && run; end
    end
  end

  always_comb begin
    for (int s = 0; s < P; s++) begin
      act_t qv;
      qv = (d_ph[s] == 0) ? act_t'(q_mem_rsp.rdata) : qbuf[s][d_e];
      acc_new[s] = ((d_e == 0) ? 64'sd0 : acc[s]) + 64'(qv) * 64'(act_t'(k_mem_rsp.rdata));
      score[s]   = sat32(acc_new[s] >>> (FRAC + 32'(c.shift)));
      sm_valid[s] = d_valid && d_act[s] && (d_e == c.dh - 1);
      sm_clear[s] = d_valid && d_act[s] && (d_e == 0) && (d_ph[s] == 0);
    end
  end

  for (genvar s = 0; s < P; s++) begin : g_sm
    online_softmax u_sm (.clk, .rst_n, .clear(sm_clear[s]), .x_valid(sm_valid[s]), .x(score[s]),
                         .bias(sm_bias[s]), .sum(sm_sum[s]));
  end

  // ---------------- accumulation and write-back ----------------
  logic [SW:0] wsel;   // lowest pending score, P if none
  always_comb begin
    wsel = (SW+1)'(P);
    for (int s = P - 1; s >= 0; s--) if (sc_pend[s]) wsel = (SW+1)'(s);
    any_pend = (wsel != (SW+1)'(P)) || (st_pend != 0);
    for (int s = 0; s < P; s++) if (fin_req[s]) any_pend = 1'b1;
    s_mem_req = '0;
    if (wsel != (SW+1)'(P)) begin
      s_mem_req.valid = 1'b1; s_mem_req.we = 1'b1;
      s_mem_req.addr  = sc_addr[wsel[SW-1:0]]; s_mem_req.wdata = sc_data[wsel[SW-1:0]];
    end else if (st_pend != 0) begin
      s_mem_req.valid = 1'b1; s_mem_req.we = 1'b1;
      s_mem_req.addr  = (st_pend == 2) ? st_addr : st_addr + 1'b1;
      s_mem_req.wdata = (st_pend == 2) ? st_b : st_s;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st_pend <= '0; st_addr <= '0; st_b <= '0; st_s <= '0;
      for (int s = 0; s < P; s++) begin sc_pend[s] <= 1'b0; fin_req[s] <= 1'b0; acc[s] <= '0; fin_row[s] <= '0; end
    end else begin
      if (wsel != (SW+1)'(P)) sc_pend[wsel[SW-1:0]] <= 1'b0;
      else if (st_pend != 0) st_pend <= st_pend - 1'b1;
      for (int s = 0; s < P; s++) begin
        fin_req[s] <= 1'b0;
        if (d_valid && d_act[s]) begin
          acc[s] <= acc_new[s];
          if (d_ph[s] == 0) qbuf[s][d_e] <= act_t'(q_mem_rsp.rdata);
          if (d_e == c.dh - 1) begin
            sc_pend[s] <= 1'b1;
            sc_addr[s] <= c.s_base + addr_t'(32'(d_row[s]) * 32'(c.n) + 32'(d_kk));
            sc_data[s] <= score[s];
            if (d_ph[s] == c.n - 1) begin fin_req[s] <= 1'b1; fin_row[s] <= d_row[s]; end
          end
        end
        // the cycle after a row's last score: its bias and sum are final
        if (fin_req[s]) begin
          st_pend <= 2'd2;
          st_addr <= c.st_base + addr_t'(32'(fin_row[s]) * 2);
          st_b    <= sm_bias[s];
          st_s    <= sm_sum[s];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin done <= 1'b0; busy_q <= 1'b0; end
    else begin done <= busy_q && !busy; busy_q <= busy; end
  end

  // Rows finish at least dh cycles apart, so the previous statistics have
  // been written when the next row finishes.
  always_comb begin
    fin_any = 1'b0;
    for (int s = 0; s < P; s++) if (fin_req[s]) fin_any = 1'b1;
  end
  a_stats_drained: assert property (@(posedge clk) disable iff (!rst_n)
    fin_any |-> st_pend == 2'd0);

endmodule
