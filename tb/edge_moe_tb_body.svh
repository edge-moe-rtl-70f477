// edge_moe_tb_body.svh: shared body of the end-to-end testbench of
// edge_moe_top (included by tb_edge_moe_top, or by any wrapper that sets
// the sizes and instantiates the DUT as `dut` with a 16-port `dram`).
//
// It fills the DRAM with a random image and random weights (each weight
// matrix scaled by 1/sqrt(fan-in) so activations stay of order one), runs
// the model once for task 0 and once for task 1, and compares every output
// value with a floating-point model of the same network that uses the same
// quantised weights. The model follows the DRAM layout of edge_moe_ctrl, but
// is written out here independently.
//
// Mechanisms counted (each must happen at least once): ViT layer, MoE layer,
// expert skipped, weight load under compute (ping-pong overlap), compute
// waiting for a load, task switch, outputs that differ between the tasks.
// The experts run must equal the distinct experts the model selects, and the
// Q x K unit must take N^2/P + P - 1 iterations per head.

  localparam int K     = PS * PS * C;
  localparam int DH    = D / HEADS;
  localparam int HMAX  = (MLP > HM) ? MLP : HM;
  localparam int SHIFT = $clog2(DH) / 2;
  // DRAM layout
  localparam int PE_W  = H * W * C;
  localparam int PE_B  = PE_W + D * K;
  localparam int POS   = PE_B + D;
  localparam int L0    = POS + NT * D;
  localparam int O_QKVW = 2 * D, O_QKVB = O_QKVW + 3*D*D, O_PRJW = O_QKVB + 3*D,
                 O_PRJB = O_PRJW + D*D, O_LN2 = O_PRJB + D, O_MLP = O_LN2 + 2*D,
                 O_FC1B = O_MLP + MLP*D, O_FC2W = O_FC1B + MLP, O_FC2B = O_FC2W + D*MLP,
                 O_EXP = O_MLP + 2*E*D, ESZ = HM*D + HM + D*HM + D;
  localparam int VIT_SZ = O_FC2B + D, MOE_SZ = O_EXP + E*ESZ;

  logic clk = 0, rst_n = 0, start = 0, task_id = 0, busy, done;
  addr_t out_base;
  mem_req_t req [16];
  mem_rsp_t rsp [16];
  stats_t stats;
  int checks = 0, failures = 0;
  longint cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > WATCHDOG) begin
      failures++; $display("watchdog at cycle %0d", cycles);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
    end
  end

  function automatic int layer_base(int l);
    int b; b = L0;
    for (int j = 0; j < l; j++) b += (j % 2 == 0) ? VIT_SZ : MOE_SZ;
    return b;
  endfunction

  function automatic real wv(int a); return real'(signed'(dram.mem[a][15:0])) / 4096.0; endfunction
  function automatic real av(int a); return real'(signed'(dram.mem[a])) / 4194304.0; endfunction
  function automatic real ba(int a); return real'(signed'(dram.mem[a][15:0])) / 512.0; endfunction
  function automatic real bm(int a); return real'(signed'(dram.mem[a][15:0])) / 2048.0; endfunction

  function automatic real phi(input real v);
    real a, h, s, t; int n;
    a = (v < 0.0) ? -v : v;
    if (a > 8.0) return (v < 0.0) ? 0.0 : 1.0;
    n = 200; h = a / n; s = 0.0;
    for (int i = 0; i <= n; i++) begin
      t = $exp(-0.5 * (i*h) * (i*h));
      s += ((i == 0 || i == n) ? 1.0 : ((i % 2) ? 4.0 : 2.0)) * t;
    end
    s = s * h / 3.0 * 0.3989422804014327;
    return (v < 0.0) ? 0.5 - s : 0.5 + s;
  endfunction
  function automatic real gelu(real x); return x * phi(x); endfunction

  // Random fill helpers.
  task automatic fill_w(int base, int rows, int cols);
    int r; r = int'(4096.0 / $sqrt(real'(cols)));
    for (int k = 0; k < rows * cols; k++) dram.mem[base + k] = 32'(16'($signed($urandom_range(0, 2*r)) - r));
  endtask
  task automatic fill_raw(int base, int n, int r);
    for (int k = 0; k < n; k++) dram.mem[base + k] = 32'(16'($signed($urandom_range(0, 2*r)) - r));
  endtask
  task automatic fill_ln(int base);
    for (int k = 0; k < D; k++) begin
      dram.mem[base + k]     = 32'($urandom_range(2048, 6144));
      dram.mem[base + D + k] = 32'(16'($signed($urandom_range(0, 2048)) - 1024));
    end
  endtask

  // ---------------------------------------------------------------- model
  real X [NT][D], XN [NT][D], QKV [NT][3*D], ATT [NT][D], HID [NT][HMAX];
  bit  used [E];

  task automatic ref_ln(int gb);
    for (int t = 0; t < NT; t++) begin
      real m, v; m = 0; v = 0;
      for (int i = 0; i < D; i++) m += X[t][i];
      m /= D;
      for (int i = 0; i < D; i++) v += (X[t][i] - m) * (X[t][i] - m);
      v /= D;
      for (int i = 0; i < D; i++)
        XN[t][i] = (X[t][i] - m) / $sqrt(v + 1.0 / 1048576.0) * wv(gb + i) + wv(gb + D + i);
    end
  endtask

  task automatic ref_run(int tk);
    for (int t = 0; t < NT; t++) begin
      int py, px; py = t / (W / PS); px = t % (W / PS);
      for (int o = 0; o < D; o++) begin
        real a; a = ba(PE_B + o) + av(POS + t*D + o);
        for (int r = 0; r < PS; r++) for (int cl = 0; cl < PS; cl++) for (int ch = 0; ch < C; ch++)
          a += av(((py*PS + r)*W + px*PS + cl)*C + ch) * wv(PE_W + o*K + (r*PS + cl)*C + ch);
        X[t][o] = a;
      end
    end
    foreach (used[e]) used[e] = 0;
    for (int l = 0; l < LAYERS; l++) begin
      int lb; lb = layer_base(l);
      ref_ln(lb);
      for (int t = 0; t < NT; t++) for (int j = 0; j < 3*D; j++) begin
        real a; a = ba(lb + O_QKVB + j);
        for (int i = 0; i < D; i++) a += XN[t][i] * wv(lb + O_QKVW + j*D + i);
        QKV[t][j] = a;
      end
      for (int hh = 0; hh < HEADS; hh++) for (int r = 0; r < NT; r++) begin
        real s [NT]; real mx, sum;
        mx = -1e30; sum = 0;
        for (int k = 0; k < NT; k++) begin
          s[k] = 0;
          for (int e = 0; e < DH; e++) s[k] += QKV[r][hh*DH + e] * QKV[k][D + hh*DH + e];
          s[k] = s[k] / real'(1 << SHIFT);
          if (s[k] > mx) mx = s[k];
        end
        for (int k = 0; k < NT; k++) begin s[k] = $exp(s[k] - mx); sum += s[k]; end
        for (int e = 0; e < DH; e++) begin
          real a; a = 0;
          for (int k = 0; k < NT; k++) a += s[k] / sum * QKV[k][2*D + hh*DH + e];
          ATT[r][hh*DH + e] = a;
        end
      end
      for (int t = 0; t < NT; t++) begin
        real y [D];
        for (int o = 0; o < D; o++) begin
          y[o] = ba(lb + O_PRJB + o);
          for (int i = 0; i < D; i++) y[o] += ATT[t][i] * wv(lb + O_PRJW + o*D + i);
        end
        for (int o = 0; o < D; o++) X[t][o] += y[o];
      end
      ref_ln(lb + O_LN2);
      if (l % 2 == 0) begin
        for (int t = 0; t < NT; t++) begin
          for (int j = 0; j < MLP; j++) begin
            real a; a = bm(lb + O_FC1B + j);
            for (int i = 0; i < D; i++) a += XN[t][i] * wv(lb + O_MLP + j*D + i);
            HID[t][j] = gelu(a);
          end
          for (int o = 0; o < D; o++) begin
            real a; a = bm(lb + O_FC2B + o);
            for (int j = 0; j < MLP; j++) a += HID[t][j] * wv(lb + O_FC2W + o*MLP + j);
            X[t][o] += a;
          end
        end
      end else begin
        int gw; gw = lb + O_MLP + tk*E*D;
        for (int t = 0; t < NT; t++) begin
          real lg [E]; bit sel [E]; int pick [TOPK]; real g [TOPK]; real mx, sum;
          for (int e = 0; e < E; e++) begin
            lg[e] = 0; sel[e] = 0;
            for (int i = 0; i < D; i++) lg[e] += XN[t][i] * wv(gw + e*D + i);
          end
          for (int k = 0; k < TOPK; k++) begin
            int b; b = -1;
            for (int e = 0; e < E; e++) if (!sel[e] && (b < 0 || lg[e] > lg[b])) b = e;
            sel[b] = 1; pick[k] = b;
          end
          mx = lg[pick[0]]; sum = 0;
          for (int k = 0; k < TOPK; k++) begin g[k] = $exp(lg[pick[k]] - mx); sum += g[k]; end
          for (int k = 0; k < TOPK; k++) begin
            int eb; eb = lb + O_EXP + pick[k]*ESZ;
            used[pick[k]] = 1;
            for (int j = 0; j < HM; j++) begin
              real a; a = bm(eb + HM*D + j);
              for (int i = 0; i < D; i++) a += XN[t][i] * wv(eb + j*D + i);
              HID[t][j] = gelu(a);
            end
            for (int o = 0; o < D; o++) begin
              real a; a = bm(eb + HM*D + HM + D*HM + o);
              for (int j = 0; j < HM; j++) a += HID[t][j] * wv(eb + HM*D + HM + o*HM + j);
              X[t][o] += g[k] / sum * a;
            end
          end
        end
      end
    end
  endtask

  // ---------------------------------------------------------------- run
  real out0 [NT][D];
  int  n_diff_task = 0, n_bad_iter = 0, n_qk_runs = 0;
  always @(posedge clk) if (rst_n && dut.qk_done) begin
    n_qk_runs++;
    if (dut.qk_iter != NT*NT/P + P - 1) n_bad_iter++;
  end

  task automatic run_task(int tk);
    stats_t s0; longint c0; int used_n, nbad; real maxerr;
    s0 = stats; c0 = cycles;
    @(negedge clk) begin task_id = 1'(tk); start = 1; end
    @(negedge clk) start = 0;
    wait (done);
    $display("task %0d: %0d cycles", tk, cycles - c0);
    ref_run(tk);
    used_n = 0; foreach (used[e]) used_n += used[e];
    checks++;
    if (32'(stats.experts_run - s0.experts_run) != used_n * (LAYERS / 2) && LAYERS == 2) begin
      failures++; $display("experts run %0d, model uses %0d", stats.experts_run - s0.experts_run, used_n);
    end
    nbad = 0; maxerr = 0;
    for (int t = 0; t < NT; t++) for (int o = 0; o < D; o++) begin
      real got, err;
      got = av(int'(out_base) + t*D + o);
      err = got - X[t][o]; if (err < 0) err = -err;
      if (err > maxerr) maxerr = err;
      checks++;
      if (err > TOL_ABS + TOL_REL * ((X[t][o] < 0) ? -X[t][o] : X[t][o])) begin
        failures++; nbad++;
        if (nbad < 6) $display("task %0d t%0d o%0d got %f model %f", tk, t, o, got, X[t][o]);
      end
      if (tk == 0) out0[t][o] = got;
      else if (got != out0[t][o]) n_diff_task++;
    end
    $display("task %0d: max |error| %f, %0d values out of tolerance", tk, maxerr, nbad);
  endtask

  initial begin
    for (int k = 0; k < H*W*C; k++) dram.mem[k] = 32'($urandom_range(0, 1 << 22));
    fill_w(PE_W, D, K);
    fill_raw(PE_B, D, 128);
    for (int k = 0; k < NT*D; k++) dram.mem[POS + k] = 32'($signed($urandom_range(0, 1 << 21)) - (1 << 20));
    for (int l = 0; l < LAYERS; l++) begin
      int lb; lb = layer_base(l);
      fill_ln(lb); fill_w(lb + O_QKVW, 3*D, D); fill_raw(lb + O_QKVB, 3*D, 128);
      fill_w(lb + O_PRJW, D, D); fill_raw(lb + O_PRJB, D, 128); fill_ln(lb + O_LN2);
      if (l % 2 == 0) begin
        fill_w(lb + O_MLP, MLP, D); fill_raw(lb + O_FC1B, MLP, 512);
        fill_w(lb + O_FC2W, D, MLP); fill_raw(lb + O_FC2B, D, 512);
      end else begin
        fill_w(lb + O_MLP, 2*E, D);
        for (int e = 0; e < E; e++) begin
          int eb; eb = lb + O_EXP + e*ESZ;
          fill_w(eb, HM, D); fill_raw(eb + HM*D, HM, 512);
          fill_w(eb + HM*D + HM, D, HM); fill_raw(eb + HM*D + HM + D*HM, D, 512);
        end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_task(0);
    run_task(1);
    $display("stats: vit %0d moe %0d experts run %0d skipped %0d load stall %0d overlap %0d task switches %0d",
             stats.vit_blocks, stats.moe_blocks, stats.experts_run, stats.experts_skipped,
             stats.load_stall, stats.load_overlap, stats.task_switches);
    $display("QxK runs %0d with wrong iteration count %0d; values differing between tasks %0d",
             n_qk_runs, n_bad_iter, n_diff_task);
    checks++; if (stats.vit_blocks == 0)      begin failures++; $display("no ViT layer"); end
    checks++; if (stats.moe_blocks == 0)      begin failures++; $display("no MoE layer"); end
    checks++; if (stats.experts_skipped == 0) begin failures++; $display("no expert skipped"); end
    checks++; if (stats.load_overlap == 0)    begin failures++; $display("no load under compute"); end
    checks++; if (stats.load_stall == 0)      begin failures++; $display("no load stall"); end
    checks++; if (stats.task_switches == 0)   begin failures++; $display("no task switch"); end
    checks++; if (n_diff_task == 0)           begin failures++; $display("tasks give equal outputs"); end
    checks++; if (n_qk_runs != 2 * LAYERS * HEADS || n_bad_iter != 0) begin
      failures++; $display("QxK iteration count wrong");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
