// tb_graphleap_top: end-to-end test of the accelerator at its default
// parameters.
//
// Runs complete multi-block inferences and compares every output feature
// with a reference model written here from the ViG / GraphLeap equations:
// kNN graph with dilation (lower index wins ties), G(0) = G(X0) and
// G(l) = G(X(l-1)), U = X W_in, m = max_j (u_j - u_i), per-head graph
// convolution, W_out + residual, FFN with residual, all in the same Q8.8
// fixed point as the hardware. Weights come from a behavioural HBM model that
// computes each word from its address (no stored table) and answers with a
// programmable throughput.
//
// Runs:
//   A  N = 40,  D = 48, 3 blocks, dilation 2, GELU, slow HBM  (prefetch-bound
//      stage, partial node tile, heads straddling channel tiles, padding)
//   B  N = 640, D = 16, 3 blocks, dilation 1, ReLU, fast HBM (GCE-bound)
//   S  N = 24,  D = 16, 2 blocks, dilation 2: a single partial node tile
//   C  N = 196, D = 192, 2 blocks, dilation 1, GELU: one ViG-Ti block shape
//      (224x224 input, 14x14 patches).
// Mechanism counters that must be non-zero over all runs: gather bank
// conflicts, GCE-bound stages, FUE-bound stages, prefetch-bound stages,
// dilation > 1 and the bootstrap graph (graphs built
// = blocks). The GCE output-bank stall is reported but not required: with
// the edge FIFO always drained, a node tile's scan (N x tiles cycles, N > P_N
// whenever there is a next tile) always outlasts the P_N-cycle hand-off, so
// the stall cannot occur in the assembled design; its block test provokes
// it with back-pressure. Run B must take between 1 and 1.5 times L graph builds at the
// paper's T_GCE rate.
module tb_graphleap_top;
  import gl_pkg::*;

  localparam int P_N = 32, P_D = 32, H = 16, K = 9, DEPTH = 1024, NMAX = 640, DMAX = 192;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_start = 0;
  logic [7:0]  cfg_layers;
  logic [12:0] cfg_nodes;
  logic [15:0] cfg_dim;
  logic [1:0]  cfg_dil;
  act_e        cfg_act;
  logic        busy, done;
  logic [H-1:0]                     host_wr_en = '0, host_rd_en = '0;
  logic [H-1:0][9:0]                host_wr_addr, host_rd_addr;
  feat_t [H-1:0][P_D-1:0]           host_wr_data, host_rd_data;
  logic        hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  logic [31:0] hbm_req_addr;
  feat_t [P_D-1:0] hbm_rsp_data;
  logic [31:0] s_gce_bound, s_fue_bound, s_pf_bound, s_conf, s_gstall;
  logic [7:0]  s_graphs;

  graphleap_top dut (
    .clk, .rst_n,
    .cfg_start, .cfg_layers, .cfg_nodes, .cfg_dim, .cfg_dil, .cfg_act,
    .busy, .done,
    .host_wr_en, .host_wr_addr, .host_wr_data,
    .host_rd_en, .host_rd_addr, .host_rd_data,
    .hbm_req_valid, .hbm_req_ready, .hbm_req_addr, .hbm_rsp_valid, .hbm_rsp_data,
    .stat_gce_bound (s_gce_bound), .stat_fue_bound (s_fue_bound), .stat_pf_bound (s_pf_bound),
    .stat_conflicts (s_conf), .stat_gce_stalls (s_gstall), .stat_graphs (s_graphs)
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ------------------------------------------------------------ HBM model
  function automatic feat_t wgen(input int unsigned addr, input int e);
    int unsigned x;
    x = addr * 32 + 32'(e);
    x = x * 1103515245 + 12345;
    x = x ^ (x >> 13);
    return feat_t'(int'((x >> 7) & 31) - 16);
  endfunction

  int hbm_gap = 1;            // cycles between responses
  int unsigned rsp_q[$];
  int gap_cnt = 0;
  assign hbm_req_ready = (rsp_q.size() < 64);
  always @(posedge clk) begin
    if (hbm_req_valid && hbm_req_ready) rsp_q.push_back(hbm_req_addr);
    hbm_rsp_valid <= 1'b0;
    if (gap_cnt > 0) gap_cnt <= gap_cnt - 1;
    else if (rsp_q.size() > 0) begin
      int unsigned a;
      a = rsp_q.pop_front();
      hbm_rsp_valid <= 1'b1;
      for (int e = 0; e < P_D; e++) hbm_rsp_data[e] <= wgen(a, e);
      gap_cnt <= hbm_gap - 1;
    end
  end

  // ------------------------------------------------------ reference model
  feat_t X [NMAX][4*DMAX];
  feat_t U [NMAX][DMAX];
  feat_t M [NMAX][DMAX];
  feat_t T [NMAX][DMAX];
  feat_t Y [NMAX][DMAX];
  feat_t Hd [NMAX][4*DMAX];
  feat_t XP [NMAX][DMAX];   // previous layer input (graph source)
  int    NBR [NMAX][K];

  function automatic feat_t wt(input int l, input int part, input int row, input int col,
                               input int d, input int otiles);
    int unsigned t, dh, base;
    t = (d + 31) / 32; dh = d / H;
    base = l * wl_off(d, t, dh, 10) + wl_off(d, t, dh, part);
    return wgen(base + row * otiles + col / 32, col % 32);
  endfunction

  function automatic feat_t bias(input int l, input int part, input int col, input int d);
    int unsigned t, dh, base;
    t = (d + 31) / 32; dh = d / H;
    base = l * wl_off(d, t, dh, 10) + wl_off(d, t, dh, part);
    return wgen(base + col / 32, col % 32);
  endfunction

  task automatic build_graph(input int n, input int d, input int dil);
    longint dd[NMAX];
    int     ord[NMAX];
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < n; j++) begin
        dd[j] = 0;
        for (int c = 0; c < d; c++) begin
          longint df;
          df = longint'(XP[i][c]) - longint'(XP[j][c]);
          dd[j] += df * df;
        end
        ord[j] = j;
      end
      // stable selection of the K*dil smallest
      for (int s = 0; s < K * dil; s++) begin
        int b;
        b = s;
        for (int j = s + 1; j < n; j++)
          if (dd[ord[j]] < dd[ord[b]] || (dd[ord[j]] == dd[ord[b]] && ord[j] < ord[b])) b = j;
        begin int tmp; tmp = ord[s]; ord[s] = ord[b]; ord[b] = tmp; end
      end
      for (int s = 0; s < K; s++) NBR[i][s] = ord[s * dil];
    end
  endtask

  task automatic ref_layer(input int l, input int n, input int d, input act_e act);
    int dh, t;
    dh = d / H; t = (d + 31) / 32;
    for (int i = 0; i < n; i++)
      for (int c = 0; c < d; c++) begin
        acc_t a; a = 0;
        for (int k = 0; k < d; k++) a += acc_t'(X[i][k]) * acc_t'(wt(l, 0, k, c, d, t));
        U[i][c] = requant(a, bias(l, 5, c, d));
      end
    for (int i = 0; i < n; i++)
      for (int c = 0; c < d; c++) begin
        feat_t m;
        for (int s = 0; s < K; s++) begin
          feat_t df;
          df = sat(acc_t'(U[NBR[i][s]][c]) - acc_t'(U[i][c]));
          if (s == 0 || df > m) m = df;
        end
        M[i][c] = m;
      end
    for (int i = 0; i < n; i++)
      for (int c = 0; c < d; c++) begin
        acc_t a; int h;
        a = 0; h = c / dh;
        for (int r = 0; r < dh; r++) begin
          a += acc_t'(U[i][h*dh + r]) * acc_t'(wt(l, 1, r, c, d, t));
          a += acc_t'(M[i][h*dh + r]) * acc_t'(wt(l, 1, dh + r, c, d, t));
        end
        T[i][c] = apply_act(act, requant(a, bias(l, 6, c, d)));
      end
    for (int i = 0; i < n; i++)
      for (int c = 0; c < d; c++) begin
        acc_t a; a = 0;
        for (int k = 0; k < d; k++) a += acc_t'(T[i][k]) * acc_t'(wt(l, 2, k, c, d, t));
        Y[i][c] = sat_add(requant(a, bias(l, 7, c, d)), X[i][c]);
      end
    for (int i = 0; i < n; i++)
      for (int c = 0; c < 4*d; c++) begin
        acc_t a; a = 0;
        for (int k = 0; k < d; k++) a += acc_t'(Y[i][k]) * acc_t'(wt(l, 3, k, c, d, 4*t));
        Hd[i][c] = apply_act(act, requant(a, bias(l, 8, c, d)));
      end
    for (int i = 0; i < n; i++)
      for (int c = 0; c < d; c++) begin
        acc_t a; a = 0;
        for (int k = 0; k < 4*d; k++) a += acc_t'(Hd[i][k]) * acc_t'(wt(l, 4, k, c, d, t));
        XP[i][c] = X[i][c];
        X[i][c]  = sat_add(requant(a, bias(l, 9, c, d)), Y[i][c]);
      end
  endtask

  // ------------------------------------------------------------ one run
  longint mech_conf = 0, mech_gce = 0, mech_fue = 0, mech_pf = 0, mech_stall = 0, mech_dil = 0,
          mech_boot = 0;

  task automatic run(input int n, input int d, input int layers, input int dil, input act_e act,
                     input int gap, input bit gce_run, input string name);
    int t;
    longint t0, t1, serial;
    int bad;
    t = (d + 31) / 32;
    hbm_gap = gap;
    // input features, zero in padded channels
    for (int i = 0; i < n; i++)
      for (int c = 0; c < 32 * t; c++)
        X[i][c] = (c < d) ? feat_t'(int'($urandom_range(0, 512)) - 256) : feat_t'(0);
    // load X(0) into feature buffer 0
    for (int i = 0; i < n; i++)
      for (int tt = 0; tt < t; tt++) begin
        @(negedge clk);
        host_wr_en = '0;
        host_wr_en[i % H] = 1'b1;
        host_wr_addr[i % H] = 10'(fb_addr(i, tt, t, H));
        for (int e = 0; e < P_D; e++) host_wr_data[i % H][e] = X[i][tt*32 + e];
      end
    @(negedge clk);
    host_wr_en = '0;
    cfg_layers = 8'(layers); cfg_nodes = 13'(n); cfg_dim = 16'(d);
    cfg_dil = 2'(dil); cfg_act = act;
    cfg_start = 1;
    t0 = cycle;
    @(negedge clk);
    cfg_start = 0;
    // reference (zero simulated time)
    for (int i = 0; i < n; i++) for (int c = 0; c < d; c++) XP[i][c] = X[i][c];
    for (int l = 0; l < layers; l++) begin
      build_graph(n, d, dil);     // G(0) from X0; G(l) from X(l-1)
      ref_layer(l, n, d, act);
    end
    while (!done) @(negedge clk);
    t1 = cycle;
    // compare X(L)
    bad = 0;
    for (int i = 0; i < n; i++)
      for (int tt = 0; tt < t; tt++) begin
        host_rd_en = '0;
        host_rd_en[i % H] = 1'b1;
        host_rd_addr[i % H] = 10'(fb_addr(i, tt, t, H));
        @(negedge clk);
        host_rd_en = '0;
        @(negedge clk);
        checks++;
        for (int e = 0; e < P_D; e++) begin
          feat_t exp_v;
          exp_v = (tt*32 + e < d) ? X[i][tt*32 + e] : feat_t'(0);
          if (host_rd_data[i % H][e] !== exp_v) begin
            if (bad < 5) $display("  %s mismatch node %0d ch %0d: got %0d exp %0d", name, i,
                                  tt*32 + e, host_rd_data[i % H][e], exp_v);
            bad++;
          end
        end
        if (bad > 0 && tt == t - 1 && i == n - 1) failures++;
      end
    // paper's GCE model: T_GCE = (N/pN)(N/pN)(D/pD) * pN cycles of one
    // candidate tile per cycle = ceil(N/pN) * N * ceil(D/pD); a GCE-bound run
    // of L blocks builds L graphs back to back, so it must take at least L
    // times that and (with the last FUE stage and overheads) under 1.5x.
    serial = longint'(layers) * (longint'((n + 31) / 32) * n * t);
    if (gce_run) begin
      checks++;
      if (t1 - t0 < serial || t1 - t0 > serial * 3 / 2) begin
        failures++;
        $display("  %s GCE-bound run took %0d cycles, model %0d", name, t1 - t0, serial);
      end
    end
    checks++;
    if (s_graphs != 8'(layers)) begin
      failures++;
      $display("  %s graphs built %0d, expected %0d", name, s_graphs, layers);
    end
    $display("%s: N=%0d D=%0d L=%0d dil=%0d cycles=%0d gce-model=%0d mismatches=%0d gce_bound=%0d fue_bound=%0d pf_bound=%0d conflicts=%0d gce_stall=%0d",
             name, n, d, layers, dil, t1 - t0, serial, bad, s_gce_bound, s_fue_bound, s_pf_bound,
             s_conf, s_gstall);
    mech_conf  += s_conf;
    mech_gce   += s_gce_bound;
    mech_fue   += s_fue_bound;
    mech_pf    += s_pf_bound;
    mech_stall += s_gstall;
    mech_boot  += (s_graphs == 8'(layers)) ? 1 : 0;
    if (dil > 1) mech_dil++;
  endtask

  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run(40, 48, 3, 2, ACT_GELU, 24, 0, "A");
    run(24, 16, 2, 2, ACT_GELU, 1, 0, "S");
    run(640, 16, 3, 1, ACT_RELU, 1, 1, "B");
    run(196, 192, 2, 1, ACT_GELU, 1, 0, "C");
    checks++; if (mech_conf  == 0) begin failures++; $display("no bank conflict seen"); end
    checks++; if (mech_gce   == 0) begin failures++; $display("no GCE-bound stage seen"); end
    checks++; if (mech_fue   == 0) begin failures++; $display("no FUE-bound stage seen"); end
    checks++; if (mech_pf    == 0) begin failures++; $display("no prefetch-bound stage seen"); end
    checks++; if (mech_dil   == 0) begin failures++; $display("no dilated graph built"); end
    checks++; if (mech_boot  == 0) begin failures++; $display("bootstrap graph count wrong"); end
    $display("mechanisms: conflicts=%0d gce_bound=%0d fue_bound=%0d pf_bound=%0d gce_stall=%0d dilated_runs=%0d",
             mech_conf, mech_gce, mech_fue, mech_pf, mech_stall, mech_dil);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
