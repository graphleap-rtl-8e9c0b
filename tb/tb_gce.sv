// tb_gce: self-checking test of the Graph Construction Engine.
//
// A small engine (P_N = 4 PEs, P_D = 4, 2 feature banks, K = 3) builds the
// dilated kNN graph of random node features held in a behavioural model of
// the banked feature memory (bank = node mod 2, one-cycle read latency).
// Every emitted list is compared with a reference (squared distance, lower
// index first on ties), and every node must be emitted exactly once.
// Timing: with the output always ready, the build must take at least the
// scan time ceil(N/P_N) * N * ceil(D/P_D) of the paper's T_GCE model and at
// most that plus the per-tile load/flush overhead and the final drain.
// Runs with random output back-pressure must show the output-bank stall.
module tb_gce;
  import gl_pkg::*;
  localparam int PN = 4, PD = 4, NB = 2, CM = 4, NM = 64, K = 3, DM = 2, DEP = 64, IW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, out_valid, out_ready = 1;
  logic [IW:0] n_nodes;
  logic [2:0]  n_tiles;
  logic [1:0]  dil;
  logic [NB-1:0] fb_rd_en;
  logic [NB-1:0][5:0] fb_rd_addr;
  feat_t [NB-1:0][PD-1:0] fb_rd_data;
  logic [IW-1:0] out_node;
  logic [K-1:0][IW-1:0] out_nbrs;
  logic [31:0] stall_cycles;
  int checks = 0, failures = 0;
  int bp_pct = 0;

  gce #(.P_N(PN), .P_D(PD), .NB(NB), .CHUNKS_MAX(CM), .N_MAX(NM), .K(K), .DIL_MAX(DM),
        .DEPTH(DEP), .IW(IW)) dut (.*);

  feat_t [PD-1:0] mem [NB][DEP];
  always @(posedge clk)
    for (int b = 0; b < NB; b++) if (fb_rd_en[b]) fb_rd_data[b] <= mem[b][fb_rd_addr[b]];

  feat_t x [NM][CM*PD];
  int    exp_l [NM][K];
  int    seen [NM];

  always @(negedge clk) out_ready = ($urandom_range(0, 99) >= bp_pct);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    seen[out_node]++;
    for (int s = 0; s < K; s++)
      if (int'(out_nbrs[s]) != exp_l[out_node][s]) begin
        failures++;
        $display("node %0d slot %0d: got %0d exp %0d", out_node, s, out_nbrs[s], exp_l[out_node][s]);
        break;
      end
  end

  task automatic run(input int n, input int t, input int dl, input int bp);
    longint c0, c1, model, slack;
    bp_pct = bp;
    for (int i = 0; i < n; i++) begin
      for (int c = 0; c < t * PD; c++)
        x[i][c] = (n % 2 == 0) ? feat_t'(int'($urandom_range(0, 3))) : feat_t'(int'($urandom_range(0, 4000)) - 2000);
      for (int tt = 0; tt < t; tt++)
        for (int e = 0; e < PD; e++) mem[i % NB][fb_addr(i, tt, t, NB)][e] = x[i][tt*PD + e];
      seen[i] = 0;
    end
    for (int i = 0; i < n; i++) begin
      longint d[$];
      int ord[$];
      for (int j = 0; j < n; j++) begin
        longint s;
        int p;
        s = 0;
        for (int c = 0; c < t * PD; c++) s += (longint'(x[i][c]) - longint'(x[j][c])) ** 2;
        d.push_back(s);
        p = ord.size();
        while (p > 0 && s < d[ord[p-1]]) p--;
        ord.insert(p, j);
      end
      for (int s = 0; s < K; s++) exp_l[i][s] = ord[s * dl];
    end
    @(negedge clk);
    n_nodes = (IW+1)'(n); n_tiles = 3'(t); dil = 2'(dl);
    start = 1;
    c0 = $time / 10;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    c1 = $time / 10;
    while (busy) @(negedge clk);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (seen[i] != 1) begin failures++; $display("node %0d emitted %0d times", i, seen[i]); end
    end
    model = longint'((n + PN - 1) / PN) * n * t;
    slack = longint'((n + PN - 1) / PN) * ((PN / NB) * t + 12) + PN + 4;
    if (bp == 0) begin
      checks++;
      if (c1 - c0 < model || c1 - c0 > model + slack) begin
        failures++;
        $display("N=%0d T=%0d: %0d cycles, scan model %0d (+%0d allowed)", n, t, c1 - c0, model, slack);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 24; r++)
      run($urandom_range(K * DM, 40), $urandom_range(1, CM - 1), (r % 2) + 1, (r % 3 == 2) ? 60 : 0);
    // tiny scans with heavy back-pressure: the output bank must stall the engine
    run(9, 1, 1, 90);
    checks++;
    if (stall_cycles == 0) begin failures++; $display("no output-bank stall seen"); end
    $display("stall cycles in last run: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
