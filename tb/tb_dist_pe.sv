// tb_dist_pe: self-checking test of one GCE distance processing element.
//
// Loads a random query node (T channel tiles of P_D = 4 values) into the PE,
// streams every candidate node tile by tile, one tile per cycle, and checks
// the K nearest neighbours (squared Euclidean distance, lower index first on
// ties, dilation 1 or 2) against a reference computed here. Timing: the
// list must be final exactly 3 cycles after the last candidate tile (two
// pipeline stages plus the selector insertion), and not yet final 2 cycles
// after it whenever the last candidate changes the list.
module tb_dist_pe;
  import gl_pkg::*;
  localparam int PD = 4, CM = 4, K = 9, DM = 2, IW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic q_we = 0, c_valid = 0, c_first = 0, c_last = 0, clear = 0;
  logic [1:0] q_chunk = '0, c_chunk = '0;
  feat_t [PD-1:0] q_data = '0, c_data = '0;
  logic [IW-1:0] c_idx = '0;
  logic [1:0] dil = 1;
  logic [K-1:0][IW-1:0] nbr_idx;
  logic [K-1:0][DISTW-1:0] nbr_dist;
  int checks = 0, failures = 0;

  dist_pe #(.P_D(PD), .CHUNKS_MAX(CM), .K(K), .DIL_MAX(DM), .IW(IW)) dut (.*);

  feat_t  q [CM*PD];
  feat_t  x [64][CM*PD];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      int n, t, dl;
      longint d[$];
      int ord[$];
      n = $urandom_range(K * DM, 64); t = $urandom_range(1, CM); dl = (trial % 2) + 1;
      dil = 2'(dl);
      for (int c = 0; c < t * PD; c++) q[c] = feat_t'(int'($urandom_range(0, 2000)) - 1000);
      for (int j = 0; j < n; j++)
        for (int c = 0; c < t * PD; c++)
          x[j][c] = (trial % 3 == 0) ? feat_t'(int'($urandom_range(0, 2)))
                                     : feat_t'(int'($urandom_range(0, 2000)) - 1000);
      for (int tt = 0; tt < t; tt++) begin
        q_we = 1; q_chunk = 2'(tt);
        for (int e = 0; e < PD; e++) q_data[e] = q[tt*PD + e];
        @(negedge clk);
      end
      q_we = 0;
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int j = 0; j < n; j++)
        for (int tt = 0; tt < t; tt++) begin
          c_valid = 1; c_chunk = 2'(tt); c_first = (tt == 0); c_last = (tt == t - 1);
          c_idx = IW'(j);
          for (int e = 0; e < PD; e++) c_data[e] = x[j][tt*PD + e];
          @(negedge clk);
        end
      c_valid = 0;
      for (int j = 0; j < n; j++) begin
        longint s;
        int p;
        s = 0;
        for (int c = 0; c < t * PD; c++) s += (longint'(q[c]) - longint'(x[j][c])) ** 2;
        d.push_back(s);
        p = ord.size();
        while (p > 0 && s < d[ord[p-1]]) p--;
        ord.insert(p, j);
      end
      @(negedge clk);     // 2 cycles after the last tile
      checks++;
      begin
        bit same, last_in;
        same = 1; last_in = 0;
        for (int s = 0; s < K; s++) begin
          if (nbr_idx[s] !== IW'(ord[s * dl])) same = 0;
          if (ord[s * dl] == n - 1) last_in = 1;
        end
        if (last_in && same) begin failures++; $display("trial %0d: list final too early", trial); end
      end
      @(negedge clk);     // 3 cycles after the last tile
      checks++;
      for (int s = 0; s < K; s++)
        if (nbr_idx[s] !== IW'(ord[s * dl]) || nbr_dist[s] !== DISTW'(d[ord[s * dl]])) begin
          failures++;
          $display("trial %0d slot %0d: got %0d (%0d) exp %0d (%0d)", trial, s, nbr_idx[s],
                   nbr_dist[s], ord[s * dl], d[ord[s * dl]]);
          break;
        end
      d = {}; ord = {};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
