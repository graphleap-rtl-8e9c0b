// tb_topk_sorter: self-checking test of the streaming top-k selector.
//
// Streams random (distance, index) pairs, with many equal distances, one per
// cycle or with gaps, and compares the selected neighbour list with a
// reference stable sort: the K*dil smallest distances, equal distances kept
// in arrival order, every dil-th entry returned (dilated kNN). Runs with
// dilation 1 and 2 and with fewer candidates than K*dil is never used (the
// design always scans at least K*dil nodes). The result must be ready the
// cycle after the last candidate (one insertion per cycle).
module tb_topk_sorter;
  localparam int K = 9, DM = 2, IW = 12, DW = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  logic [DW-1:0] in_dist = '0;
  logic [IW-1:0] in_idx = '0;
  logic [1:0] dil = 1;
  logic [K-1:0][IW-1:0] nbr_idx;
  logic [K-1:0][DW-1:0] nbr_dist;
  logic [$clog2(K*DM+1)-1:0] fill;
  int checks = 0, failures = 0;

  topk_sorter #(.K(K), .DIL_MAX(DM), .IW(IW), .DISTW(DW)) dut (.*);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      int n, dl;
      longint d[$];
      int ord[$];
      n  = $urandom_range(K * DM, 200);
      dl = (trial % 2) + 1;
      dil = 2'(dl);
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int j = 0; j < n; j++) begin
        longint v;
        v = (trial % 3 == 0) ? longint'($urandom_range(0, 15)) : longint'($urandom);
        d.push_back(v);
        in_valid = 1; in_dist = DW'(v); in_idx = IW'(j);
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
      end
      in_valid = 0;
      // reference: stable insertion sort, earlier index first on ties
      for (int j = 0; j < n; j++) begin
        int p;
        p = ord.size();
        while (p > 0 && d[j] < d[ord[p-1]]) p--;
        ord.insert(p, j);
      end
      checks++;
      for (int s = 0; s < K; s++)
        if (nbr_idx[s] !== IW'(ord[s * dl]) || nbr_dist[s] !== DW'(d[ord[s * dl]])) begin
          failures++;
          $display("trial %0d slot %0d: got %0d exp %0d", trial, s, nbr_idx[s], ord[s * dl]);
          break;
        end
      checks++;
      if (int'(fill) != K * DM) begin failures++; $display("fill %0d", fill); end
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
