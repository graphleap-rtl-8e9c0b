// topk_sorter: keeps the smallest K*DIL_MAX (distance, index) pairs of a
// stream and returns a dilated K-neighbour list.
//
// The paper says the GCE "maintains min-heaps to extract the k smallest
// distances"; the result of that is the k smallest candidates in order. This
// design keeps them in a register list sorted ascending, which gives the same
// set and order and takes one candidate per cycle with no back-pressure: each
// entry compares itself with the newcomer in parallel and either holds,
// takes the newcomer, or takes its left neighbour. Equal distances keep the
// earlier arrival first, so with candidates scanned in index order the lower
// node index wins a tie.
//
// The dilated kNN graph of ViG keeps every dil-th of the K*dil nearest:
// nbr_idx[s] = list[s*dil]. dil is 1..DIL_MAX and must stay constant while a
// list is built.
//
// Timing: clear (one cycle) empties the list; every cycle with in_valid
// inserts one candidate; nbr_idx is valid the cycle after the last insert.
module topk_sorter #(
  parameter int K       = 9,
  parameter int DIL_MAX = 2,
  parameter int IW      = 12,
  parameter int DISTW   = 48
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         in_valid,
  input  logic [DISTW-1:0]             in_dist,
  input  logic [IW-1:0]                in_idx,
  input  logic [$clog2(DIL_MAX+1)-1:0] dil,
  output logic [K-1:0][IW-1:0]         nbr_idx,
  output logic [K-1:0][DISTW-1:0]      nbr_dist,
  output logic [$clog2(K*DIL_MAX+1)-1:0] fill
);
  localparam int L = K * DIL_MAX;

  logic [L-1:0][DISTW-1:0] ld;
  logic [L-1:0][IW-1:0]    li;
  logic [L-1:0]            lv;    // entry holds a candidate
  logic [L-1:0]            less;  // newcomer goes before entry e

  always_comb begin
    for (int e = 0; e < L; e++) less[e] = !lv[e] || (in_dist < ld[e]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lv   <= '0;
      ld   <= '0;
      li   <= '0;
      fill <= '0;
    end else if (clear) begin
      lv   <= '0;
      fill <= '0;
    end else if (in_valid) begin
      for (int e = 0; e < L; e++) begin
        if (less[e]) begin
          if (e == 0 || !less[(e == 0) ? 0 : e-1]) begin
            ld[e] <= in_dist;
            li[e] <= in_idx;
            lv[e] <= 1'b1;
          end else begin
            ld[e] <= ld[e-1];
            li[e] <= li[e-1];
            lv[e] <= lv[e-1];
          end
        end
      end
      if (int'(fill) < L) fill <= fill + 1'b1;
    end
  end

  always_comb begin
    for (int s = 0; s < K; s++) begin
      nbr_idx[s]  = li[s * int'(dil)];
      nbr_dist[s] = ld[s * int'(dil)];
    end
  end

endmodule
