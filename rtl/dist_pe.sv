// dist_pe: one distance processing element of the Graph Construction Engine.
//
// Follows Algorithm 2 of the paper: the PE owns one query node i at a time,
// holds its feature vector in a local store of p_D-element tiles, and for
// every candidate node j accumulates sum over tiles of ||h_i^(t) - h_j^(t)||^2
// using P_D parallel squared-difference units and an adder tree. When the
// last tile of candidate j has been added, (distance, j) goes to the PE's
// top-k selector. The square root of Algorithm 2 is not taken: it is
// monotonic, so the neighbour ranking is the same without it (this design's
// choice, saving a root unit per PE).
//
// Interface: q_we writes query tile q_chunk. A candidate tile arrives with
// c_valid, its tile number c_chunk, c_first/c_last marking the first and last
// tile of candidate c_idx. clear empties the selector before a new query.
// Timing: two register stages (square+tree, accumulate) then the selector;
// nbr_idx holds the finished list three cycles after the last tile of the
// last candidate.
module dist_pe
  import gl_pkg::*;
#(
  parameter int P_D        = 32,
  parameter int CHUNKS_MAX = 24,
  parameter int K          = 9,
  parameter int DIL_MAX    = 2,
  parameter int IW         = 12
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // query load
  input  logic                          q_we,
  input  logic [$clog2(CHUNKS_MAX)-1:0] q_chunk,
  input  feat_t [P_D-1:0]               q_data,
  // candidate stream (broadcast to all PEs)
  input  logic                          c_valid,
  input  logic [$clog2(CHUNKS_MAX)-1:0] c_chunk,
  input  logic                          c_first,
  input  logic                          c_last,
  input  logic [IW-1:0]                 c_idx,
  input  feat_t [P_D-1:0]               c_data,
  // selector control / result
  input  logic                          clear,
  input  logic [$clog2(DIL_MAX+1)-1:0]  dil,
  output logic [K-1:0][IW-1:0]          nbr_idx,
  output logic [K-1:0][DISTW-1:0]       nbr_dist
);
  feat_t [P_D-1:0] qmem [CHUNKS_MAX];
  feat_t [P_D-1:0] qv;

  always_ff @(posedge clk) begin
    if (q_we) qmem[q_chunk] <= q_data;
  end
  assign qv = qmem[c_chunk];

  // stage 1: squared differences and adder tree
  dist_t           sq_sum;
  logic            s1_valid, s1_first, s1_last;
  logic [IW-1:0]   s1_idx;
  dist_t           s1_sum;

  always_comb begin
    sq_sum = '0;
    for (int d = 0; d < P_D; d++) begin
      logic signed [DW:0]     diff;
      logic signed [2*DW+1:0] sq;
      diff   = (DW+1)'(qv[d]) - (DW+1)'(c_data[d]);
      sq     = diff * diff;
      sq_sum = sq_sum + dist_t'(sq);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_idx   <= '0;
      s1_sum   <= '0;
    end else begin
      s1_valid <= c_valid;
      s1_first <= c_first;
      s1_last  <= c_last;
      s1_idx   <= c_idx;
      s1_sum   <= sq_sum;
    end
  end

  // stage 2: accumulate over tiles, hand finished distances to the selector
  dist_t         acc, acc_next;
  logic          t_valid;
  dist_t         t_dist;
  logic [IW-1:0] t_idx;

  assign acc_next = (s1_first ? dist_t'(0) : acc) + s1_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      t_valid <= 1'b0;
      t_dist  <= '0;
      t_idx   <= '0;
    end else begin
      t_valid <= s1_valid && s1_last;
      if (s1_valid) begin
        acc    <= acc_next;
        t_dist <= acc_next;
        t_idx  <= s1_idx;
      end
    end
  end

  topk_sorter #(.K(K), .DIL_MAX(DIL_MAX), .IW(IW), .DISTW(DISTW)) u_topk (
    .clk, .rst_n, .clear,
    .in_valid (t_valid),
    .in_dist  (t_dist),
    .in_idx   (t_idx),
    .dil,
    .nbr_idx,
    .nbr_dist,
    .fill     ()
  );

endmodule
