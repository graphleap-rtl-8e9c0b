// edge_buffer: the look-ahead edge-index buffer.
//
// Holds N x K neighbour indices for each of N_BUF = 2 graph stages (Table I
// gives two look-ahead buffer stages): while the GCE writes the graph of
// layer l+1 into one stage, the Feature Update Engine reads the graph of
// layer l from the other. The paper sizes the edge store at N*k indices; a
// second copy is this design's reading of the two-stage look-ahead buffer.
//
// Layout (this design's choice): P_N banks, node n in bank n mod P_N at word
// n / P_N, one word = the node's K indices. Writes take one node per cycle
// from the GCE stream; a read returns the lists of one whole tile of P_N
// consecutive nodes, which is what the Gather Module consumes. Read latency
// is one cycle.
module edge_buffer #(
  parameter int P_N   = 32,
  parameter int N_MAX = 3136,
  parameter int K     = 9,
  parameter int N_BUF = 2,
  parameter int IW    = $clog2(N_MAX)
) (
  input  logic                             clk,
  input  logic                             wr_en,
  input  logic [$clog2(N_BUF)-1:0]         wr_stage,
  input  logic [IW-1:0]                    wr_node,
  input  logic [K-1:0][IW-1:0]             wr_nbrs,
  input  logic                             rd_en,
  input  logic [$clog2(N_BUF)-1:0]         rd_stage,
  input  logic [IW-1:0]                    rd_tile,
  output logic [P_N-1:0][K-1:0][IW-1:0]    rd_nbrs
);
  localparam int TILES = (N_MAX + P_N - 1) / P_N;
  localparam int AW    = $clog2(N_BUF * TILES);

  for (genvar b = 0; b < P_N; b++) begin : g_bank
    logic [K-1:0][IW-1:0] mem [N_BUF * TILES];
    logic [AW-1:0] waddr, raddr;

    assign waddr = AW'(int'(wr_stage) * TILES + int'(wr_node) / P_N);
    assign raddr = AW'(int'(rd_stage) * TILES + int'(rd_tile));

    always_ff @(posedge clk) begin
      if (wr_en && (int'(wr_node) % P_N == b)) mem[waddr] <= wr_nbrs;
      if (rd_en) rd_nbrs[b] <= mem[raddr];
    end
  end
endmodule
