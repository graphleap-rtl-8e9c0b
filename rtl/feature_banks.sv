// feature_banks: on-chip node-feature memory, interleaved over NB banks.
//
// Following the Gather Module description, a node's features live in bank
// (node mod NB) with NB = H = 16, so that neighbouring patch tokens, which
// are often each other's neighbours, sit in different banks. Each bank word
// is one p_D-element feature tile of one node; a node with C channels takes
// ceil(C/p_D) consecutive words at address (node / NB) * tiles + tile
// (see gl_addr). The same memory type holds the input/output feature buffers
// and the scratchpads (U, messages, FFN hidden) of this design.
//
// Ports: NRD independent read ports and one write port, each with a separate
// address per bank, so one access per bank per port per cycle. Reads have
// one cycle of latency. Two read ports on the feature buffers (one for the
// GCE, one for the FUE) are this design's choice; on an FPGA they would be a
// replicated pair of single-read memories.
module feature_banks
  import gl_pkg::*;
#(
  parameter int NB    = 16,
  parameter int P_D   = 32,
  parameter int DEPTH = 1024,
  parameter int NRD   = 1
) (
  input  logic                               clk,
  input  logic [NRD-1:0][NB-1:0]             rd_en,
  input  logic [NRD-1:0][NB-1:0][$clog2(DEPTH)-1:0] rd_addr,
  output feat_t [NRD-1:0][NB-1:0][P_D-1:0]   rd_data,
  input  logic [NB-1:0]                      wr_en,
  input  logic [NB-1:0][$clog2(DEPTH)-1:0]   wr_addr,
  input  feat_t [NB-1:0][P_D-1:0]            wr_data
);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    feat_t [P_D-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en[b]) mem[wr_addr[b]] <= wr_data[b];
    end

    for (genvar p = 0; p < NRD; p++) begin : g_rd
      always_ff @(posedge clk) begin
        if (rd_en[p][b]) rd_data[p][b] <= mem[rd_addr[p][b]];
      end
    end
  end
endmodule
