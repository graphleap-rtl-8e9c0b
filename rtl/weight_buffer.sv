// weight_buffer: double-buffered on-chip store of one layer's weights and
// biases.
//
// Two halves of DEPTH words, each word one p_D-element row tile. While the
// Feature Update Engine reads layer l from half rd_half, the prefetcher
// writes layer l+1 into the other half (Sec. IV-G: "transfer the weights for
// layer l+1 while the weights from layer l are being used"). Two read ports:
// one streams weight rows into the systolic array, the other fetches bias
// tiles for the drain. Reads have one cycle of latency.
module weight_buffer
  import gl_pkg::*;
#(
  parameter int P_D   = 32,
  parameter int DEPTH = 186816
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic                     wr_half,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  feat_t [P_D-1:0]          wr_data,
  input  logic                     rd_half,
  input  logic                     w_rd_en,
  input  logic [$clog2(DEPTH)-1:0] w_rd_addr,
  output feat_t [P_D-1:0]          w_rd_data,
  input  logic                     b_rd_en,
  input  logic [$clog2(DEPTH)-1:0] b_rd_addr,
  output feat_t [P_D-1:0]          b_rd_data
);
  feat_t [P_D-1:0] mem0 [DEPTH];
  feat_t [P_D-1:0] mem1 [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_half) mem0[wr_addr] <= wr_data;
    if (wr_en &&  wr_half) mem1[wr_addr] <= wr_data;
    if (w_rd_en) w_rd_data <= rd_half ? mem1[w_rd_addr] : mem0[w_rd_addr];
    if (b_rd_en) b_rd_data <= rd_half ? mem1[b_rd_addr] : mem0[b_rd_addr];
  end

  // the half being filled is never the half being read
  a_no_overlap: assert property (@(posedge clk) (wr_en && (w_rd_en || b_rd_en)) |-> (wr_half != rd_half));
endmodule
