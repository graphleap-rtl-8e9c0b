// aggregator_mesh: max-relative aggregation for P_N nodes x P_D channels.
//
// Implements the aggregation of MRConv, m_i = max over j in N(i) of
// (x_j - x_i), for one p_D-element feature tile of P_N nodes at once (the
// p_N x p_D Aggregator Mesh of Fig. 2). Each lane first latches its centre
// tile x_i (ctr_we), then takes neighbour tiles one at a time (nbr_we, with
// nbr_first on the first one); every cell keeps the running maximum of the
// saturated difference. Lanes advance independently, so a lane delayed by a
// bank conflict simply updates later.
//
// Timing: one cycle per update; msg holds the result the cycle after the last
// neighbour update.
module aggregator_mesh
  import gl_pkg::*;
#(
  parameter int P_N = 32,
  parameter int P_D = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [P_N-1:0]             ctr_we,
  input  logic [P_N-1:0]             nbr_we,
  input  logic [P_N-1:0]             nbr_first,
  input  feat_t [P_N-1:0][P_D-1:0]   in_data,
  output feat_t [P_N-1:0][P_D-1:0]   msg
);
  feat_t [P_N-1:0][P_D-1:0] ctr, diff, nxt;

  // saturating difference to the centre, running maximum
  always_comb begin
    for (int l = 0; l < P_N; l++) begin
      for (int d = 0; d < P_D; d++) begin
        diff[l][d] = sat(acc_t'(in_data[l][d]) - acc_t'(ctr[l][d]));
        nxt[l][d]  = (nbr_first[l] || diff[l][d] > msg[l][d]) ? diff[l][d] : msg[l][d];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctr <= '0;
      msg <= '0;
    end else begin
      for (int l = 0; l < P_N; l++) begin
        if (ctr_we[l]) ctr[l] <= in_data[l];
        if (nbr_we[l]) msg[l] <= nxt[l];
      end
    end
  end
endmodule
