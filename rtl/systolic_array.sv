// systolic_array: the shared P_N x P_D MLP systolic array.
//
// Output-stationary: PE (n, d) accumulates sum over k of a[n][k] * w[k][d],
// the dot product of node n's input vector with weight column d. One input
// channel k enters per cycle: a[] (one value per node row) from the left and
// w[] (one value per output column) from the top. Row n is delayed n cycles
// and column d is delayed d cycles on entry, so activations and weights meet
// in the right PE while moving one PE per cycle (right and down). The flags
// first/last mark the first and last channel of a tile and ride with the
// activation, so tiles may follow each other without bubbles.
//
// Timing: the result of a tile whose last channel entered at cycle t is
// complete in every PE when out_valid pulses, at cycle t + P_N + P_D - 1;
// res holds it until the PEs see the next tile's last channel, so the next
// tile's last channel must enter at least P_N + P_D cycles after this one's.
// The paper gives the array and its size; the skewed output-stationary
// dataflow is this design's choice.
module systolic_array
  import gl_pkg::*;
#(
  parameter int P_N = 32,
  parameter int P_D = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       in_first,
  input  logic                       in_last,
  input  feat_t [P_N-1:0]            a,
  input  feat_t [P_D-1:0]            w,
  output logic                       out_valid,
  output acc_t  [P_N-1:0][P_D-1:0]   res
);
  // entry skew: row n delayed by n, column d delayed by d
  feat_t [P_N-1:0] a_sk;
  logic  [P_N-1:0] v_sk, f_sk, l_sk;
  feat_t [P_D-1:0] w_sk;

  for (genvar n = 0; n < P_N; n++) begin : g_rsk
    if (n == 0) begin : g_nodly
      assign a_sk[n] = a[n];
      assign v_sk[n] = in_valid;
      assign f_sk[n] = in_first;
      assign l_sk[n] = in_last;
    end else begin : g_dly
      feat_t      ad [n];
      logic [n-1:0] vd, fd, ld;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < n; i++) ad[i] <= '0;
          vd <= '0; fd <= '0; ld <= '0;
        end else begin
          ad[0] <= a[n];
          for (int i = 1; i < n; i++) ad[i] <= ad[i-1];
          vd <= n'({vd, in_valid});
          fd <= n'({fd, in_first});
          ld <= n'({ld, in_last});
        end
      end
      assign a_sk[n] = ad[n-1];
      assign v_sk[n] = vd[n-1];
      assign f_sk[n] = fd[n-1];
      assign l_sk[n] = ld[n-1];
    end
  end

  for (genvar d = 0; d < P_D; d++) begin : g_csk
    if (d == 0) begin : g_nodly
      assign w_sk[d] = w[d];
    end else begin : g_dly
      feat_t wd [d];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < d; i++) wd[i] <= '0;
        end else begin
          wd[0] <= w[d];
          for (int i = 1; i < d; i++) wd[i] <= wd[i-1];
        end
      end
      assign w_sk[d] = wd[d-1];
    end
  end

  // PE grid: horizontal links carry a and flags, vertical links carry w
  feat_t a_h [P_N][P_D+1];
  logic  v_h [P_N][P_D+1];
  logic  f_h [P_N][P_D+1];
  logic  l_h [P_N][P_D+1];
  feat_t w_v [P_N+1][P_D];

  for (genvar n = 0; n < P_N; n++) begin : g_row
    assign a_h[n][0] = a_sk[n];
    assign v_h[n][0] = v_sk[n];
    assign f_h[n][0] = f_sk[n];
    assign l_h[n][0] = l_sk[n];
  end
  for (genvar d = 0; d < P_D; d++) begin : g_col
    assign w_v[0][d] = w_sk[d];
  end

  for (genvar n = 0; n < P_N; n++) begin : g_n
    for (genvar d = 0; d < P_D; d++) begin : g_d
      mac_pe u_pe (
        .clk, .rst_n,
        .a_in  (a_h[n][d]),   .v_in (v_h[n][d]), .f_in (f_h[n][d]), .l_in (l_h[n][d]),
        .w_in  (w_v[n][d]),
        .a_out (a_h[n][d+1]), .v_out(v_h[n][d+1]), .f_out(f_h[n][d+1]), .l_out(l_h[n][d+1]),
        .w_out (w_v[n+1][d]),
        .res   (res[n][d])
      );
    end
  end

  // the bottom-right PE finishes last
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_h[P_N-1][P_D-1] && l_h[P_N-1][P_D-1];
  end
endmodule
