// act_unit: P_D-lane activation unit (Sec. IV-E).
//
// ReLU is a comparator-based clipper (negative values become zero). GELU is
// a piece-wise-linear approximation: a 17-entry table of GELU at x = -4.0,
// -3.5, ..., 4.0 in Q8.8 and linear interpolation inside each half-unit
// segment; below -4 the output is zero and at or above 4 it is x. The paper
// states a PWL/LUT GELU; table spacing and range are this design's choice.
// ACT_NONE passes the value unchanged. One register stage: y is valid one
// cycle after x (valid travels along).
module act_unit
  import gl_pkg::*;
#(
  parameter int P_D = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  act_e            mode,
  input  logic            in_valid,
  input  feat_t [P_D-1:0] x,
  output logic            out_valid,
  output feat_t [P_D-1:0] y
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      for (int d = 0; d < P_D; d++) y[d] <= apply_act(mode, x[d]);
    end
  end
endmodule
