// mac_pe: one processing element of the output-stationary systolic array.
//
// Each cycle it passes the activation (with its valid/first/last flags) to
// the right and the weight downwards through registers, and, when the
// activation is valid, accumulates a*w into its own accumulator; `first`
// restarts the accumulator, `last` copies the finished sum into `res`, where
// it stays until the PE's next `last`. The flags travel with the activation,
// so tiles stream through the array back to back.
module mac_pe
  import gl_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  feat_t a_in,
  input  logic  v_in,
  input  logic  f_in,
  input  logic  l_in,
  input  feat_t w_in,
  output feat_t a_out,
  output logic  v_out,
  output logic  f_out,
  output logic  l_out,
  output feat_t w_out,
  output acc_t  res
);
  acc_t acc, prod, sum;
  logic signed [2*DW-1:0] p16;

  // 16 x 16 -> 32-bit product, sign-extended into the accumulator
  assign p16  = a_in * w_in;
  assign prod = acc_t'(p16);
  assign sum  = (f_in ? acc_t'(0) : acc) + prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0; v_out <= 1'b0; f_out <= 1'b0; l_out <= 1'b0; w_out <= '0;
      acc   <= '0; res <= '0;
    end else begin
      a_out <= a_in;
      v_out <= v_in;
      f_out <= f_in;
      l_out <= l_in;
      w_out <= w_in;
      if (v_in) begin
        acc <= sum;
        if (l_in) res <= sum;
      end
    end
  end
endmodule
