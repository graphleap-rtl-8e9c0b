// tb_act_unit: self-checking test of the activation unit.
//
// Feeds random Q8.8 vectors (covering the saturated tails beyond +-4 and
// the piecewise-linear GELU segments) in all three modes and compares each
// output with a reference: identity, max(x,0), and GELU interpolated
// linearly between the 17 table points at -4, -3.5, ..., 4 (x below -4
// gives 0, x above 4 gives x). The reference interpolation is coded here
// independently of the package function. Latency: one register stage.
module tb_act_unit;
  import gl_pkg::*;
  localparam int PD = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  act_e mode = ACT_NONE;
  logic in_valid = 0, out_valid;
  feat_t [PD-1:0] x = '0, y;
  int checks = 0, failures = 0;

  act_unit #(.P_D(PD)) dut (.*);

  // GELU(x) at x = -4 + 0.5*i, Q8.8
  int tab [17] = '{0, 0, -1, -4, -12, -26, -41, -39, 0, 89, 215, 358, 500, 636, 767, 896, 1024};

  function automatic int ref_act(input act_e m, input int v);
    int seg, base, frac;
    if (m == ACT_NONE) return v;
    if (m == ACT_RELU) return (v > 0) ? v : 0;
    if (v <= -1024) return 0;
    if (v >= 1024) return v;
    seg  = (v + 1024) / 128;
    base = -1024 + seg * 128;
    frac = v - base;
    return tab[seg] + (((tab[seg+1] - tab[seg]) * frac) >>> 7);
  endfunction

  initial begin
    int exp_v [PD];
    act_e m_q;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      in_valid = 1;
      mode = act_e'(it % 3);
      for (int e = 0; e < PD; e++) begin
        int v;
        v = (it % 5 == 0) ? int'($urandom_range(0, 65535)) - 32768 : int'($urandom_range(0, 2400)) - 1200;
        x[e] = feat_t'(v);
        exp_v[e] = ref_act(mode, v);
      end
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int e = 0; e < PD; e++)
        if (int'(y[e]) != exp_v[e]) begin
          failures++;
          $display("mode %0d x=%0d got %0d exp %0d", mode, x[e], y[e], exp_v[e]);
          break;
        end
    end
    in_valid = 0;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("out_valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
