// tb_systolic_array: self-checking test of the MLP systolic array.
//
// A 4 x 3 array receives a sequence of tiles of random depth (1..20 input
// channels) with random values, each tile's last channel entering exactly
// P_N + P_D cycles after the previous tile's last channel (the closest
// spacing the output-stationary array allows), idle cycles filling the gap
// when a tile is shorter. Every result matrix is compared with a reference
// product a^T w computed here, and the latency from the last channel to
// out_valid must be P_N + P_D - 1 cycles for every tile.
module tb_systolic_array;
  import gl_pkg::*;
  localparam int PN = 4, PD = 3, GAP = PN + PD, NT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0, in_last = 0, out_valid;
  feat_t [PN-1:0] a = '0;
  feat_t [PD-1:0] w = '0;
  acc_t [PN-1:0][PD-1:0] res;
  int checks = 0, failures = 0;

  systolic_array #(.P_N(PN), .P_D(PD)) dut (.*);

  acc_t   expq [$][PN][PD];
  longint last_cyc [$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // result checker
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected out_valid"); end
    else begin
      longint lat;
      lat = cyc - last_cyc.pop_front();
      if (lat != PN + PD - 1) begin failures++; $display("latency %0d, expected %0d", lat, PN + PD - 1); end
      for (int n = 0; n < PN; n++)
        for (int d = 0; d < PD; d++)
          if (res[n][d] !== expq[0][n][d]) begin
            failures++;
            $display("res[%0d][%0d] = %0d exp %0d", n, d, res[n][d], expq[0][n][d]);
          end
      void'(expq.pop_front());
    end
  end

  initial begin
    longint prev_last;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    prev_last = -100;
    for (int t = 0; t < NT; t++) begin
      int k;
      acc_t e [PN][PD];
      k = $urandom_range(1, 20);
      // wait so that the last channel enters >= GAP after the previous one
      while (cyc + k - 1 < prev_last + GAP) begin
        in_valid = 0; in_first = 0; in_last = 0;
        @(negedge clk);
      end
      for (int n = 0; n < PN; n++) for (int d = 0; d < PD; d++) e[n][d] = 0;
      for (int kk = 0; kk < k; kk++) begin
        in_valid = 1; in_first = (kk == 0); in_last = (kk == k - 1);
        for (int n = 0; n < PN; n++) a[n] = feat_t'($urandom);
        for (int d = 0; d < PD; d++) w[d] = feat_t'($urandom);
        for (int n = 0; n < PN; n++)
          for (int d = 0; d < PD; d++) e[n][d] += acc_t'(a[n]) * acc_t'(w[d]);
        if (kk == k - 1) begin
          prev_last = cyc;
          last_cyc.push_back(cyc);
          expq.push_back(e);
        end
        @(negedge clk);
      end
      in_valid = 0; in_first = 0; in_last = 0;
    end
    repeat (2 * GAP) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
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
