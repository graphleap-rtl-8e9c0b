// tb_aggregator_mesh: self-checking test of the max-relative aggregator.
//
// Each of the P_N = 4 lanes independently receives a centre vector and then
// a random number (1..12) of neighbour vectors at random cycles; the lanes
// interleave. After a lane's last neighbour the message must equal
// max_j sat(x_j - x_i) per channel (MRConv of the paper), one cycle after
// the neighbour was presented. Values span the full int16 range so the
// saturating subtraction is exercised.
module tb_aggregator_mesh;
  import gl_pkg::*;
  localparam int PN = 4, PD = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PN-1:0] ctr_we = '0, nbr_we = '0, nbr_first = '0;
  feat_t [PN-1:0][PD-1:0] in_data = '0, msg;
  int checks = 0, failures = 0;

  aggregator_mesh #(.P_N(PN), .P_D(PD)) dut (.*);

  feat_t ctr [PN][PD];
  feat_t mx  [PN][PD];
  int    left [PN];      // neighbours still to send, -1 = needs centre
  int    sent [PN];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < PN; l++) left[l] = -1;
    for (int c = 0; c < 3000; c++) begin
      bit fin [PN];
      ctr_we = '0; nbr_we = '0; nbr_first = '0;
      for (int l = 0; l < PN; l++) begin
        fin[l] = 0;
        if ($urandom_range(0, 2) == 0) continue;
        for (int d = 0; d < PD; d++)
          in_data[l][d] = feat_t'((c % 4 == 0) ? $urandom : $urandom_range(0, 600) - 300);
        if (left[l] < 0) begin
          ctr_we[l] = 1;
          for (int d = 0; d < PD; d++) ctr[l][d] = in_data[l][d];
          left[l] = $urandom_range(1, 12);
          sent[l] = 0;
        end else begin
          nbr_we[l] = 1;
          nbr_first[l] = (sent[l] == 0);
          for (int d = 0; d < PD; d++) begin
            feat_t df;
            df = sat(acc_t'(in_data[l][d]) - acc_t'(ctr[l][d]));
            if (sent[l] == 0 || df > mx[l][d]) mx[l][d] = df;
          end
          sent[l]++;
          left[l]--;
          if (left[l] == 0) begin fin[l] = 1; left[l] = -1; end
        end
      end
      @(negedge clk);
      for (int l = 0; l < PN; l++) if (fin[l]) begin
        checks++;
        for (int d = 0; d < PD; d++)
          if (msg[l][d] !== mx[l][d]) begin
            failures++;
            $display("lane %0d ch %0d: msg %0d exp %0d", l, d, msg[l][d], mx[l][d]);
            break;
          end
      end
    end
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
