// tb_layer_scheduler: self-checking test of the stage controller.
//
// The GCE, FUE and weight prefetcher are replaced by models that finish a
// random number of cycles after being started (the GCE model also keeps its
// edge FIFO non-empty for a few cycles after done). For 1 to 6 blocks the
// test checks every launch against the look-ahead schedule: SETUP prefetches
// W(0) into half 0; BOOT builds G(0) into edge stage 0 and prefetches W(1);
// stage l runs the FUE on buffer/graph/weights l mod 2, the GCE into stage
// (l+1) mod 2 unless l is the last block, and prefetches W(l+1) for l >= 1.
// No unit may start while a unit of the previous stage is still busy, all
// units of a stage start in the same cycle, and a stage may not last more
// than 3 cycles beyond its slowest unit (the resynchronisation cost). The
// bound counters must add up to the waiting the models imply.
module tb_layer_scheduler;
  localparam int LW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, x_cur, e_wr_stage, e_rd_stage, w_rd_half;
  logic [LW-1:0] num_layers, layer, graphs_built;
  logic [31:0] words_per_layer, pf_base, gce_bound, fue_bound, pf_bound;
  logic gce_start, gce_done, gce_drained, fue_start, fue_done, pf_start, pf_half, pf_done;
  int checks = 0, failures = 0;

  layer_scheduler #(.LW(LW)) dut (.*);

  int g_left = -1, f_left = -1, p_left = -1, drain_left = 0;
  assign gce_done    = (g_left == 0);
  assign fue_done    = (f_left == 0);
  assign pf_done     = (p_left == 0);
  assign gce_drained = (drain_left == 0);

  // unit models and schedule checker
  int n_gce, n_fue, n_pf, stage_max, stage_len, L;
  bit in_stage;
  always @(posedge clk) if (rst_n) begin
    if (g_left >= 0) g_left <= g_left - 1;
    if (f_left >= 0) f_left <= f_left - 1;
    if (p_left >= 0) p_left <= p_left - 1;
    if (drain_left > 0 && g_left < 0) drain_left <= drain_left - 1;
    if (in_stage) stage_len <= stage_len + 1;
    if (gce_start || fue_start || pf_start) begin
      int a, b, c;
      checks++;
      if (g_left >= 0 || f_left >= 0 || p_left >= 0 || drain_left > 0) begin
        failures++; $display("unit started while the previous stage was busy");
      end
      if (in_stage && stage_len > stage_max + 3) begin
        failures++; $display("stage took %0d cycles, slowest unit %0d", stage_len, stage_max);
      end
      a = $urandom_range(1, 60); b = $urandom_range(1, 60); c = $urandom_range(1, 60);
      stage_max = 0;
      if (gce_start) begin g_left <= a; drain_left <= 3; n_gce++; stage_max = a + 4; end
      if (fue_start) begin f_left <= b; n_fue++; if (b + 1 > stage_max) stage_max = b + 1; end
      if (pf_start)  begin p_left <= c; n_pf++;  if (c + 1 > stage_max) stage_max = c + 1; end
      stage_len <= 0;
      in_stage  <= 1;
      // the stage's identity
      checks++;
      if (!fue_start) begin
        if (pf_start && !gce_start) begin        // SETUP
          if (pf_half !== 1'b0 || pf_base !== 32'd0) begin failures++; $display("SETUP prefetch wrong"); end
        end else begin                            // BOOT
          if (!gce_start || e_wr_stage !== 1'b0 || (pf_start !== (L > 1)) ||
              (pf_start && (pf_half !== 1'b1 || pf_base !== words_per_layer))) begin
            failures++; $display("BOOT launch wrong");
          end
        end
      end else begin
        int l;
        l = int'(layer);
        if (x_cur !== l[0] || e_rd_stage !== l[0] || w_rd_half !== l[0] ||
            gce_start !== (l + 1 < L) || (gce_start && e_wr_stage !== ~l[0]) ||
            pf_start !== (l >= 1 && l + 1 < L) ||
            (pf_start && (pf_half !== ~l[0] || pf_base !== words_per_layer * 32'(l + 1)))) begin
          failures++; $display("layer %0d launch wrong", l);
        end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      L = (r % 6) + 1;
      n_gce = 0; n_fue = 0; n_pf = 0; in_stage = 0;
      num_layers = LW'(L);
      words_per_layer = 32'($urandom_range(100, 5000));
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      in_stage = 0;
      checks++;
      if (n_fue != L || n_gce != L || n_pf != L || int'(graphs_built) != L) begin
        failures++;
        $display("L=%0d: fue %0d gce %0d pf %0d graphs %0d", L, n_fue, n_gce, n_pf, graphs_built);
      end
      checks++;
      if (busy) begin failures++; $display("busy after done"); end
    end
    checks++;
    if (gce_bound == 0 && fue_bound == 0 && pf_bound == 0) begin failures++; $display("no bound counted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
