// tb_sync_fifo: self-checking test of the edge-index FIFO.
//
// Drives random pushes and pops (both sides throttled at random) into a
// 16-bit, 8-deep FIFO and compares every popped word with a queue model.
// Also checks the occupancy output, that in_ready drops exactly when the
// FIFO is full, and the first-word fall-through timing: a word pushed into
// an empty FIFO is visible on the output one cycle later.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  logic [W-1:0] model[$];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // fall-through latency
    in_valid = 1; in_data = 16'hA5A5;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || out_data !== 16'hA5A5) begin failures++; $display("FWFT latency wrong"); end
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    // random traffic
    for (int c = 0; c < 4000; c++) begin
      in_valid  = ($urandom_range(0, 99) < (c < 2000 ? 70 : 30));
      in_data   = W'($urandom);
      out_ready = ($urandom_range(0, 99) < (c < 2000 ? 30 : 70));
      #1;
      checks++;
      if (count !== ($clog2(D+1))'(model.size()) || in_ready !== (model.size() < D) ||
          out_valid !== (model.size() > 0)) begin
        failures++;
        $display("status mismatch at %0d: count %0d model %0d", c, count, model.size());
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== model[0]) begin failures++; $display("data mismatch %h vs %h", out_data, model[0]); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
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
