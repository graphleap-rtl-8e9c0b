// sync_fifo: single-clock first-in first-out queue.
//
// Used as the edge output FIFO between the Graph Construction Engine and the
// look-ahead edge buffer: the GCE pushes one node's neighbour list per entry
// and the buffer writer pops them. The paper names these FIFOs; depth, width
// and the valid/ready style are this design's choices.
//
// Interface: push when in_valid && in_ready, pop when out_valid && out_ready.
// in_ready is low when full, out_valid is high when not empty; out_data shows
// the head entry combinationally (first-word fall-through). A push and a pop
// in the same cycle are both taken. Reset empties the queue.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign in_ready  = (int'(count) < DEPTH);
  assign out_valid = (count != 0);
  assign out_data  = mem[rd_ptr];
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (int'(wr_ptr) == DEPTH-1) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (int'(rd_ptr) == DEPTH-1) ? '0 : rd_ptr + 1'b1;
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A full FIFO never accepts and an empty one never delivers.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (int'(count) == DEPTH) |-> !do_push);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    (count == 0) |-> !do_pop);

endmodule
