// sync_fifo: single-clock FIFO with a type parameter. It is the patch queue
// of the workload scheduler (the paper names the queue and says the
// scheduler enqueues patches while it is not full; depth is this design's
// choice) and the small request-tag queue of the memory controller.
// push is ignored when full, pop when empty. rd_data shows the head entry
// combinationally (first-word fall-through).
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wr_data,
  input  logic pop,
  output T     rd_data,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_push, do_pop;

  assign full    = (count == ($bits(count))'(DEPTH));
  assign empty   = (count == 0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) if (do_push) mem[wp] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
    end
  end
endmodule
