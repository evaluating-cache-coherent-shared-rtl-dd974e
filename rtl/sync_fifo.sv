// sync_fifo: small synchronous first-in first-out buffer used by the router
// queues, the network interfaces and the memory controller.
//
// A word is written when push is high and the FIFO is not full; the oldest
// word is presented on rdata whenever empty is low and is removed by pop.
// Full and empty come straight from the registered count, so they never depend
// on push or pop in the same cycle; a full FIFO therefore does not accept a
// push in the cycle it is popped. Generic helper, not a block of the paper.
module sync_fifo #(
  parameter type T = logic [7:0],
  parameter int unsigned DEPTH = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wdata,
  input  logic pop,
  output T     rdata,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned CW = $clog2(DEPTH+1);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic do_push, do_pop;

  assign full    = (32'(count) == DEPTH);
  assign empty   = (count == 0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rdata   = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wdata;
  end

`ifndef SYNTHESIS
  // A push into a full FIFO is a protocol error of the writer.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
`endif
endmodule
