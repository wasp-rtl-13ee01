// warp_fifo: synchronous first-in first-out queue of warp descriptors.
//
// Used twice in each core's input queue, once as the priority queue and once
// as the regular queue. Storage is a DEPTH-entry register array with read and
// write pointers and an occupancy counter. A write is accepted when the queue
// is not full (push while full is ignored, and flagged by an assertion); a pop
// removes the head, which is always visible on rd_data while not empty
// (first-word fall-through). Push and pop may happen in the same cycle, also
// when full. Active-low synchronous reset empties the queue.
module warp_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  T                           wr_data,
  input  logic                       pop,
  output T                           rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  T                             mem [DEPTH];
  logic [AW-1:0]                rd_ptr, wr_ptr;
  logic [CW-1:0]                cnt;
  logic                         do_push, do_pop;

  assign empty   = (cnt == 0);
  assign full    = (cnt == CW'(DEPTH));
  assign count   = cnt;
  assign rd_data = mem[rd_ptr];
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      cnt <= cnt + CW'(do_push) - CW'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("warp_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("warp_fifo: pop while empty");
endmodule
