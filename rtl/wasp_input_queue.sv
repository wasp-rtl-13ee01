// wasp_input_queue: a core's input FIFO, divided into a priority queue and a
// regular queue.
//
// Quads reach the core in the rasterizer's scanline order. Each incoming quad
// is classified by priority_classifier (Mesh4: both quad coordinates a
// multiple of MESH) and written into the priority queue or the regular queue.
// The two queues together hold as many entries as the single baseline input
// queue did (PQ_DEPTH + RQ_DEPTH); the split is a static partition, so the
// division costs no storage.
//
// The queue also numbers tiles: a quad with first_of_tile set starts a new
// tile and increments a TILE_W-bit sequence number that is stored with every
// entry. The launch controller uses it to keep all warps of one tile ahead of
// the next one, which would otherwise be lost once priority quads of a later
// tile can overtake regular quads of an earlier tile.
//
// Interface: in_valid/in_ready handshake on the rasterizer side; in_ready is
// low when the queue the quad belongs to is full (the other may still have
// room, but the stream is in order, so the quad waits). On the launch side,
// each queue shows its head (first-word fall-through) with a valid flag and is
// popped by pq_pop / rq_pop. A quad written in cycle t is visible at the head
// in cycle t+1.
//
// Following the paper: the division into two queues, the classification
// before insertion, the unchanged total size. This design's own choices: the
// sizes of the two parts, the tile sequence number and the handshake.
module wasp_input_queue
  import wasp_pkg::*;
#(
  parameter int unsigned MESH     = 4,
  parameter int unsigned PQ_DEPTH = 64,
  parameter int unsigned RQ_DEPTH = 960
) (
  input  logic         clk,
  input  logic         rst_n,
  // from the rasterizer / baseline core assignment
  input  logic         in_valid,
  output logic         in_ready,
  input  quad_t        in_quad,
  // priority queue head
  output logic         pq_valid,
  output queue_entry_t pq_head,
  input  logic         pq_pop,
  // regular queue head
  output logic         rq_valid,
  output queue_entry_t rq_head,
  input  logic         rq_pop,
  // occupancy, for observation
  output logic [$clog2(PQ_DEPTH+1)-1:0] pq_count,
  output logic [$clog2(RQ_DEPTH+1)-1:0] rq_count
);
  logic         in_is_pri;
  logic         pq_full, rq_full, pq_empty, rq_empty;
  tile_seq_t    tile_cnt, in_tile;
  queue_entry_t in_entry;
  logic         accept;

  priority_classifier #(.MESH(MESH)) u_class (
    .qx(in_quad.qx), .qy(in_quad.qy), .is_priority(in_is_pri)
  );

  always_comb begin
    in_tile        = in_quad.first_of_tile ? tile_cnt + 1'b1 : tile_cnt;
    in_entry.quad  = in_quad;
    in_entry.tile  = in_tile;
    in_ready       = in_is_pri ? !pq_full : !rq_full;
    accept         = in_valid && in_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)      tile_cnt <= '0;
    else if (accept) tile_cnt <= in_tile;
  end

  warp_fifo #(.T(queue_entry_t), .DEPTH(PQ_DEPTH)) u_pq (
    .clk, .rst_n,
    .push(accept && in_is_pri), .wr_data(in_entry),
    .pop(pq_pop), .rd_data(pq_head),
    .empty(pq_empty), .full(pq_full), .count(pq_count)
  );

  warp_fifo #(.T(queue_entry_t), .DEPTH(RQ_DEPTH)) u_rq (
    .clk, .rst_n,
    .push(accept && !in_is_pri), .wr_data(in_entry),
    .pop(rq_pop), .rd_data(rq_head),
    .empty(rq_empty), .full(rq_full), .count(rq_count)
  );

  assign pq_valid = !pq_empty;
  assign rq_valid = !rq_empty;
endmodule
