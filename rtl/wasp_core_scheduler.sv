// wasp_core_scheduler: the WaSP warp scheduler of one GPU core.
//
// Quads assigned to this core arrive in scanline order and are split by the
// Mesh4 rule into a priority queue (one quad in sixteen, spread evenly over
// the tile) and a regular queue. Before each launch the scheduler estimates
// how many MSHRs of the core's first-level data cache will still be free
// when the new warp reaches the load/store unit,
//   Real_freeMSHRs = freeMSHRs - nonblocked_priority_warps * 2.5,
// and launches a priority warp while that estimate exceeds a threshold,
// otherwise a regular warp. Priority warps thereby fetch a tile's texture
// working set early ("prefetch by scheduling") without filling the MSHRs
// and stalling the cache, and regular warps keep their scanline order.
//
// Structure: wasp_input_queue -> wasp_launch_ctrl -> core, with
// blocking_predictor and nonblocked_pw_counter closing the loop from the
// core's free-MSHR count and its priority-warp block/unblock/retire events.
//
// Interface and timing: in_valid/in_ready for quads; launch_valid/
// launch_ready for warps (one warp per cycle at most); free_mshrs is sampled
// each cycle; the event counts are applied one cycle later. A quad can be
// launched at the earliest in the cycle after it is accepted.
module wasp_core_scheduler
  import wasp_pkg::*;
#(
  parameter int unsigned MAX_WARPS = 64,
  parameter int unsigned MESH      = 4,
  parameter int unsigned PQ_DEPTH  = 64,
  parameter int unsigned RQ_DEPTH  = 960,
  parameter int unsigned MSHR_W    = 5,
  parameter int unsigned CF_NUM    = 5,
  parameter int unsigned CF_DEN    = 2,
  parameter int          THRESHOLD = 2,
  parameter int unsigned CNT_W     = $clog2(MAX_WARPS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // quads from the rasterizer, already assigned to this core
  input  logic              in_valid,
  output logic              in_ready,
  input  quad_t             in_quad,
  // warps into the core
  output logic              launch_valid,
  input  logic              launch_ready,
  output launch_t           launch_data,
  // state reported by the core and its L0/L1 data cache
  input  logic [MSHR_W-1:0] free_mshrs,
  input  logic [CNT_W-1:0]  pri_block_cnt,    // priority warps that blocked this cycle
  input  logic [CNT_W-1:0]  pri_unblock_cnt,  // priority warps woken this cycle
  input  logic [CNT_W-1:0]  pri_retire_cnt,   // priority warps finished this cycle
  input  logic [CNT_W-1:0]  retire_cnt,       // all warps finished this cycle
  // status
  output logic              priority_over_regular,
  output logic [CNT_W-1:0]  nonblocked_pw,
  output logic [CNT_W-1:0]  warps_in_core,
  output logic              tile_switch,
  output logic              throttled,
  output tile_seq_t         cur_tile,
  output logic [$clog2(PQ_DEPTH+1)-1:0] pq_count,
  output logic [$clog2(RQ_DEPTH+1)-1:0] rq_count,
  output logic signed [MSHR_W+CNT_W+7:0] real_free_scaled   // Real_freeMSHRs * CF_DEN
);
  logic         pq_valid, rq_valid, pq_pop, rq_pop;
  queue_entry_t pq_head, rq_head;

  wasp_input_queue #(.MESH(MESH), .PQ_DEPTH(PQ_DEPTH), .RQ_DEPTH(RQ_DEPTH)) u_queue (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_quad,
    .pq_valid, .pq_head, .pq_pop,
    .rq_valid, .rq_head, .rq_pop,
    .pq_count, .rq_count
  );

  nonblocked_pw_counter #(.MAX_WARPS(MAX_WARPS), .CNT_W(CNT_W)) u_nbcnt (
    .clk, .rst_n,
    .launch_pri (launch_valid && launch_ready && launch_data.is_priority),
    .unblock_cnt(pri_unblock_cnt),
    .block_cnt  (pri_block_cnt),
    .retire_cnt (pri_retire_cnt),
    .count      (nonblocked_pw)
  );

  blocking_predictor #(
    .MSHR_W(MSHR_W), .CNT_W(CNT_W), .CF_NUM(CF_NUM), .CF_DEN(CF_DEN), .THRESHOLD(THRESHOLD)
  ) u_pred (
    .clk, .rst_n,
    .free_mshrs, .nonblocked_pw,
    .priority_over_regular, .real_free_scaled
  );

  wasp_launch_ctrl #(.MAX_WARPS(MAX_WARPS), .CNT_W(CNT_W)) u_launch (
    .clk, .rst_n,
    .pq_valid, .pq_head, .pq_pop,
    .rq_valid, .rq_head, .rq_pop,
    .priority_over_regular,
    .launch_valid, .launch_ready, .launch_data,
    .retire_cnt,
    .warps_in_core, .cur_tile, .tile_switch, .throttled
  );
endmodule
