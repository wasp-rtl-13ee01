// wasp_launch_ctrl: picks the next warp to launch into the GPU core.
//
// Each cycle the controller looks at the heads of the priority and regular
// queues and at the predictor's Priority_over_regular bit:
//   * Priority_over_regular = 1: launch the priority head if there is one,
//     else the regular head.
//   * Priority_over_regular = 0: launch the regular head if there is one,
//     else the priority head (so the core never idles while work waits).
// A launch needs a free warp slot: the controller counts warps in the core
// (+1 per launch, -retire_cnt per cycle) against MAX_WARPS. The core accepts
// a warp with launch_ready; launch_valid/launch_data follow a valid/ready
// handshake and the queue head is popped in the cycle the launch fires.
//
// Tile order: all warps of a tile must finish before the next tile starts
// in the core. Only heads whose tile number equals the current tile are
// eligible. When neither head belongs to the current tile but one belongs to
// the next, every quad of the current tile has already been launched (quads
// enter the queues in order); the controller then waits until the core holds
// no warp and advances the current tile by one (tile_switch pulses).
//
// Following the paper: the priority/regular choice and the tile barrier.
// This design's own choices: the fall-back to the other queue when the
// preferred one has no eligible warp, the handshake and the tile numbering.
module wasp_launch_ctrl
  import wasp_pkg::*;
#(
  parameter int unsigned MAX_WARPS = 64,
  parameter int unsigned CNT_W     = $clog2(MAX_WARPS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // queue heads
  input  logic             pq_valid,
  input  queue_entry_t     pq_head,
  output logic             pq_pop,
  input  logic             rq_valid,
  input  queue_entry_t     rq_head,
  output logic             rq_pop,
  // from the blocking predictor
  input  logic             priority_over_regular,
  // to / from the GPU core
  output logic             launch_valid,
  input  logic             launch_ready,
  output launch_t          launch_data,
  input  logic [CNT_W-1:0] retire_cnt,      // warps (of any kind) finished
  // status
  output logic [CNT_W-1:0] warps_in_core,
  output tile_seq_t        cur_tile,
  output logic             tile_switch,
  output logic             throttled        // regular launched while a priority warp waited
);
  logic pq_cur, rq_cur, pq_next, rq_next;
  logic choose_pri, slot_free, fire;

  always_comb begin
    pq_cur      = pq_valid && (pq_head.tile == cur_tile);
    rq_cur      = rq_valid && (rq_head.tile == cur_tile);
    pq_next     = pq_valid && (pq_head.tile == tile_seq_t'(cur_tile + 1'b1));
    rq_next     = rq_valid && (rq_head.tile == tile_seq_t'(cur_tile + 1'b1));
    slot_free   = warps_in_core < CNT_W'(MAX_WARPS);
    choose_pri  = pq_cur && (priority_over_regular || !rq_cur);
    launch_valid = slot_free && (pq_cur || rq_cur);
    fire        = launch_valid && launch_ready;
    pq_pop      = fire && choose_pri;
    rq_pop      = fire && !choose_pri;
    launch_data.quad        = choose_pri ? pq_head.quad : rq_head.quad;
    launch_data.is_priority = choose_pri;
    tile_switch = !pq_cur && !rq_cur && (pq_next || rq_next) && (warps_in_core == '0);
    throttled   = rq_pop && pq_cur;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      warps_in_core <= '0;
      cur_tile      <= '0;
    end else begin
      warps_in_core <= warps_in_core + CNT_W'(fire) - retire_cnt;
      if (tile_switch) cur_tile <= cur_tile + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (CNT_W+1)'(warps_in_core) + (CNT_W+1)'(fire) >= (CNT_W+1)'(retire_cnt))
    else $error("wasp_launch_ctrl: more warps retired than launched");
  assert property (@(posedge clk) disable iff (!rst_n)
                   launch_valid && !launch_ready |=> launch_valid)
    else $error("wasp_launch_ctrl: launch_valid dropped before it was accepted");
endmodule
