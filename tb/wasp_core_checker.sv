// wasp_core_checker: watches one core's WaSP scheduler and checks it against
// an independent reference, cycle by cycle:
//   * the non-blocked priority-warp count, rebuilt from the launches and the
//     core's events;
//   * Priority_over_regular = freeMSHRs(previous cycle) - 2.5*count > 2,
//     computed in real arithmetic;
//   * each launch: a priority warp when the predictor prefers one and the
//     current tile still has one queued, a regular warp when it does not and
//     the tile still has one queued (else the other kind); the priority flag
//     follows the Mesh4 rule; every quad is launched exactly once;
//   * no more than MAX_WARPS warps in the core, and never warps of two tiles.
// It also counts how often each mechanism happened.
module wasp_core_checker
  import wasp_pkg::*;
#(
  parameter int MAX_WARPS = 64,
  parameter int MSHR_W    = 5,
  parameter int CNT_W     = 7,
  parameter int MAX_QUADS = 8192
) (
  input logic              clk,
  input logic              rst_n,
  input logic              in_valid,
  input logic              in_ready,
  input quad_t             in_quad,
  input logic              launch_valid,
  input logic              launch_ready,
  input launch_t           launch_data,
  input logic [MSHR_W-1:0] free_mshrs,
  input logic [CNT_W-1:0]  pri_block_cnt,
  input logic [CNT_W-1:0]  pri_unblock_cnt,
  input logic [CNT_W-1:0]  pri_retire_cnt,
  input logic [CNT_W-1:0]  retire_cnt,
  input logic              priority_over_regular,
  input logic [CNT_W-1:0]  nonblocked_pw,
  input logic [CNT_W-1:0]  warps_in_core,
  input logic              tile_switch,
  input logic              throttled
);
  int checks, failures;
  int n_in, n_launch, n_pri_launch, n_pred_true, n_pred_false_pri_waiting;
  int n_throttled, n_fallback_pri, n_tile_switch, n_slot_full, n_in_stall;
  int ref_nb, ref_in_core, prev_free, cur_tile, cur_tile_in_core;
  int pend_pri [int];   // per tile: queued priority quads
  int pend_reg [int];
  int tile_in;
  bit seen [MAX_QUADS];

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %m t=%0t: %s", $time, msg);
  endtask

  always @(negedge clk) begin
    bit exp_por, pri_waiting, reg_waiting, mesh;
    real rf;
    if (!rst_n) begin
      checks = 0; failures = 0; n_in = 0; n_launch = 0; n_pri_launch = 0;
      n_pred_true = 0; n_pred_false_pri_waiting = 0; n_throttled = 0; n_fallback_pri = 0;
      n_tile_switch = 0; n_slot_full = 0; n_in_stall = 0;
      ref_nb = 0; ref_in_core = 0; prev_free = 0; cur_tile = 0; tile_in = 0;
      cur_tile_in_core = -1;
      pend_pri.delete(); pend_reg.delete();
      foreach (seen[i]) seen[i] = 0;
    end else begin
      // predictor and counter
      rf = real'(prev_free) - 2.5 * real'(ref_nb);
      exp_por = rf > 2.0;
      checks++;
      if (int'(nonblocked_pw) != ref_nb) fail($sformatf("nonblocked %0d expected %0d", nonblocked_pw, ref_nb));
      checks++;
      if (priority_over_regular != exp_por) fail($sformatf("priority_over_regular %0b expected %0b", priority_over_regular, exp_por));
      checks++;
      if (int'(warps_in_core) != ref_in_core || ref_in_core > MAX_WARPS)
        fail($sformatf("warps_in_core %0d expected %0d", warps_in_core, ref_in_core));
      pri_waiting = pend_pri.exists(cur_tile) && pend_pri[cur_tile] > 0;
      reg_waiting = pend_reg.exists(cur_tile) && pend_reg[cur_tile] > 0;
      if (exp_por) n_pred_true++;
      else if (pri_waiting) n_pred_false_pri_waiting++;
      if ((pri_waiting || reg_waiting) && ref_in_core >= MAX_WARPS) n_slot_full++;
      if (in_valid && !in_ready) n_in_stall++;
      // launch
      if (launch_valid && launch_ready) begin
        int p;
        p = int'(launch_data.quad.payload);
        mesh = (launch_data.quad.qx % 4 == 0) && (launch_data.quad.qy % 4 == 0);
        checks++;
        if (launch_data.is_priority != mesh) fail("priority flag does not follow the Mesh4 rule");
        checks++;
        if (launch_data.is_priority ? !pri_waiting : !reg_waiting)
          fail("launched a warp of a kind the current tile has no more of");
        checks++;
        if (launch_data.is_priority != (pri_waiting && (exp_por || !reg_waiting)))
          fail($sformatf("launch kind %0b, expected %0b (por %0b)", launch_data.is_priority, pri_waiting && (exp_por || !reg_waiting), exp_por));
        checks++;
        if (p >= MAX_QUADS || seen[p]) fail($sformatf("quad %0d launched twice", p));
        else seen[p] = 1;
        checks++;
        if (cur_tile_in_core != -1 && cur_tile_in_core != cur_tile) fail("two tiles in the core");
        if (launch_data.is_priority) begin
          pend_pri[cur_tile]--; n_pri_launch++; ref_nb++;
          if (!exp_por) n_fallback_pri++;
        end else begin
          pend_reg[cur_tile]--;
          if (pri_waiting) n_throttled++;
        end
        checks++;
        if (throttled != (!launch_data.is_priority && pri_waiting)) fail("throttled flag");
        cur_tile_in_core = cur_tile;
        ref_in_core++;
        n_launch++;
      end
      if (tile_switch) begin
        checks++;
        if (ref_in_core != 0 || pri_waiting || reg_waiting) fail("tile switch while the tile is unfinished");
        cur_tile++; n_tile_switch++;
      end
      // input
      if (in_valid && in_ready) begin
        if (in_quad.first_of_tile) tile_in++;
        mesh = (in_quad.qx % 4 == 0) && (in_quad.qy % 4 == 0);
        if (mesh) pend_pri[tile_in] = (pend_pri.exists(tile_in) ? pend_pri[tile_in] : 0) + 1;
        else      pend_reg[tile_in] = (pend_reg.exists(tile_in) ? pend_reg[tile_in] : 0) + 1;
        n_in++;
      end
      // core events take effect at the coming edge
      ref_nb = ref_nb + int'(pri_unblock_cnt) - int'(pri_block_cnt) - int'(pri_retire_cnt);
      ref_in_core -= int'(retire_cnt);
      if (ref_in_core == 0) cur_tile_in_core = -1;
      prev_free = int'(free_mshrs);
    end
  end

  function automatic int all_launched(int n);
    int c = 0;
    for (int i = 0; i < n && i < MAX_QUADS; i++) if (seen[i]) c++;
    return c;
  endfunction
endmodule
