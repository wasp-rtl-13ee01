// tb_wasp_launch_ctrl: drives the launch controller with queue heads taken
// from reference queues holding three tiles, a random Priority_over_regular
// bit, a random launch_ready and warps that finish after random times. Each
// cycle the expected launch (valid, priority or regular, which quad), the
// pops, the warp count and the tile switch are computed in the testbench and
// compared. A small warp limit (8) makes the slot limit bite. Also checks
// that a tile's warps never overlap the next tile's warps in the core.
module tb_wasp_launch_ctrl;
  import wasp_pkg::*;
  localparam int MAXW = 8;
  localparam int W = $clog2(MAXW + 1);
  logic clk = 0, rst_n = 0;
  logic pq_valid, rq_valid, pq_pop, rq_pop, por, launch_valid, launch_ready, tile_switch, throttled;
  queue_entry_t pq_head, rq_head;
  launch_t launch_data;
  logic [W-1:0] retire_cnt, warps_in_core;
  tile_seq_t cur_tile;
  queue_entry_t pq_ref[$], rq_ref[$];
  int finish_at[$];
  int tile_of_warp[$];
  int checks = 0, failures = 0;
  int ref_cur = 0, ref_in = 0, n_launch = 0, total = 0;
  int n_slot_full = 0, n_switch = 0, n_pri_pref = 0, n_pri_fallback = 0, n_throttled = 0;

  wasp_launch_ctrl #(.MAX_WARPS(MAXW)) dut (
    .clk, .rst_n, .pq_valid, .pq_head, .pq_pop, .rq_valid, .rq_head, .rq_pop,
    .priority_over_regular(por), .launch_valid, .launch_ready, .launch_data,
    .retire_cnt, .warps_in_core, .cur_tile, .tile_switch, .throttled
  );

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    queue_entry_t e;
    int cyc;
    bit pq_cur, rq_cur, pq_nxt, rq_nxt, exp_valid, exp_pri, exp_switch;
    // three tiles (numbers 1..3), 6 priority and 30 regular quads each
    for (int t = 1; t <= 3; t++) begin
      for (int i = 0; i < 36; i++) begin
        e = '0;
        e.tile = tile_seq_t'(t);
        e.quad.payload = payload_t'(t * 100 + i);
        e.quad.first_of_tile = (i == 0);
        if (i % 6 == 0) pq_ref.push_back(e); else rq_ref.push_back(e);
        total++;
      end
    end
    por = 0; launch_ready = 0; retire_cnt = 0;
    pq_valid = 0; rq_valid = 0; pq_head = '0; rq_head = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    cyc = 0;
    while (n_launch < total || ref_in > 0) begin
      int r;
      @(negedge clk);
      cyc++;
      // retirements due this cycle
      r = 0;
      for (int k = finish_at.size() - 1; k >= 0; k--)
        if (finish_at[k] <= cyc) begin finish_at.delete(k); tile_of_warp.delete(k); r++; end
      retire_cnt = W'(r);
      pq_valid = pq_ref.size() > 0; if (pq_valid) pq_head = pq_ref[0];
      rq_valid = rq_ref.size() > 0; if (rq_valid) rq_head = rq_ref[0];
      por = ($urandom_range(0, 4) == 0);
      launch_ready = $urandom_range(0, 4) != 0;
      #1;
      pq_cur = pq_valid && int'(pq_head.tile) == ref_cur % 4;
      rq_cur = rq_valid && int'(rq_head.tile) == ref_cur % 4;
      pq_nxt = pq_valid && int'(pq_head.tile) == (ref_cur + 1) % 4;
      rq_nxt = rq_valid && int'(rq_head.tile) == (ref_cur + 1) % 4;
      exp_valid  = (ref_in < MAXW) && (pq_cur || rq_cur);
      exp_pri    = pq_cur && (por || !rq_cur);
      exp_switch = !pq_cur && !rq_cur && (pq_nxt || rq_nxt) && ref_in == 0;
      checks++;
      if (int'(warps_in_core) != ref_in) fail($sformatf("warps_in_core %0d expected %0d", warps_in_core, ref_in));
      checks++;
      if (launch_valid != exp_valid) fail($sformatf("cycle %0d launch_valid %0b expected %0b", cyc, launch_valid, exp_valid));
      checks++;
      if (tile_switch != exp_switch) fail($sformatf("cycle %0d tile_switch %0b expected %0b", cyc, tile_switch, exp_switch));
      if ((pq_cur || rq_cur) && ref_in >= MAXW) n_slot_full++;
      if (exp_valid) begin
        checks++;
        if (launch_data.is_priority != exp_pri ||
            launch_data.quad != (exp_pri ? pq_head.quad : rq_head.quad))
          fail($sformatf("cycle %0d launched %0d (pri %0b), expected pri %0b", cyc,
                         launch_data.quad.payload, launch_data.is_priority, exp_pri));
      end
      checks++;
      if (pq_pop != (exp_valid && launch_ready && exp_pri) ||
          rq_pop != (exp_valid && launch_ready && !exp_pri))
        fail($sformatf("cycle %0d pops %0b %0b", cyc, pq_pop, rq_pop));
      checks++;
      if (throttled != (exp_valid && launch_ready && !exp_pri && pq_cur)) fail("throttled flag");
      // advance the reference
      if (exp_valid && launch_ready) begin
        // no warp of another tile may be in the core
        foreach (tile_of_warp[k]) if (tile_of_warp[k] != ref_cur) fail("tiles overlap in the core");
        if (exp_pri) begin
          void'(pq_ref.pop_front());
          if (por) n_pri_pref++; else n_pri_fallback++;
        end else begin
          void'(rq_ref.pop_front());
          if (pq_cur) n_throttled++;
        end
        finish_at.push_back(cyc + $urandom_range(1, 40));
        tile_of_warp.push_back(ref_cur);
        ref_in++;
        n_launch++;
      end
      ref_in -= r;
      if (exp_switch) begin ref_cur++; n_switch++; end
      if (cyc > 100000) break;
    end
    @(negedge clk);
    checks++;
    if (n_switch != 3) fail($sformatf("%0d tile switches, expected 3", n_switch));
    checks++;
    if (n_slot_full == 0 || n_pri_pref == 0 || n_pri_fallback == 0 || n_throttled == 0)
      fail("a mechanism never happened");
    $display("launched %0d, slot-full cycles %0d, tile switches %0d, priority by predictor %0d, priority as fall-back %0d, regular while priority waited %0d",
             n_launch, n_slot_full, n_switch, n_pri_pref, n_pri_fallback, n_throttled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
