// tb_wasp_core_scheduler: one core's WaSP scheduler at its default sizes
// (64 warps, 64+960 queue entries, Mesh4, CF 2.5, threshold 2) in closed loop
// with a behavioural core (8 MSHRs, 60-cycle memory, two texture accesses
// per warp). Three 32x32-quad tiles (64x64 pixels each) are rendered. The
// checker verifies every cycle; at the end the testbench checks that all
// 3072 quads ran, all three tile switches happened and that each mechanism
// occurred: priority preferred, regular launched while a priority warp
// waited, priority launched as fall-back, warp-slot limit, input back-pressure
// and at least one primary miss per priority warp's block.
module tb_wasp_core_scheduler;
  import wasp_pkg::*;
  localparam int TILES = 3;
  localparam int TOTAL = TILES * 1024;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, launch_valid, launch_ready, src_done;
  quad_t in_quad;
  launch_t launch_data;
  logic [4:0] free_mshrs;
  logic [6:0] pri_block_cnt, pri_unblock_cnt, pri_retire_cnt, retire_cnt, nonblocked_pw, warps_in_core;
  logic por, tile_switch, throttled;
  tile_seq_t cur_tile;
  logic [6:0] pq_count;
  logic [9:0] rq_count;
  logic signed [19:0] real_free_scaled;
  int cycles;

  tile_quad_source #(.TILES(TILES), .TILE_Q(32), .X0(64), .Y0(32)) u_src (
    .clk, .rst_n, .in_valid, .in_ready, .in_quad, .done(src_done)
  );

  wasp_core_scheduler dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_quad,
    .launch_valid, .launch_ready, .launch_data,
    .free_mshrs, .pri_block_cnt, .pri_unblock_cnt, .pri_retire_cnt, .retire_cnt,
    .priority_over_regular(por), .nonblocked_pw, .warps_in_core, .tile_switch, .throttled,
    .cur_tile, .pq_count, .rq_count, .real_free_scaled
  );

  gpu_core_model #(.SLOTS(64), .MSHRS(8)) u_core (
    .clk, .rst_n, .launch_valid, .launch_ready, .launch_data,
    .free_mshrs, .pri_block_cnt, .pri_unblock_cnt, .pri_retire_cnt, .retire_cnt
  );

  wasp_core_checker #(.MAX_WARPS(64)) u_chk (
    .clk, .rst_n, .in_valid, .in_ready, .in_quad, .launch_valid, .launch_ready, .launch_data,
    .free_mshrs, .pri_block_cnt, .pri_unblock_cnt, .pri_retire_cnt, .retire_cnt,
    .priority_over_regular(por), .nonblocked_pw, .warps_in_core, .tile_switch, .throttled
  );

  always #5 clk = ~clk;

  int checks, failures;

  task automatic need(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", u_chk.checks, u_chk.failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    cycles = 0;
    while (!(src_done && u_core.n_retired == TOTAL) && cycles < 1000000) begin
      @(posedge clk);
      cycles++;
    end
    repeat (2) @(negedge clk);
    checks = u_chk.checks; failures = u_chk.failures;
    need(u_chk.n_launch == TOTAL && u_chk.all_launched(TOTAL) == TOTAL, "every quad launched once");
    need(u_chk.n_pri_launch == TOTAL / 16, "one priority warp per 16 quads");
    need(u_chk.n_tile_switch == TILES, "tile switches");
    need(u_chk.n_pri_launch - u_chk.n_fallback_pri > 0, "priority warp chosen by the predictor");
    need(u_chk.n_throttled > 0, "regular warp launched while a priority warp waited");
    need(u_chk.n_fallback_pri > 0, "priority warp launched as fall-back");
    need(u_chk.n_slot_full > 0, "warp-slot limit reached");
    need(u_chk.n_in_stall > 0, "input back-pressure");
    need(u_core.n_primary >= TOTAL / 16, "primary misses");
    $display("cycles %0d, launched %0d (priority %0d: %0d by predictor, %0d fall-back), regular-while-priority-waited %0d",
             cycles, u_chk.n_launch, u_chk.n_pri_launch, u_chk.n_pri_launch - u_chk.n_fallback_pri,
             u_chk.n_fallback_pri, u_chk.n_throttled);
    $display("tile switches %0d, slot-full cycles %0d, input stalls %0d", u_chk.n_tile_switch, u_chk.n_slot_full, u_chk.n_in_stall);
    $display("L0: hits %0d, primary misses %0d, secondary misses %0d, cache-stall cycles %0d",
             u_core.n_hits, u_core.n_primary, u_core.n_secondary, u_core.n_stall_cycles);
    $display("avg launch-to-finish latency: priority %0d, regular %0d cycles",
             u_core.lat_sum_pri / (u_core.n_pri_launched > 0 ? u_core.n_pri_launched : 1),
             u_core.lat_sum_reg / ((u_core.n_launched - u_core.n_pri_launched) > 0 ? (u_core.n_launched - u_core.n_pri_launched) : 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
