// tb_wasp_top: the whole WaSP scheduling layer at its default sizes (four
// cores, 64 warps each, Mesh4, CF 2.5, threshold 2, 64+960 queue entries), no
// parameter overridden. Each core gets its own stream of three 32x32-quad tiles
// (64x64 pixels, scanline order) in a different part of the screen and runs
// against a behavioural core with an 8-entry-MSHR L0 and a 60-cycle memory.
// A checker per core verifies every cycle (see wasp_core_checker); at the end
// the testbench checks that all 12288 quads ran and counts, summed over the
// cores, how often each mechanism happened, failing on any that never did:
// predictor-chosen priority launch, regular launch while a priority warp
// waited (MSHR throttling), priority launch as fall-back, tile switch,
// warp-slot limit and input back-pressure.
module tb_wasp_top;
  import wasp_pkg::*;
  localparam int NC = 4;
  localparam int TILES = 3;
  localparam int PER_CORE = TILES * 1024;
  logic clk = 0, rst_n = 0;
  logic              in_valid     [NC];
  logic              in_ready     [NC];
  quad_t             in_quad      [NC];
  logic              launch_valid [NC];
  logic              launch_ready [NC];
  launch_t           launch_data  [NC];
  logic [4:0]        free_mshrs   [NC];
  logic [6:0]        pri_block_cnt [NC], pri_unblock_cnt [NC], pri_retire_cnt [NC], retire_cnt [NC];
  logic              por [NC], tile_switch [NC], throttled [NC];
  logic [6:0]        nonblocked_pw [NC], warps_in_core [NC];
  tile_seq_t         cur_tile [NC];
  logic [6:0]        pq_count [NC];
  logic [9:0]        rq_count [NC];
  logic signed [19:0] real_free_scaled [NC];
  logic              src_done [NC];
  int checks, failures, cycles;
  int s_launch, s_pri, s_fb, s_thr, s_sw, s_full, s_in, s_ret, s_chk, s_fail, s_stall, s_prim;

  wasp_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_quad, .launch_valid, .launch_ready, .launch_data,
    .free_mshrs, .pri_block_cnt, .pri_unblock_cnt, .pri_retire_cnt, .retire_cnt,
    .priority_over_regular(por), .nonblocked_pw, .warps_in_core, .tile_switch, .throttled,
    .cur_tile, .pq_count, .rq_count, .real_free_scaled
  );

  for (genvar c = 0; c < NC; c++) begin : g_core
    tile_quad_source #(.TILES(TILES), .TILE_Q(32), .X0(c * 2 * 32), .Y0(96)) u_src (
      .clk, .rst_n, .in_valid(in_valid[c]), .in_ready(in_ready[c]), .in_quad(in_quad[c]),
      .done(src_done[c])
    );
    gpu_core_model #(.SLOTS(64), .MSHRS(8)) u_core (
      .clk, .rst_n, .launch_valid(launch_valid[c]), .launch_ready(launch_ready[c]),
      .launch_data(launch_data[c]), .free_mshrs(free_mshrs[c]),
      .pri_block_cnt(pri_block_cnt[c]), .pri_unblock_cnt(pri_unblock_cnt[c]),
      .pri_retire_cnt(pri_retire_cnt[c]), .retire_cnt(retire_cnt[c])
    );
    wasp_core_checker #(.MAX_WARPS(64), .MAX_QUADS(PER_CORE)) u_chk (
      .clk, .rst_n, .in_valid(in_valid[c]), .in_ready(in_ready[c]), .in_quad(in_quad[c]),
      .launch_valid(launch_valid[c]), .launch_ready(launch_ready[c]), .launch_data(launch_data[c]),
      .free_mshrs(free_mshrs[c]), .pri_block_cnt(pri_block_cnt[c]),
      .pri_unblock_cnt(pri_unblock_cnt[c]), .pri_retire_cnt(pri_retire_cnt[c]),
      .retire_cnt(retire_cnt[c]), .priority_over_regular(por[c]), .nonblocked_pw(nonblocked_pw[c]),
      .warps_in_core(warps_in_core[c]), .tile_switch(tile_switch[c]), .throttled(throttled[c])
    );
  end

  always #5 clk = ~clk;

  task automatic need(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int all_done();
    int d = 1;
    if (!(src_done[0] && g_core[0].u_core.n_retired == PER_CORE)) d = 0;
    if (!(src_done[1] && g_core[1].u_core.n_retired == PER_CORE)) d = 0;
    if (!(src_done[2] && g_core[2].u_core.n_retired == PER_CORE)) d = 0;
    if (!(src_done[3] && g_core[3].u_core.n_retired == PER_CORE)) d = 0;
    return d;
  endfunction

  `define SUM_CORES(field) (g_core[0].field + g_core[1].field + g_core[2].field + g_core[3].field)

  initial begin
    #50000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", `SUM_CORES(u_chk.checks), `SUM_CORES(u_chk.failures) + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    cycles = 0;
    while (all_done() == 0 && cycles < 1000000) begin
      @(posedge clk);
      cycles++;
    end
    repeat (2) @(negedge clk);
    s_chk = `SUM_CORES(u_chk.checks);     s_fail = `SUM_CORES(u_chk.failures);
    s_launch = `SUM_CORES(u_chk.n_launch); s_pri = `SUM_CORES(u_chk.n_pri_launch);
    s_fb = `SUM_CORES(u_chk.n_fallback_pri); s_thr = `SUM_CORES(u_chk.n_throttled);
    s_sw = `SUM_CORES(u_chk.n_tile_switch); s_full = `SUM_CORES(u_chk.n_slot_full);
    s_in = `SUM_CORES(u_chk.n_in_stall);   s_ret = `SUM_CORES(u_core.n_retired);
    s_stall = `SUM_CORES(u_core.n_stall_cycles); s_prim = `SUM_CORES(u_core.n_primary);
    checks = s_chk; failures = s_fail;
    need(s_launch == NC * PER_CORE && s_ret == NC * PER_CORE, "every quad launched and finished");
    need(g_core[0].u_chk.all_launched(PER_CORE) == PER_CORE && g_core[3].u_chk.all_launched(PER_CORE) == PER_CORE,
         "no quad lost");
    need(s_pri == NC * PER_CORE / 16, "priority warps are one in sixteen");
    need(s_pri - s_fb > 0, "mechanism: priority warp chosen by the predictor");
    need(s_thr > 0, "mechanism: regular warp launched while a priority warp waited");
    need(s_fb > 0, "mechanism: priority warp launched as fall-back");
    need(s_sw == NC * TILES, "mechanism: tile switch");
    need(s_full > 0, "mechanism: warp-slot limit");
    need(s_in > 0, "mechanism: input back-pressure");
    $display("cycles %0d; launched %0d; priority %0d (%0d by predictor, %0d fall-back)", cycles, s_launch, s_pri, s_pri - s_fb, s_fb);
    $display("regular-while-priority-waited %0d, tile switches %0d, slot-full cycles %0d, input stalls %0d", s_thr, s_sw, s_full, s_in);
    $display("L0 primary misses %0d, cache-stall cycles %0d", s_prim, s_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
