// tb_wasp_heuristics: the three launch heuristics compared on the same
// two-tile quad stream and the same behavioural core (16 MSHRs, 60-cycle
// memory, two texture accesses per warp). All three are the same scheduler
// with different predictor constants:
//   WaSP         free - 2.5 * nonblocked_priority > 2   (CF 5/2, threshold 2)
//   Fullpriority always prefer a priority warp           (CF 0,   threshold -1)
//   Freemshr10   prefer a priority warp while free >= 10 (CF 0,   threshold 9)
//   Scanline     no priority warps at all (MESH 512: no quad of the tiles
//                used here qualifies), i.e. plain scanline launch order
// Checked: every run completes all 2048 quads; Fullpriority, which sends all
// priority warps first, fills the MSHRs and stalls the cache, while WaSP
// stalls it less; with this core model WaSP finishes before both Fullpriority
// and plain scanline order. Cycle counts, stall cycles and the average
// launch-to-finish time of priority and regular warps are printed.
module tb_wasp_heuristics;
  import wasp_pkg::*;
  localparam int TILES = 2;
  localparam int TOTAL = TILES * 1024;
  localparam int NH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid [NH], in_ready [NH], launch_valid [NH], launch_ready [NH], src_done [NH];
  quad_t in_quad [NH];
  launch_t launch_data [NH];
  logic [4:0] free_mshrs [NH];
  logic [6:0] pbc [NH], puc [NH], prc [NH], rc [NH];
  int done_at [NH];
  int checks = 0, failures = 0, cycles = 0;
  string names [NH] = '{"WaSP", "Fullpriority", "Freemshr10", "Scanline"};

  localparam int CFN [NH] = '{5, 0, 0, 5};
  localparam int THR [NH] = '{2, -1, 9, 2};
  localparam int MSH [NH] = '{4, 4, 4, 512};

  for (genvar h = 0; h < NH; h++) begin : g_h
    tile_quad_source #(.TILES(TILES), .TILE_Q(32), .X0(128), .Y0(64), .GAP_ONE_IN(1000)) u_src (
      .clk, .rst_n, .in_valid(in_valid[h]), .in_ready(in_ready[h]), .in_quad(in_quad[h]),
      .done(src_done[h])
    );
    wasp_core_scheduler #(.MESH(MSH[h]), .CF_NUM(CFN[h]), .THRESHOLD(THR[h])) u_sched (
      .clk, .rst_n, .in_valid(in_valid[h]), .in_ready(in_ready[h]), .in_quad(in_quad[h]),
      .launch_valid(launch_valid[h]), .launch_ready(launch_ready[h]), .launch_data(launch_data[h]),
      .free_mshrs(free_mshrs[h]), .pri_block_cnt(pbc[h]), .pri_unblock_cnt(puc[h]),
      .pri_retire_cnt(prc[h]), .retire_cnt(rc[h]),
      .priority_over_regular(), .nonblocked_pw(), .warps_in_core(), .tile_switch(), .throttled(),
      .cur_tile(), .pq_count(), .rq_count(), .real_free_scaled()
    );
    gpu_core_model #(.SLOTS(64), .MSHRS(16)) u_core (
      .clk, .rst_n, .launch_valid(launch_valid[h]), .launch_ready(launch_ready[h]),
      .launch_data(launch_data[h]), .free_mshrs(free_mshrs[h]),
      .pri_block_cnt(pbc[h]), .pri_unblock_cnt(puc[h]), .pri_retire_cnt(prc[h]), .retire_cnt(rc[h])
    );
    always @(posedge clk)
      if (rst_n && done_at[h] == 0 && src_done[h] && u_core.n_retired == TOTAL) done_at[h] = cycles;
  end

  always #5 clk = ~clk;

  task automatic need(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int st [NH], lp [NH], lr [NH];
    foreach (done_at[h]) done_at[h] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while ((done_at[0] == 0 || done_at[1] == 0 || done_at[2] == 0 || done_at[3] == 0) && cycles < 200000) begin
      @(posedge clk);
      cycles++;
    end
    @(negedge clk);
    st[0] = g_h[0].u_core.n_stall_cycles; st[1] = g_h[1].u_core.n_stall_cycles; st[2] = g_h[2].u_core.n_stall_cycles;
    lp[0] = int'(g_h[0].u_core.lat_sum_pri / 128); lr[0] = int'(g_h[0].u_core.lat_sum_reg / (TOTAL - 128));
    lp[1] = int'(g_h[1].u_core.lat_sum_pri / 128); lr[1] = int'(g_h[1].u_core.lat_sum_reg / (TOTAL - 128));
    lp[2] = int'(g_h[2].u_core.lat_sum_pri / 128); lr[2] = int'(g_h[2].u_core.lat_sum_reg / (TOTAL - 128));
    st[3] = g_h[3].u_core.n_stall_cycles; lp[3] = 0; lr[3] = int'(g_h[3].u_core.lat_sum_reg / TOTAL);
    need(g_h[3].u_core.n_pri_launched == 0, "Scanline run has no priority warps");
    for (int h = 0; h < NH; h++) begin
      need(done_at[h] > 0, $sformatf("%s finished all quads", names[h]));
      $display("%-12s cycles %0d, cache-stall cycles %0d, avg warp latency priority %0d regular %0d",
               names[h], done_at[h], st[h], lp[h], lr[h]);
    end
    need(st[1] > 0, "Fullpriority stalls the cache");
    need(st[0] < st[1], "WaSP stalls the cache less than Fullpriority");
    need(done_at[0] < done_at[1], "WaSP finishes before Fullpriority");
    need(done_at[0] < done_at[3], "WaSP finishes before plain scanline order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
