// tb_wasp_sensitivity: warps-per-core sweep. The scheduler and the
// behavioural core are built for 28, 32, 48, 64 and 128 warps, each once with
// WaSP and once with plain scanline order (MESH 512, so no quad of these
// tiles is a priority warp), and render the same two 64x64-pixel tiles
// (16-MSHR L0, 60-cycle memory). Checked: every run completes all quads and
// never holds more warps than its limit; WaSP finishes no later than
// scanline order at every size. The cycle counts are printed as a table.
module tb_wasp_sensitivity;
  import wasp_pkg::*;
  localparam int TILES = 2;
  localparam int TOTAL = TILES * 1024;
  localparam int NS = 5;
  localparam int WARPS [NS] = '{28, 32, 48, 64, 128};
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cycles = 0;
  int done_w [NS], done_s [NS];

  for (genvar i = 0; i < NS; i++) begin : g_size
    for (genvar k = 0; k < 2; k++) begin : g_kind   // k = 0 WaSP, 1 scanline
      localparam int W  = WARPS[i];
      localparam int CW = $clog2(W + 1);
      logic in_valid, in_ready, launch_valid, launch_ready, src_done;
      quad_t in_quad;
      launch_t launch_data;
      logic [4:0] free_mshrs;
      logic [CW-1:0] pbc, puc, prc, rc, wic;
      int peak;
      tile_quad_source #(.TILES(TILES), .TILE_Q(32), .X0(128), .Y0(64), .GAP_ONE_IN(1000)) u_src (
        .clk, .rst_n, .in_valid, .in_ready, .in_quad, .done(src_done)
      );
      wasp_core_scheduler #(.MAX_WARPS(W), .MESH(k == 0 ? 4 : 512)) u_sched (
        .clk, .rst_n, .in_valid, .in_ready, .in_quad,
        .launch_valid, .launch_ready, .launch_data,
        .free_mshrs, .pri_block_cnt(pbc), .pri_unblock_cnt(puc), .pri_retire_cnt(prc), .retire_cnt(rc),
        .priority_over_regular(), .nonblocked_pw(), .warps_in_core(wic), .tile_switch(), .throttled(),
        .cur_tile(), .pq_count(), .rq_count(), .real_free_scaled()
      );
      gpu_core_model #(.SLOTS(W), .MSHRS(16), .CNT_W(CW)) u_core (
        .clk, .rst_n, .launch_valid, .launch_ready, .launch_data, .free_mshrs,
        .pri_block_cnt(pbc), .pri_unblock_cnt(puc), .pri_retire_cnt(prc), .retire_cnt(rc)
      );
      always @(posedge clk) begin
        if (!rst_n) peak = 0;
        else begin
          if (int'(wic) > peak) peak = int'(wic);
          if (src_done && u_core.n_retired == TOTAL) begin
            if (k == 0 && done_w[i] == 0) done_w[i] = cycles;
            if (k == 1 && done_s[i] == 0) done_s[i] = cycles;
          end
        end
      end
    end
  end

  always #5 clk = ~clk;

  task automatic need(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit all_done();
    for (int i = 0; i < NS; i++) if (done_w[i] == 0 || done_s[i] == 0) return 0;
    return 1;
  endfunction

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pk [NS][2];
    foreach (done_w[i]) begin done_w[i] = 0; done_s[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (!all_done() && cycles < 400000) begin
      @(posedge clk);
      cycles++;
    end
    @(negedge clk);
    pk[0][0] = g_size[0].g_kind[0].peak; pk[0][1] = g_size[0].g_kind[1].peak;
    pk[1][0] = g_size[1].g_kind[0].peak; pk[1][1] = g_size[1].g_kind[1].peak;
    pk[2][0] = g_size[2].g_kind[0].peak; pk[2][1] = g_size[2].g_kind[1].peak;
    pk[3][0] = g_size[3].g_kind[0].peak; pk[3][1] = g_size[3].g_kind[1].peak;
    pk[4][0] = g_size[4].g_kind[0].peak; pk[4][1] = g_size[4].g_kind[1].peak;
    $display("warps  scanline-cycles  WaSP-cycles  speed-up");
    for (int i = 0; i < NS; i++) begin
      need(done_w[i] > 0 && done_s[i] > 0, $sformatf("%0d warps: both runs finish", WARPS[i]));
      need(pk[i][0] <= WARPS[i] && pk[i][1] <= WARPS[i], $sformatf("%0d warps: limit respected", WARPS[i]));
      need(done_w[i] <= done_s[i], $sformatf("%0d warps: WaSP not slower than scanline", WARPS[i]));
      $display("%5d  %15d  %11d  %7.3f", WARPS[i], done_s[i], done_w[i], real'(done_s[i]) / real'(done_w[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
