// wasp_top: WaSP warp scheduling for all fragment cores of the GPU.
//
// The evaluated GPU has four fragment cores (four texture caches and four
// fragment instruction caches). The baseline scheduler assigns each quad to a
// core by its screen position; WaSP then reorders, within each core, the
// order in which that core's quads are launched as warps. This top holds one
// wasp_core_scheduler per core. Everything around it (rasterizer, the
// quad-to-core assignment, the shader cores, their L0/L1 caches and MSHRs,
// L2 and memory) belongs to the baseline GPU and connects through the ports:
// per core, a quad stream in, a warp stream out, the data cache's free-MSHR
// count and the core's warp block/unblock/retire event counts.
//
// All ports are arrays indexed by core; the timing is that of
// wasp_core_scheduler. Defaults: 4 cores, 64 warps per core, Mesh4, CF = 2.5.
module wasp_top
  import wasp_pkg::*;
#(
  parameter int unsigned NUM_CORES = 4,
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
  input  logic              in_valid        [NUM_CORES],
  output logic              in_ready        [NUM_CORES],
  input  quad_t             in_quad         [NUM_CORES],
  output logic              launch_valid    [NUM_CORES],
  input  logic              launch_ready    [NUM_CORES],
  output launch_t           launch_data     [NUM_CORES],
  input  logic [MSHR_W-1:0] free_mshrs      [NUM_CORES],
  input  logic [CNT_W-1:0]  pri_block_cnt   [NUM_CORES],
  input  logic [CNT_W-1:0]  pri_unblock_cnt [NUM_CORES],
  input  logic [CNT_W-1:0]  pri_retire_cnt  [NUM_CORES],
  input  logic [CNT_W-1:0]  retire_cnt      [NUM_CORES],
  output logic              priority_over_regular [NUM_CORES],
  output logic [CNT_W-1:0]  nonblocked_pw   [NUM_CORES],
  output logic [CNT_W-1:0]  warps_in_core   [NUM_CORES],
  output logic              tile_switch     [NUM_CORES],
  output logic              throttled       [NUM_CORES],
  output tile_seq_t         cur_tile        [NUM_CORES],
  output logic [$clog2(PQ_DEPTH+1)-1:0] pq_count [NUM_CORES],
  output logic [$clog2(RQ_DEPTH+1)-1:0] rq_count [NUM_CORES],
  output logic signed [MSHR_W+CNT_W+7:0] real_free_scaled [NUM_CORES]
);
  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    wasp_core_scheduler #(
      .MAX_WARPS(MAX_WARPS), .MESH(MESH), .PQ_DEPTH(PQ_DEPTH), .RQ_DEPTH(RQ_DEPTH),
      .MSHR_W(MSHR_W), .CF_NUM(CF_NUM), .CF_DEN(CF_DEN), .THRESHOLD(THRESHOLD), .CNT_W(CNT_W)
    ) u_sched (
      .clk, .rst_n,
      .in_valid(in_valid[c]), .in_ready(in_ready[c]), .in_quad(in_quad[c]),
      .launch_valid(launch_valid[c]), .launch_ready(launch_ready[c]), .launch_data(launch_data[c]),
      .free_mshrs(free_mshrs[c]),
      .pri_block_cnt(pri_block_cnt[c]), .pri_unblock_cnt(pri_unblock_cnt[c]),
      .pri_retire_cnt(pri_retire_cnt[c]), .retire_cnt(retire_cnt[c]),
      .priority_over_regular(priority_over_regular[c]), .nonblocked_pw(nonblocked_pw[c]),
      .warps_in_core(warps_in_core[c]), .tile_switch(tile_switch[c]), .throttled(throttled[c]),
      .cur_tile(cur_tile[c]), .pq_count(pq_count[c]), .rq_count(rq_count[c]),
      .real_free_scaled(real_free_scaled[c])
    );
  end
endmodule
