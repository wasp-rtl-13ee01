// nonblocked_pw_counter: number of priority warps in the core that are not
// blocked on a long-latency miss.
//
// A warp is marked blocked when it takes a long-latency miss and becomes
// non-blocked again when the miss is served. The counter is an up/down
// register of CNT_W bits (7 bits for a core of up to 64 warps) that moves on
// events reported by the core for priority warps only:
//   +1            a priority warp is launched (it starts non-blocked)
//   +unblock_cnt  priority warps whose miss was served this cycle
//   -block_cnt    priority warps that took a long-latency miss this cycle
//   -retire_cnt   priority warps that finished this cycle
// Several warps can change state in one cycle (one fill wakes all warps that
// wait on the same block), so the event inputs are counts. A warp finishes
// only while non-blocked, so a retire always removes a counted warp. The new
// value appears one cycle after the events; synchronous active-low reset to
// zero. Assertions flag an underflow or overflow, which would mean the core
// reported inconsistent events.
//
// Following the paper: counting non-blocked priority warps, the 7-bit width.
// This design's own choice: the event interface from the core.
module nonblocked_pw_counter #(
  parameter int unsigned MAX_WARPS = 64,
  parameter int unsigned CNT_W     = $clog2(MAX_WARPS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             launch_pri,
  input  logic [CNT_W-1:0] unblock_cnt,
  input  logic [CNT_W-1:0] block_cnt,
  input  logic [CNT_W-1:0] retire_cnt,
  output logic [CNT_W-1:0] count
);
  logic [CNT_W+1:0] up, down;

  always_comb begin
    up   = (CNT_W+2)'(count) + (CNT_W+2)'(launch_pri) + (CNT_W+2)'(unblock_cnt);
    down = (CNT_W+2)'(block_cnt) + (CNT_W+2)'(retire_cnt);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) count <= '0;
    else        count <= CNT_W'(up - down);
  end

  assert property (@(posedge clk) disable iff (!rst_n) up >= down)
    else $error("nonblocked_pw_counter: underflow");
  assert property (@(posedge clk) disable iff (!rst_n) (up - down) <= (CNT_W+2)'(MAX_WARPS))
    else $error("nonblocked_pw_counter: more non-blocked priority warps than warp slots");
endmodule
