// blocking_predictor: decides whether the next warp launched should be a
// priority warp, from an estimate of the MSHRs that will still be free when
// that warp reaches the load/store unit.
//
//   Real_freeMSHRs       = freeMSHRs - nonblocked_priority_warps * CF
//   Priority_over_regular = Real_freeMSHRs > THRESHOLD
//
// freeMSHRs is the number of free MSHR slots of the core's first-level data
// cache (the L0 for a 4-wide pipeline), sampled every cycle into a 5-bit
// register. Every non-blocked priority warp is expected to raise CF more
// misses before the new warp gets to the LDST unit, CF being the average
// number of distinct memory blocks a warp touches (2.5 in the paper's
// benchmarks). CF is given as the fraction CF_NUM / CF_DEN and the whole
// comparison is done scaled by CF_DEN, so no fractions appear in hardware:
//   CF_DEN*freeMSHRs - CF_NUM*nonblocked  >  CF_DEN*THRESHOLD
// which is one constant multiplier, one shift/scale and one signed comparator.
//
// Timing: the free-MSHR register adds one cycle; the non-blocked count comes
// already registered from nonblocked_pw_counter; priority_over_regular is
// combinational from those two registers.
//
// Following the paper: the formula, CF = 2.5, the 5-bit free-MSHR register
// and the 7-bit priority-warp count. This design's own choice: THRESHOLD = 2
// (the paper tunes the threshold but does not print its value).
module blocking_predictor #(
  parameter int unsigned MSHR_W    = 5,
  parameter int unsigned CNT_W     = 7,
  parameter int unsigned CF_NUM    = 5,
  parameter int unsigned CF_DEN    = 2,
  parameter int          THRESHOLD = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [MSHR_W-1:0] free_mshrs,        // from the L0/L1 MSHR file
  input  logic [CNT_W-1:0]  nonblocked_pw,     // from nonblocked_pw_counter
  output logic              priority_over_regular,
  output logic signed [MSHR_W+CNT_W+7:0] real_free_scaled  // Real_freeMSHRs * CF_DEN
);
  localparam int unsigned RW = MSHR_W + CNT_W + 8;

  logic [MSHR_W-1:0] free_q;

  always_ff @(posedge clk) begin
    if (!rst_n) free_q <= '0;
    else        free_q <= free_mshrs;
  end

  always_comb begin
    real_free_scaled = $signed(RW'(free_q) * RW'(CF_DEN))
                     - $signed(RW'(nonblocked_pw) * RW'(CF_NUM));
    priority_over_regular = real_free_scaled > $signed(RW'(THRESHOLD * int'(CF_DEN)));
  end
endmodule
