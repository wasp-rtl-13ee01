// tb_nonblocked_pw_counter: random launch/block/unblock/retire events for
// priority warps, compared each cycle with a reference count kept in the
// testbench. The reference tracks blocked and non-blocked warps separately
// so that it only ever generates events a real core could produce; the
// count must follow one cycle after the events and reach the 64-warp limit.
module tb_nonblocked_pw_counter;
  localparam int MAXW = 64;
  localparam int W = 7;
  logic clk = 0, rst_n = 0;
  logic launch_pri;
  logic [W-1:0] unblock_cnt, block_cnt, retire_cnt, count;
  int checks = 0, failures = 0;
  int nonblocked = 0, blocked = 0, max_seen = 0;

  nonblocked_pw_counter #(.MAX_WARPS(MAXW)) dut (
    .clk, .rst_n, .launch_pri, .unblock_cnt, .block_cnt, .retire_cnt, .count
  );

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l, u, b, r;
    launch_pri = 0; unblock_cnt = 0; block_cnt = 0; retire_cnt = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != nonblocked) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: count %0d expected %0d", cyc, count, nonblocked);
      end
      if (nonblocked > max_seen) max_seen = nonblocked;
      // fill phase in the first half of every 4000 cycles, drain phase after
      l = (nonblocked + blocked < MAXW && $urandom_range(0, 3) != 0 && (cyc % 4000) < 2000) ? 1 : 0;
      b = (nonblocked > 0) ? $urandom_range(0, (nonblocked > 3) ? 3 : nonblocked) : 0;
      u = (blocked > 0 && $urandom_range(0, 4) == 0) ? $urandom_range(1, blocked) : 0;
      r = (nonblocked - b > 0 && $urandom_range(0, 2) == 0) ? $urandom_range(1, (nonblocked - b > 2) ? 2 : nonblocked - b) : 0;
      launch_pri = l[0]; block_cnt = W'(b); unblock_cnt = W'(u); retire_cnt = W'(r);
      nonblocked = nonblocked + l + u - b - r;
      blocked    = blocked + b - u;
    end
    checks++;
    if (max_seen < 32) begin
      failures++;
      $display("FAIL stimulus never filled the counter (max %0d)", max_seen);
    end
    $display("max non-blocked count reached: %0d", max_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
