// tb_blocking_predictor: Priority_over_regular against the formula
//   freeMSHRs - 2.5 * nonblocked_priority_warps > 2
// evaluated in real arithmetic in the testbench. free_mshrs is registered
// inside the block, so the output must follow a new free-MSHR value one
// cycle later and a new non-blocked count in the same cycle. All 32 x 128
// input pairs are covered, then random sequences check the timing.
module tb_blocking_predictor;
  logic clk = 0, rst_n = 0;
  logic [4:0] free_mshrs;
  logic [6:0] nb;
  logic por;
  logic signed [19:0] rfs;
  int checks = 0, failures = 0, prev_free;

  blocking_predictor #(.MSHR_W(5), .CNT_W(7), .CF_NUM(5), .CF_DEN(2), .THRESHOLD(2)) dut (
    .clk, .rst_n, .free_mshrs, .nonblocked_pw(nb), .priority_over_regular(por),
    .real_free_scaled(rfs)
  );

  always #5 clk = ~clk;

  function automatic bit expected(int f, int n);
    real real_free;
    real_free = real'(f) - real'(n) * 2.5;
    return real_free > 2.0;
  endfunction

  task automatic check(int f, int n);
    checks++;
    if (por !== expected(f, n) || int'(rfs) != 2 * f - 5 * n) begin
      failures++;
      if (failures < 10)
        $display("FAIL free=%0d nb=%0d: got %0b (scaled %0d), expected %0b", f, n, por, rfs, expected(f, n));
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    free_mshrs = 0; nb = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 32; f++)
      for (int n = 0; n < 128; n++) begin
        @(negedge clk);
        free_mshrs = 5'(f); nb = 7'(n);
        @(negedge clk);           // registered free count now visible
        check(f, n);
      end
    // timing: a new free count shows one cycle late
    @(negedge clk); free_mshrs = 5'd16; nb = 7'd0;
    @(negedge clk); prev_free = 16;
    for (int i = 0; i < 3000; i++) begin
      int f, n;
      f = $urandom_range(0, 31); n = $urandom_range(0, 12);
      free_mshrs = 5'(f); nb = 7'(n);
      #1;
      check(prev_free, n);      // still the old free count this cycle
      @(negedge clk);
      check(f, n);
      prev_free = f;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
