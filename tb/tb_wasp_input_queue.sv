// tb_wasp_input_queue: feeds three 8x8-quad tiles in scanline order with
// random gaps, pops both queues at random and compares everything against
// reference queues kept in the testbench: which queue a quad goes to (Mesh4
// rule), the order inside each queue, the tile number stored with each entry,
// in_ready (low exactly when the quad's own queue is full), the head-valid
// flags and the occupancy counts. Small queue depths make both queues fill.
module tb_wasp_input_queue;
  import wasp_pkg::*;
  localparam int PQD = 4, RQD = 6;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, pq_valid, rq_valid, pq_pop, rq_pop;
  quad_t in_quad;
  queue_entry_t pq_head, rq_head;
  logic [$clog2(PQD+1)-1:0] pq_count;
  logic [$clog2(RQD+1)-1:0] rq_count;
  queue_entry_t pq_ref[$], rq_ref[$];
  int checks = 0, failures = 0, n_in = 0, n_pq_full = 0, n_rq_full = 0, n_pop = 0;
  int ref_tile = 0, n_cyc = 0;

  wasp_input_queue #(.MESH(4), .PQ_DEPTH(PQD), .RQ_DEPTH(RQD)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_quad,
    .pq_valid, .pq_head, .pq_pop, .rq_valid, .rq_head, .rq_pop, .pq_count, .rq_count
  );

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total, idx;
    bit exp_pri, exp_ready;
    queue_entry_t e;
    total = 3 * 64;
    idx = 0;
    in_valid = 0; in_quad = '0; pq_pop = 0; rq_pop = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    while (n_pop < total) begin
      @(negedge clk);
      // present a quad
      if (idx < total) begin
        int t, x, y;
        t = idx / 64; x = (idx % 64) % 8; y = (idx % 64) / 8;
        in_quad.qx = qx_t'(t * 8 + x + 16);
        in_quad.qy = qy_t'(y + 4);
        in_quad.first_of_tile = (idx % 64 == 0);
        in_quad.payload = payload_t'(idx);
        in_valid = ($urandom_range(0, 3) != 0);
      end else in_valid = 0;
      pq_pop = pq_valid && ((n_cyc % 200) > 150) && ($urandom_range(0, 2) == 0);
      n_cyc++;
      rq_pop = rq_valid && ($urandom_range(0, 1) == 0);
      #1;
      // compare outputs with the reference
      checks++;
      if (pq_valid != (pq_ref.size() > 0) || rq_valid != (rq_ref.size() > 0))
        fail($sformatf("valid flags pq %0b rq %0b, ref sizes %0d %0d", pq_valid, rq_valid, pq_ref.size(), rq_ref.size()));
      checks++;
      if (int'(pq_count) != pq_ref.size() || int'(rq_count) != rq_ref.size())
        fail("occupancy counts");
      if (pq_valid && pq_ref.size() > 0) begin
        checks++;
        if (pq_head != pq_ref[0]) fail($sformatf("pq head payload %0d expected %0d", pq_head.quad.payload, pq_ref[0].quad.payload));
      end
      if (rq_valid && rq_ref.size() > 0) begin
        checks++;
        if (rq_head != rq_ref[0]) fail($sformatf("rq head payload %0d expected %0d", rq_head.quad.payload, rq_ref[0].quad.payload));
      end
      exp_pri   = (in_quad.qx % 4 == 0) && (in_quad.qy % 4 == 0);
      exp_ready = exp_pri ? (pq_ref.size() < PQD) : (rq_ref.size() < RQD);
      if (in_valid) begin
        checks++;
        if (in_ready != exp_ready) fail($sformatf("in_ready %0b expected %0b", in_ready, exp_ready));
        if (!exp_ready) begin
          if (exp_pri) n_pq_full++; else n_rq_full++;
        end
      end
      // update the reference as the clock edge will
      if (pq_pop && pq_ref.size() > 0) begin void'(pq_ref.pop_front()); n_pop++; end
      if (rq_pop && rq_ref.size() > 0) begin void'(rq_ref.pop_front()); n_pop++; end
      if (in_valid && exp_ready) begin
        if (in_quad.first_of_tile) ref_tile++;
        e.quad = in_quad; e.tile = tile_seq_t'(ref_tile);
        if (exp_pri) pq_ref.push_back(e); else rq_ref.push_back(e);
        idx++;
      end
    end
    checks++;
    if (n_pq_full == 0 || n_rq_full == 0) fail($sformatf("queue never full: pq %0d rq %0d", n_pq_full, n_rq_full));
    $display("quads %0d, pq-full stalls %0d, rq-full stalls %0d", n_pop, n_pq_full, n_rq_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
