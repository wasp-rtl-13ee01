// tb_priority_classifier: checks the Mesh4 priority-warp rule.
// Every quad of a 32x32-quad tile (a 64x64-pixel tile) is classified and
// compared with "x mod 4 == 0 and y mod 4 == 0"; the tile must hold exactly
// 64 priority quads (1/16). Random screen positions over the whole
// 980x384-quad screen are checked as well.
module tb_priority_classifier;
  import wasp_pkg::*;
  qx_t  qx;
  qy_t  qy;
  logic is_pri;
  int   checks = 0, failures = 0;
  int   npri = 0;

  priority_classifier #(.MESH(4)) dut (.qx(qx), .qy(qy), .is_priority(is_pri));

  task automatic check_one(int x, int y);
    bit exp;
    qx = qx_t'(x); qy = qy_t'(y);
    #1;
    exp = (x % 4 == 0) && (y % 4 == 0);
    checks++;
    if (is_pri !== exp) begin
      failures++;
      $display("FAIL quad (%0d,%0d): got %0b expected %0b", x, y, is_pri, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // one tile whose origin is at quad (96, 64)
    npri = 0;
    for (int y = 0; y < 32; y++)
      for (int x = 0; x < 32; x++) begin
        check_one(96 + x, 64 + y);
        if (is_pri) npri++;
      end
    #1;
    checks++;
    if (npri != 64) begin
      failures++;
      $display("FAIL tile has %0d priority quads, expected 64", npri);
    end
    for (int i = 0; i < 2000; i++) check_one($urandom_range(0, 979), $urandom_range(0, 383));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
