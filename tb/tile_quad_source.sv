// tile_quad_source: testbench stand-in for the rasterizer side of one core.
// Emits TILES tiles of TILE_Q x TILE_Q quads, each in scanline order, tile
// after tile along the screen row starting at quad column X0 (row Y0).
// The first quad of every tile carries first_of_tile; the payload is a
// running quad number. in_valid is dropped at random (1 cycle in GAP_ONE_IN).
module tile_quad_source
  import wasp_pkg::*;
#(
  parameter int TILES      = 2,
  parameter int TILE_Q     = 32,
  parameter int X0         = 0,
  parameter int Y0         = 0,
  parameter int GAP_ONE_IN = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  output logic  in_valid,
  input  logic  in_ready,
  output quad_t in_quad,
  output logic  done
);
  int idx;
  bit gap;
  localparam int TOTAL = TILES * TILE_Q * TILE_Q;

  always_comb begin
    int t, r;
    t = idx / (TILE_Q * TILE_Q);
    r = idx % (TILE_Q * TILE_Q);
    in_quad.qx            = qx_t'(X0 + t * TILE_Q + r % TILE_Q);
    in_quad.qy            = qy_t'(Y0 + r / TILE_Q);
    in_quad.first_of_tile = (r == 0);
    in_quad.payload       = payload_t'(idx);
    in_valid              = rst_n && (idx < TOTAL) && !gap;
    done                  = (idx >= TOTAL);
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      idx <= 0; gap <= 0;
    end else begin
      if (in_valid && in_ready) idx <= idx + 1;
      gap <= ($urandom_range(0, GAP_ONE_IN - 1) == 0);
    end
  end
endmodule
