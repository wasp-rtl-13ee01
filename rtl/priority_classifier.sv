// priority_classifier: decides whether a quad is a priority warp (Mesh4).
//
// The tile is cut into MESH x MESH-quad subtiles and the quad at the origin
// corner of each subtile, i.e. the quad whose x and y quad coordinates are
// both multiples of MESH, becomes a priority warp. With MESH = 4 (the
// "Mesh4" selection) this is one warp in sixteen, spread evenly over the
// tile, and the test reduces to checking that the two low bits of each
// coordinate are zero: a two-bit comparator per coordinate.
//
// Purely combinational, no clock. MESH must be a power of two; MESH = 2, 8
// and 16 give the Mesh2/Mesh8/Mesh16 subsets the paper compares with.
// Following the paper: the multiple-of-four rule and the low-bit test. Which
// corner is called "top" depends on the screen axis convention and does not
// change the logic.
module priority_classifier
  import wasp_pkg::*;
#(
  parameter int unsigned MESH = 4
) (
  input  qx_t  qx,
  input  qy_t  qy,
  output logic is_priority
);
  localparam int unsigned MB = $clog2(MESH);

  initial begin
    assert (MESH >= 2 && (1 << MB) == MESH)
      else $error("priority_classifier: MESH must be a power of two >= 2");
  end

  always_comb begin
    is_priority = (qx[MB-1:0] == '0) && (qy[MB-1:0] == '0);
  end
endmodule
