// wasp_pkg: types and constants shared by the WaSP warp-scheduler blocks.
//
// WaSP sits between the rasterizer's per-core quad stream and the GPU core.
// A quad (2x2 fragments) is launched into the core as one warp. The scheduler
// needs, per quad, its quad-grid screen coordinates (to tell priority warps
// from regular ones), a flag marking the first quad of a new tile (to keep
// tiles in order), and an opaque payload that identifies the quad's work.
//
// The coordinate widths follow from the evaluated screen of 1960x768 pixels:
// 980x384 quads need 10 bits of x and 9 bits of y. The payload width and the
// 2-bit tile sequence number are choices of this design.
package wasp_pkg;

  // Screen of 1960x768 pixels = 980x384 quads.
  localparam int unsigned QX_W      = 10;
  localparam int unsigned QY_W      = 9;
  // Opaque per-quad payload (e.g. an index into the fragment attribute store).
  localparam int unsigned PAYLOAD_W = 16;
  // Tile sequence number attached inside the input queue; it only has to
  // tell the current tile from the next ones held in the queues.
  localparam int unsigned TILE_W    = 2;

  typedef logic [QX_W-1:0]      qx_t;
  typedef logic [QY_W-1:0]      qy_t;
  typedef logic [PAYLOAD_W-1:0] payload_t;
  typedef logic [TILE_W-1:0]    tile_seq_t;

  // A quad as it arrives from the rasterizer (already assigned to this core).
  typedef struct packed {
    qx_t      qx;             // quad column on screen
    qy_t      qy;             // quad row on screen
    logic     first_of_tile;  // first quad of a new tile
    payload_t payload;
  } quad_t;

  // A quad as held in the priority or regular queue.
  typedef struct packed {
    quad_t     quad;
    tile_seq_t tile;          // tile sequence number
  } queue_entry_t;

  // A warp launched into the core.
  typedef struct packed {
    quad_t quad;
    logic  is_priority;
  } launch_t;

endpackage
