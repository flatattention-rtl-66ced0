// coll_pkg: types and constants shared by the collective-capable mesh fabric.
//
// The fabric moves single-flit packets. A flit is a 1024-bit payload (the link
// width of the reference system) travelling next to a small header on its own
// wires, so every flit is routed on its own and no wormhole state is kept.
// The payload is read by the in-network reduction as W/16 lanes of IEEE
// binary16 (FP16), the datatype of the reference system's engines.
//
// Coordinates: tiles sit at x = 1..NX (west to east) and y = 1..NY (south to
// north). x = 0 names the west HBM edge and y = 0 the south HBM edge, so a
// flit addressed to (0, y) leaves the mesh through the west port of router
// (1, y) and a flit addressed to (x, 0) through the south port of router
// (x, 1). The link width and the two HBM edges follow the paper; the header
// layout, the coordinate encoding and the collective opcodes are this
// design's own.
package coll_pkg;

  // Payload width of one NoC link (1024-bit NoC link width, Table I).
  localparam int unsigned LinkWidth = 1024;
  // FP16 lanes per flit.
  localparam int unsigned Lanes     = LinkWidth / 16;
  // Coordinate field width; 8 bits address meshes of up to 254 x 254 tiles.
  localparam int unsigned CoordW    = 8;

  typedef logic [CoordW-1:0] coord_t;

  // Router port indices.
  typedef enum logic [2:0] {
    PortN = 3'd0,
    PortE = 3'd1,
    PortS = 3'd2,
    PortW = 3'd3,
    PortL = 3'd4
  } port_e;

  localparam int unsigned NumPorts = 5;

  // Collective operation carried by a flit.
  //  OpUnicast    : point-to-point, dimension-ordered (X then Y; Y then X
  //                 when the destination is the west HBM edge).
  //  OpMcastRow   : path-based multicast along the source's row to every
  //                 tile with lo <= x <= hi (except the source).
  //  OpMcastCol   : same along the source's column, lo <= y <= hi.
  //  OpRedSumRow  : every tile with lo <= x <= hi in one row contributes one
  //  OpRedMaxRow    flit; the partial result flows west and the tile at x = lo
  //                 receives the lane-wise sum / max.
  //  OpRedSumCol  : same along a column, flowing south to y = lo.
  //  OpRedMaxCol
  typedef enum logic [2:0] {
    OpUnicast   = 3'd0,
    OpMcastRow  = 3'd1,
    OpMcastCol  = 3'd2,
    OpRedSumRow = 3'd3,
    OpRedMaxRow = 3'd4,
    OpRedSumCol = 3'd5,
    OpRedMaxCol = 3'd6
  } coll_op_e;

  typedef struct packed {
    coll_op_e op;
    coord_t   dst_x;   // unicast destination
    coord_t   dst_y;
    coord_t   src_x;   // injecting tile, returned for replies
    coord_t   src_y;
    coord_t   lo;      // collective range along the row (x) or column (y)
    coord_t   hi;
    logic     last;    // last flit of a message (carried, not interpreted)
  } hdr_t;

  typedef struct packed {
    hdr_t                 hdr;
    logic [LinkWidth-1:0] data;
  } flit_t;

  function automatic logic is_reduce(coll_op_e op);
    return op inside {OpRedSumRow, OpRedMaxRow, OpRedSumCol, OpRedMaxCol};
  endfunction

  function automatic logic is_row_op(coll_op_e op);
    return op inside {OpMcastRow, OpRedSumRow, OpRedMaxRow};
  endfunction

  function automatic logic is_max_op(coll_op_e op);
    return op inside {OpRedMaxRow, OpRedMaxCol};
  endfunction

endpackage
