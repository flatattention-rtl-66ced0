// flatatt_fabric: the on-chip fabric of a tile-based many-PE accelerator,
// a 2D mesh of collective-capable routers (coll_router), 16 x 16 by default.
// The reference system is 32 x 32; the default is halved in each direction
// because elaborating 1024 routers, each with 64 FP16 adders, needs about
// 25 GB in Verilator (6.3 GB at 16 x 16). NX = NY = 32 is the reference size.
//
// Each tile of the mesh has one router. The router's local port is the
// attachment point of the tile's DMA engine and is brought out as the
// tile_* ports; the tile itself (matrix engine, vector engine, scalar core,
// L1 memory) is not part of this module. The west edge routers' W ports and
// the south edge routers' S ports are the links to the HBM controllers and
// are brought out as west_* and south_*. The north and east edges have no
// links.
//
// Array index [r][c] is the router of the tile at mesh coordinate
// (x, y) = (c + 1, r + 1); x grows to the east, y to the north. Coordinate
// x = 0 addresses the west HBM edge, y = 0 the south HBM edge (see
// coll_pkg). Every router is given its coordinates as constants.
//
// Timing: a flit moves two cycles per router hop; every link carries one
// 1024-bit flit per cycle (128 B/cycle) in each direction.
//
// The 32 x 32 mesh size, the link width and the HBM placement on the west
// and south edges are the paper's main configuration. Grouping the 32 + 32 edge links
// onto the 16 + 16 HBM channels belongs to the HBM controllers and is not
// done here.
module flatatt_fabric
  import coll_pkg::*;
#(
  parameter int unsigned NX        = 16,
  parameter int unsigned NY        = 16,
  parameter int unsigned FifoDepth = 2
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  // tile DMA <-> router local port
  input  logic  tile_in_valid_i  [NY][NX],
  output logic  tile_in_ready_o  [NY][NX],
  input  flit_t tile_in_flit_i   [NY][NX],
  output logic  tile_out_valid_o [NY][NX],
  input  logic  tile_out_ready_i [NY][NX],
  output flit_t tile_out_flit_o  [NY][NX],
  // west HBM edge, one link per row
  input  logic  west_in_valid_i  [NY],
  output logic  west_in_ready_o  [NY],
  input  flit_t west_in_flit_i   [NY],
  output logic  west_out_valid_o [NY],
  input  logic  west_out_ready_i [NY],
  output flit_t west_out_flit_o  [NY],
  // south HBM edge, one link per column
  input  logic  south_in_valid_i  [NX],
  output logic  south_in_ready_o  [NX],
  input  flit_t south_in_flit_i   [NX],
  output logic  south_out_valid_o [NX],
  input  logic  south_out_ready_i [NX],
  output flit_t south_out_flit_o  [NX]
);

  logic  iv [NY][NX][NumPorts];
  logic  ir [NY][NX][NumPorts];
  flit_t ifl[NY][NX][NumPorts];
  logic  ov [NY][NX][NumPorts];
  logic  orr[NY][NX][NumPorts];
  flit_t ofl[NY][NX][NumPorts];

  for (genvar r = 0; r < NY; r++) begin : g_row
    for (genvar c = 0; c < NX; c++) begin : g_col

      coll_router #(.FifoDepth(FifoDepth)) i_router (
        .clk_i,
        .rst_ni,
        .x_i         (coord_t'(c + 1)),
        .y_i         (coord_t'(r + 1)),
        .in_valid_i  (iv[r][c]),
        .in_ready_o  (ir[r][c]),
        .in_flit_i   (ifl[r][c]),
        .out_valid_o (ov[r][c]),
        .out_ready_i (orr[r][c]),
        .out_flit_o  (ofl[r][c])
      );

      // Local port.
      assign iv [r][c][PortL] = tile_in_valid_i[r][c];
      assign ifl[r][c][PortL] = tile_in_flit_i[r][c];
      assign tile_in_ready_o[r][c]  = ir[r][c][PortL];
      assign tile_out_valid_o[r][c] = ov[r][c][PortL];
      assign tile_out_flit_o[r][c]  = ofl[r][c][PortL];
      assign orr[r][c][PortL] = tile_out_ready_i[r][c];

      // East side: neighbour's W port, nothing at the east edge.
      if (c < NX - 1) begin : g_e
        assign iv [r][c][PortE] = ov [r][c+1][PortW];
        assign ifl[r][c][PortE] = ofl[r][c+1][PortW];
        assign orr[r][c][PortE] = ir [r][c+1][PortW];
      end else begin : g_e_edge
        assign iv [r][c][PortE] = 1'b0;
        assign ifl[r][c][PortE] = '0;
        assign orr[r][c][PortE] = 1'b0;
      end

      // West side: neighbour's E port, or the west HBM link.
      if (c > 0) begin : g_w
        assign iv [r][c][PortW] = ov [r][c-1][PortE];
        assign ifl[r][c][PortW] = ofl[r][c-1][PortE];
        assign orr[r][c][PortW] = ir [r][c-1][PortE];
      end else begin : g_w_edge
        assign iv [r][c][PortW] = west_in_valid_i[r];
        assign ifl[r][c][PortW] = west_in_flit_i[r];
        assign west_in_ready_o[r]  = ir[r][c][PortW];
        assign west_out_valid_o[r] = ov[r][c][PortW];
        assign west_out_flit_o[r]  = ofl[r][c][PortW];
        assign orr[r][c][PortW] = west_out_ready_i[r];
      end

      // North side: neighbour's S port, nothing at the north edge.
      if (r < NY - 1) begin : g_n
        assign iv [r][c][PortN] = ov [r+1][c][PortS];
        assign ifl[r][c][PortN] = ofl[r+1][c][PortS];
        assign orr[r][c][PortN] = ir [r+1][c][PortS];
      end else begin : g_n_edge
        assign iv [r][c][PortN] = 1'b0;
        assign ifl[r][c][PortN] = '0;
        assign orr[r][c][PortN] = 1'b0;
      end

      // South side: neighbour's N port, or the south HBM link.
      if (r > 0) begin : g_s
        assign iv [r][c][PortS] = ov [r-1][c][PortN];
        assign ifl[r][c][PortS] = ofl[r-1][c][PortN];
        assign orr[r][c][PortS] = ir [r-1][c][PortN];
      end else begin : g_s_edge
        assign iv [r][c][PortS] = south_in_valid_i[c];
        assign ifl[r][c][PortS] = south_in_flit_i[c];
        assign south_in_ready_o[c]  = ir[r][c][PortS];
        assign south_out_valid_o[c] = ov[r][c][PortS];
        assign south_out_flit_o[c]  = ofl[r][c][PortS];
        assign orr[r][c][PortS] = south_out_ready_i[c];
      end

      // Nothing may be routed off the mesh where there is no link.
      if (c == NX - 1) begin : g_chk_e
        assert property (@(posedge clk_i) disable iff (!rst_ni) !ov[r][c][PortE])
          else $error("flit routed off the east edge at row %0d", r);
      end
      if (r == NY - 1) begin : g_chk_n
        assert property (@(posedge clk_i) disable iff (!rst_ni) !ov[r][c][PortN])
          else $error("flit routed off the north edge at column %0d", c);
      end
    end
  end

endmodule
