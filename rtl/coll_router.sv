// coll_router: five-port 2D-mesh router with in-network multicast and
// reduction (the fabric collectives of FlatAttention).
//
// Ports are indexed by coll_pkg::port_e: N, E, S, W and L (the tile's DMA).
// Every input has a small FIFO; every output has a one-flit register, so a
// flit takes two cycles per hop (input buffer, then output register) and a
// link carries one 1024-bit flit per cycle. Links use valid/ready: a flit
// moves when both are high, valid never waits for ready, and neither output
// handshake signal depends combinationally on the other side.
//
// Routing, decided per flit from its header:
//  * unicast: X first, then Y. A flit addressed to the west HBM edge
//    (dst_x = 0) goes Y first and then west, so it leaves the mesh on the
//    destination's row. No turn from N/S to E is ever taken, so the mix is
//    free of routing deadlock.
//  * row / column multicast (path-based): the flit is duplicated in flight.
//    A router on the path hands a copy to its tile when its coordinate lies
//    in [lo, hi] (the source tile gets none) and forwards it further in each
//    direction in which the range continues. A flit moves only when every
//    output it needs is free in the same cycle.
//  * row / column sum or max reduction: every tile in [lo, hi] of one row
//    (column) injects one flit; the partial result flows west (south) from
//    the far end hi to the root lo. The tile at hi sends its flit on as it
//    is. Any other tile's flit waits in the local input until the partial
//    result from upstream (the E input for a row, the N input for a column)
//    is at the head of that input; the two are then popped together,
//    combined lane by lane in coll_reduce_alu, and sent on, or handed to the
//    tile at the root. A reduction flit at the head of the E/N input waits
//    there for its local partner and blocks that input meanwhile.
//
// Allocation: inputs are visited in round-robin order; an input is granted
// when all outputs it needs are free and not yet given away this cycle. The
// first input in that order with its outputs free is always served, so the
// router makes progress; the order restarts after the first granted input.
//
// From the paper: the mesh router at every tile, path-based duplicate-and-
// forward multicast, and row/column multicast, sum- and max-reduction. This
// design's own: buffer depths, the two-cycle hop, the header, the
// reduction's direction (toward the west / south end of the range, the edge
// tiles of FlatAttention's groups) and the allocation scheme.
module coll_router
  import coll_pkg::*;
#(
  parameter int unsigned FifoDepth = 2
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  input  coord_t x_i,
  input  coord_t y_i,
  input  logic   in_valid_i  [NumPorts],
  output logic   in_ready_o  [NumPorts],
  input  flit_t  in_flit_i   [NumPorts],
  output logic   out_valid_o [NumPorts],
  input  logic   out_ready_i [NumPorts],
  output flit_t  out_flit_o  [NumPorts]
);

  localparam int unsigned FW = $bits(flit_t);

  // ---------------------------------------------------------------- buffers
  logic  head_valid [NumPorts];
  flit_t head       [NumPorts];
  logic  pop        [NumPorts];

  for (genvar i = 0; i < NumPorts; i++) begin : g_in
    coll_fifo #(.Width(FW), .Depth(FifoDepth)) i_fifo (
      .clk_i,
      .rst_ni,
      .valid_i (in_valid_i[i]),
      .ready_o (in_ready_o[i]),
      .data_i  (in_flit_i[i]),
      .valid_o (head_valid[i]),
      .ready_i (pop[i]),
      .data_o  (head[i])
    );
  end

  // ---------------------------------------------------------------- routing
  logic [NumPorts-1:0] req  [NumPorts];  // outputs wanted by each input
  logic                held [NumPorts];  // waits for a reduction partner
  logic                join_l;           // local flit joins with a partner
  port_e               partner;          // E for rows, N for columns
  logic                partner_ok;

  function automatic logic [NumPorts-1:0] unicast_route(hdr_t h, coord_t x, coord_t y);
    logic [NumPorts-1:0] m;
    m = '0;
    if (h.dst_x == '0) begin
      if      (h.dst_y > y) m[PortN] = 1'b1;
      else if (h.dst_y < y) m[PortS] = 1'b1;
      else                  m[PortW] = 1'b1;
    end else begin
      if      (h.dst_x > x) m[PortE] = 1'b1;
      else if (h.dst_x < x) m[PortW] = 1'b1;
      else if (h.dst_y > y) m[PortN] = 1'b1;
      else if (h.dst_y < y) m[PortS] = 1'b1;
      else                  m[PortL] = 1'b1;
    end
    return m;
  endfunction

  // Path-based multicast: deliver locally inside the range, continue
  // toward whichever end of the range is not yet reached, never back.
  function automatic logic [NumPorts-1:0] mcast_route(hdr_t h, int unsigned from,
                                                      coord_t x, coord_t y);
    logic [NumPorts-1:0] m;
    coord_t c;
    logic   row;
    row = is_row_op(h.op);
    c   = row ? x : y;
    m   = '0;
    m[PortL] = (from != int'(PortL)) && (c >= h.lo) && (c <= h.hi);
    if (row) begin
      m[PortE] = (from != int'(PortE)) && (h.hi > c);
      m[PortW] = (from != int'(PortW)) && (h.lo < c);
    end else begin
      m[PortN] = (from != int'(PortN)) && (h.hi > c);
      m[PortS] = (from != int'(PortS)) && (h.lo < c);
    end
    return m;
  endfunction

  always_comb begin
    hdr_t   hl;
    coord_t c;
    c          = '0;
    hl         = head[PortL].hdr;
    partner    = is_row_op(hl.op) ? PortE : PortN;
    partner_ok = head_valid[partner] && (head[partner].hdr.op == hl.op) &&
                 (head[partner].hdr.lo == hl.lo) && (head[partner].hdr.hi == hl.hi);
    join_l     = 1'b0;
    for (int unsigned i = 0; i < NumPorts; i++) begin
      hdr_t h;
      h       = head[i].hdr;
      req[i]  = '0;
      held[i] = 1'b0;
      if (head_valid[i]) begin
        if (h.op == OpUnicast) begin
          req[i] = unicast_route(h, x_i, y_i);
        end else if (!is_reduce(h.op)) begin
          req[i] = mcast_route(h, i, x_i, y_i);
        end else if (i == int'(PortL)) begin
          c = is_row_op(h.op) ? x_i : y_i;
          if (c == h.lo) req[i][PortL] = 1'b1;
          else           req[i][is_row_op(h.op) ? PortW : PortS] = 1'b1;
          if (c < h.hi) begin
            join_l  = 1'b1;
            held[i] = !partner_ok;
          end
        end else begin
          // Partial result from upstream: consumed only by a join.
          held[i] = 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------------- allocation
  logic [NumPorts-1:0] out_free;
  logic [$clog2(NumPorts)-1:0] rr_q, rr_d;
  logic                grant [NumPorts];

  always_comb begin
    logic [NumPorts-1:0] taken;
    logic                first;
    int unsigned         idx;
    for (int unsigned o = 0; o < NumPorts; o++) out_free[o] = !out_valid_o[o] || out_ready_i[o];
    taken = '0;
    first = 1'b1;
    rr_d  = rr_q;
    for (int unsigned i = 0; i < NumPorts; i++) grant[i] = 1'b0;
    for (int unsigned k = 0; k < NumPorts; k++) begin
      idx = (32'(rr_q) + k) % NumPorts;
      if (head_valid[idx] && !held[idx] && (req[idx] != '0) &&
          ((req[idx] & ~out_free) == '0) && ((req[idx] & taken) == '0)) begin
        grant[idx] = 1'b1;
        taken      = taken | req[idx];
        if (first) begin
          rr_d  = 3'((idx + 1) % NumPorts);
          first = 1'b0;
        end
      end
    end
    for (int unsigned i = 0; i < NumPorts; i++) pop[i] = grant[i];
    if (grant[PortL] && join_l) pop[partner] = 1'b1;
  end

  // ---------------------------------------------------------------- combine
  flit_t l_flit;
  logic [LinkWidth-1:0] red_data;

  coll_reduce_alu #(.W(LinkWidth)) i_alu (
    .op_max_i (is_max_op(head[PortL].hdr.op)),
    .a_i      (head[PortL].data),
    .b_i      (head[partner].data),
    .y_o      (red_data)
  );

  always_comb begin
    l_flit = head[PortL];
    if (join_l) l_flit.data = red_data;
  end

  // ------------------------------------------------------- output registers
  logic  ov_q [NumPorts];
  flit_t of_q [NumPorts];

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      rr_q <= '0;
      for (int unsigned o = 0; o < NumPorts; o++) ov_q[o] <= 1'b0;
    end else begin
      rr_q <= rr_d;
      for (int unsigned o = 0; o < NumPorts; o++) begin
        logic g;
        g = 1'b0;
        for (int unsigned i = 0; i < NumPorts; i++) if (grant[i] && req[i][o]) g = 1'b1;
        if (g) ov_q[o] <= 1'b1;
        else if (out_ready_i[o]) ov_q[o] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    for (int unsigned o = 0; o < NumPorts; o++) begin
      for (int unsigned i = 0; i < NumPorts; i++) begin
        if (grant[i] && req[i][o]) of_q[o] <= (i == int'(PortL)) ? l_flit : head[i];
      end
    end
  end

  for (genvar o = 0; o < NumPorts; o++) begin : g_out
    assign out_valid_o[o] = ov_q[o];
    assign out_flit_o[o]  = of_q[o];
  end

  // ------------------------------------------------------------- assertions
  // A granted flit never loses its place: valid stays until accepted.
  for (genvar o = 0; o < NumPorts; o++) begin : g_sva
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     out_valid_o[o] && !out_ready_i[o] |=> out_valid_o[o] && $stable(out_flit_o[o]))
      else $error("router (%0d,%0d): output %0d dropped or changed a stalled flit", x_i, y_i, o);
  end
  // A reduction partial result must meet a local flit of the same reduction.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   head_valid[PortL] && is_reduce(head[PortL].hdr.op) && join_l &&
                   head_valid[partner] && is_reduce(head[partner].hdr.op) |-> partner_ok)
    else $error("router (%0d,%0d): mismatched reduction flits", x_i, y_i);

endmodule
