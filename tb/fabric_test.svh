// fabric_test.svh: end-to-end test body for flatatt_fabric, included by
// tb_flatatt_fabric (small mesh) and tb_flatatt_fabric_full (default size).
// The including module defines NX and NY and instantiates the fabric as
// `dut` with the signals declared here.
//
// The whole mesh is one FlatAttention group. The test walks through the
// data movement of one outer iteration of the algorithm:
//  1. Q: the west HBM edge sends one row slice to each west-edge tile,
//     which multicasts it along its row.
//  2. K^T/V: the south HBM edge sends one slice to each south-edge tile,
//     which multicasts it up its column.
//  3. every tile contributes a row-max partial; the west-edge tile of each
//     row receives the row maximum and multicasts it back along the row.
//  4. the same with a row sum (Softmax denominator and O rows).
//  5. column sum and column max reductions to the south-edge tiles.
//  6. the west-edge tiles store their O rows to the west HBM edge and the
//     south-edge tiles write to the south edge, while the HBM side applies
//     random back-pressure.
//  7. a stream of M flits multicast along one row, timed: the last copy
//     must reach the far tile M - 1 + 2*NX cycles after the first flit
//     was accepted (one flit per cycle, two cycles per hop).
// Every result is compared with values computed here from what was sent
// (FP16 reference in fp16_ref.svh, same combining order as the fabric:
// local contribution first, partial from upstream second).

  import coll_pkg::*;
  `include "tb/fp16_ref.svh"

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  t_iv [NY][NX], t_ir [NY][NX], t_ov [NY][NX], t_or [NY][NX];
  flit_t t_if [NY][NX], t_of [NY][NX];
  logic  w_iv [NY], w_ir [NY], w_ov [NY], w_or [NY];
  flit_t w_if [NY], w_of [NY];
  logic  s_iv [NX], s_ir [NX], s_ov [NX], s_or [NX];
  flit_t s_if [NX], s_of [NX];

  int checks = 0, failures = 0, cycle = 0;
  // How often each mechanism was exercised.
  int n_unicast = 0, n_mcast_row = 0, n_mcast_col = 0, n_redsum_row = 0,
      n_redmax_row = 0, n_redsum_col = 0, n_redmax_col = 0, n_west_in = 0,
      n_west_out = 0, n_south_in = 0, n_south_out = 0, n_stall = 0;

  flatatt_fabric dut (
    .clk_i(clk), .rst_ni(rst_n),
    .tile_in_valid_i(t_iv), .tile_in_ready_o(t_ir), .tile_in_flit_i(t_if),
    .tile_out_valid_o(t_ov), .tile_out_ready_i(t_or), .tile_out_flit_o(t_of),
    .west_in_valid_i(w_iv), .west_in_ready_o(w_ir), .west_in_flit_i(w_if),
    .west_out_valid_o(w_ov), .west_out_ready_i(w_or), .west_out_flit_o(w_of),
    .south_in_valid_i(s_iv), .south_in_ready_o(s_ir), .south_in_flit_i(s_if),
    .south_out_valid_o(s_ov), .south_out_ready_i(s_or), .south_out_flit_o(s_of)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // Transmit queues (tiles, west edge, south edge) and receive logs.
  flit_t t_txq [NY][NX][$];
  flit_t t_rxq [NY][NX][$];
  int    t_rxt [NY][NX][$];
  flit_t w_txq [NY][$];
  flit_t w_rxq [NY][$];
  flit_t s_txq [NX][$];
  flit_t s_rxq [NX][$];
  logic  edge_bp = 1'b0;   // random back-pressure at the HBM edges

  always @(posedge clk) begin
    if (rst_n) begin
      for (int r = 0; r < NY; r++)
        for (int c = 0; c < NX; c++) begin
          if (t_iv[r][c] && t_ir[r][c]) void'(t_txq[r][c].pop_front());
          if (t_ov[r][c] && t_or[r][c]) begin
            t_rxq[r][c].push_back(t_of[r][c]);
            t_rxt[r][c].push_back(cycle);
          end
        end
      for (int r = 0; r < NY; r++) begin
        if (w_iv[r] && w_ir[r]) begin void'(w_txq[r].pop_front()); n_west_in++; end
        if (w_ov[r] && w_or[r]) begin w_rxq[r].push_back(w_of[r]); n_west_out++; end
        if (w_ov[r] && !w_or[r]) n_stall++;
      end
      for (int c = 0; c < NX; c++) begin
        if (s_iv[c] && s_ir[c]) begin void'(s_txq[c].pop_front()); n_south_in++; end
        if (s_ov[c] && s_or[c]) begin s_rxq[c].push_back(s_of[c]); n_south_out++; end
        if (s_ov[c] && !s_or[c]) n_stall++;
      end
    end
  end

  // Drive the heads of the queues; change inputs only at the falling edge.
  always @(negedge clk) begin
    for (int r = 0; r < NY; r++)
      for (int c = 0; c < NX; c++) begin
        t_iv[r][c] = rst_n && (t_txq[r][c].size() != 0);
        t_if[r][c] = (t_txq[r][c].size() != 0) ? t_txq[r][c][0] : '0;
        t_or[r][c] = 1'b1;
      end
    for (int r = 0; r < NY; r++) begin
      w_iv[r] = rst_n && (w_txq[r].size() != 0);
      w_if[r] = (w_txq[r].size() != 0) ? w_txq[r][0] : '0;
      w_or[r] = !edge_bp || ($urandom_range(1) == 1);
    end
    for (int c = 0; c < NX; c++) begin
      s_iv[c] = rst_n && (s_txq[c].size() != 0);
      s_if[c] = (s_txq[c].size() != 0) ? s_txq[c][0] : '0;
      s_or[c] = !edge_bp || ($urandom_range(1) == 1);
    end
  end

  function automatic flit_t mk(coll_op_e op, int dx, int dy, int lo, int hi, int sx, int sy);
    flit_t f;
    f = '0;
    f.hdr.op    = op;
    f.hdr.dst_x = coord_t'(dx);
    f.hdr.dst_y = coord_t'(dy);
    f.hdr.src_x = coord_t'(sx);
    f.hdr.src_y = coord_t'(sy);
    f.hdr.lo    = coord_t'(lo);
    f.hdr.hi    = coord_t'(hi);
    f.hdr.last  = 1'b1;
    for (int k = 0; k < Lanes; k++) f.data[16*k +: 16] = rand_fp16();
    return f;
  endfunction

  function automatic logic [LinkWidth-1:0] comb(logic [LinkWidth-1:0] loc,
                                               logic [LinkWidth-1:0] up, logic mx);
    logic [LinkWidth-1:0] y;
    for (int k = 0; k < Lanes; k++)
      y[16*k +: 16] = mx ? ref_max(loc[16*k +: 16], up[16*k +: 16])
                         : ref_add(loc[16*k +: 16], up[16*k +: 16]);
    return y;
  endfunction

  function automatic int total_rx();
    int n = 0;
    for (int r = 0; r < NY; r++) for (int c = 0; c < NX; c++) n += t_rxq[r][c].size();
    for (int r = 0; r < NY; r++) n += w_rxq[r].size();
    for (int c = 0; c < NX; c++) n += s_rxq[c].size();
    return n;
  endfunction

  task automatic wait_rx(int n, string what);
    int t;
    t = 0;
    while (total_rx() < n && t < 20 * (NX + NY) + 200) begin
      @(posedge clk);
      t++;
    end
    repeat (4 * (NX + NY)) @(posedge clk);   // anything extra would show now
    checks++;
    if (total_rx() != n) begin
      failures++;
      $display("FAIL %s: %0d flits delivered, expected %0d", what, total_rx(), n);
    end
  endtask

  task automatic clear_rx();
    for (int r = 0; r < NY; r++) for (int c = 0; c < NX; c++) begin
      t_rxq[r][c].delete(); t_rxt[r][c].delete();
    end
    for (int r = 0; r < NY; r++) w_rxq[r].delete();
    for (int c = 0; c < NX; c++) s_rxq[c].delete();
  endtask

  task automatic expect_tile(int r, int c, logic [LinkWidth-1:0] d, string what);
    checks++;
    if (t_rxq[r][c].size() != 1 || t_rxq[r][c][0].data !== d) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s at tile (%0d,%0d): %0d flit(s)", what, c + 1, r + 1, t_rxq[r][c].size());
    end
  endtask

  // Row multicast of one flit per row from the west-edge tile.
  task automatic row_mcast(flit_t src [NY], string what);
    for (int r = 0; r < NY; r++) begin
      flit_t f;
      f = src[r];
      f.hdr = mk(OpMcastRow, 0, 0, 1, NX, 1, r + 1).hdr;
      t_txq[r][0].push_back(f);
      n_mcast_row++;
    end
    wait_rx(NY * (NX - 1), what);
    for (int r = 0; r < NY; r++) for (int c = 1; c < NX; c++) expect_tile(r, c, src[r].data, what);
    checks++;
    for (int r = 0; r < NY; r++) if (t_rxq[r][0].size() != 0) begin
      failures++; $display("FAIL %s: source tile got its own multicast", what);
    end
    clear_rx();
  endtask

  flit_t qv   [NY];
  flit_t kv   [NX];
  flit_t part [NY][NX];
  flit_t res  [NY];
  flit_t cres [NX];
  logic [LinkWidth-1:0] acc;
  int    t0, t1;
  localparam int M = 16;

  initial begin
    for (int r = 0; r < NY; r++) for (int c = 0; c < NX; c++) begin
      t_iv[r][c] = 1'b0; t_if[r][c] = '0; t_or[r][c] = 1'b1;
    end
    for (int r = 0; r < NY; r++) begin w_iv[r] = 1'b0; w_if[r] = '0; w_or[r] = 1'b1; end
    for (int c = 0; c < NX; c++) begin s_iv[c] = 1'b0; s_if[c] = '0; s_or[c] = 1'b1; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // 1. Q slices from the west HBM edge, then row multicast.
    for (int r = 0; r < NY; r++) begin
      qv[r] = mk(OpUnicast, 1, r + 1, 0, 0, 0, r + 1);
      w_txq[r].push_back(qv[r]);
      n_unicast++;
    end
    wait_rx(NY, "Q load");
    for (int r = 0; r < NY; r++) expect_tile(r, 0, qv[r].data, "Q load");
    clear_rx();
    row_mcast(qv, "Q row multicast");

    // 2. K^T/V slices from the south HBM edge, then column multicast.
    for (int c = 0; c < NX; c++) begin
      kv[c] = mk(OpUnicast, c + 1, 1, 0, 0, c + 1, 0);
      s_txq[c].push_back(kv[c]);
      n_unicast++;
    end
    wait_rx(NX, "KV load");
    for (int c = 0; c < NX; c++) expect_tile(0, c, kv[c].data, "KV load");
    clear_rx();
    for (int c = 0; c < NX; c++) begin
      flit_t f;
      f = kv[c];
      f.hdr = mk(OpMcastCol, 0, 0, 1, NY, c + 1, 1).hdr;
      t_txq[0][c].push_back(f);
      n_mcast_col++;
    end
    wait_rx(NX * (NY - 1), "KV column multicast");
    for (int c = 0; c < NX; c++) for (int r = 1; r < NY; r++)
      expect_tile(r, c, kv[c].data, "KV column multicast");
    clear_rx();

    // 3./4. Row max, then row sum; result to the west-edge tile, multicast back.
    for (int pass = 0; pass < 2; pass++) begin
      coll_op_e op;
      op = (pass == 0) ? OpRedMaxRow : OpRedSumRow;
      // Tiles inject in random order, so partial results wait for partners.
      for (int r = 0; r < NY; r++) for (int c = 0; c < NX; c++)
        part[r][c] = mk(op, 0, 0, 1, NX, c + 1, r + 1);
      for (int k = 0; k < NX * NY; k++) begin
        int r, c;
        r = (k * 7 + 3) % NY;
        c = (k * 5 + k / NY) % NX;
        if (t_txq[r][c].size() == 0 && k < NX * NY / 2) t_txq[r][c].push_back(part[r][c]);
      end
      repeat (NX) @(posedge clk);
      for (int r = 0; r < NY; r++) for (int c = 0; c < NX; c++) begin
        logic sent;
        sent = 1'b0;
        // Anything not yet queued (or already accepted) is queued now, once.
        for (int k = 0; k < NX * NY / 2; k++)
          if (((k * 7 + 3) % NY) == r && ((k * 5 + k / NY) % NX) == c) sent = 1'b1;
        if (!sent) t_txq[r][c].push_back(part[r][c]);
      end
      if (pass == 0) n_redmax_row += NY; else n_redsum_row += NY;
      wait_rx(NY, pass == 0 ? "row max reduction" : "row sum reduction");
      for (int r = 0; r < NY; r++) begin
        acc = part[r][NX-1].data;
        for (int c = NX - 2; c >= 0; c--) acc = comb(part[r][c].data, acc, pass == 0);
        res[r] = part[r][0];
        res[r].data = acc;
        expect_tile(r, 0, acc, pass == 0 ? "row max reduction" : "row sum reduction");
      end
      clear_rx();
      row_mcast(res, pass == 0 ? "row max multicast" : "row sum multicast");
    end

    // 5. Column sum and column max to the south-edge tiles.
    for (int pass = 0; pass < 2; pass++) begin
      coll_op_e op;
      op = (pass == 0) ? OpRedSumCol : OpRedMaxCol;
      for (int r = 0; r < NY; r++) for (int c = 0; c < NX; c++) begin
        part[r][c] = mk(op, 0, 0, 1, NY, c + 1, r + 1);
        t_txq[r][c].push_back(part[r][c]);
      end
      if (pass == 0) n_redsum_col += NX; else n_redmax_col += NX;
      wait_rx(NX, "column reduction");
      for (int c = 0; c < NX; c++) begin
        acc = part[NY-1][c].data;
        for (int r = NY - 2; r >= 0; r--) acc = comb(part[r][c].data, acc, pass == 1);
        expect_tile(0, c, acc, pass == 0 ? "column sum" : "column max");
      end
      clear_rx();
    end

    // 6. Store O rows to both HBM edges under back-pressure: two flits per
    //    west-edge tile to the west edge, two per south-edge tile to the south
    //    edge (the south one addressed from the tile on the row above).
    edge_bp = 1'b1;
    for (int r = 0; r < NY; r++)
      for (int i = 0; i < 2; i++) begin
        part[r][i] = mk(OpUnicast, 0, r + 1, 0, 0, 1, r + 1);
        t_txq[r][0].push_back(part[r][i]);
        n_unicast++;
      end
    for (int c = 0; c < NX; c++)
      for (int i = 0; i < 2; i++) begin
        flit_t f;
        f = mk(OpUnicast, c + 1, 0, 0, 0, c + 1, 2);
        cres[c] = f;
        t_txq[(NY > 1) ? 1 : 0][c].push_back(f);
        n_unicast++;
      end
    wait_rx(2 * NY + 2 * NX, "O store");
    for (int r = 0; r < NY; r++) begin
      checks++;
      if (w_rxq[r].size() != 2 || w_rxq[r][0] !== part[r][0] || w_rxq[r][1] !== part[r][1]) begin
        failures++; $display("FAIL O store west row %0d", r + 1);
      end
    end
    for (int c = 0; c < NX; c++) begin
      checks++;
      if (s_rxq[c].size() != 2 || s_rxq[c][1] !== cres[c]) begin
        failures++; $display("FAIL store south column %0d", c + 1);
      end
    end
    clear_rx();
    edge_bp = 1'b0;

    // 7. Timed row multicast of M flits from the west-edge tile of row 1.
    repeat (4) @(posedge clk);
    for (int i = 0; i < M; i++) begin
      t_txq[0][0].push_back(mk(OpMcastRow, 0, 0, 1, NX, 1, 1));
      n_mcast_row++;
    end
    @(posedge clk);
    while (!(t_iv[0][0] && t_ir[0][0])) @(posedge clk);
    t0 = cycle;
    wait_rx(M * (NX - 1), "timed multicast");
    t1 = (t_rxt[0][NX-1].size() == M) ? t_rxt[0][NX-1][M-1] : -1;
    checks++;
    if (t1 - t0 != M - 1 + 2 * NX) begin
      failures++;
      $display("FAIL multicast latency: %0d cycles, expected %0d", t1 - t0, M - 1 + 2 * NX);
    end
    $display("multicast of %0d flits over %0d tiles: %0d cycles", M, NX, t1 - t0);
    clear_rx();

    // Every mechanism must have happened.
    $display("mechanisms: unicast=%0d mcast_row=%0d mcast_col=%0d redsum_row=%0d redmax_row=%0d",
             n_unicast, n_mcast_row, n_mcast_col, n_redsum_row, n_redmax_row);
    $display("            redsum_col=%0d redmax_col=%0d west_in=%0d west_out=%0d south_in=%0d south_out=%0d stall=%0d",
             n_redsum_col, n_redmax_col, n_west_in, n_west_out, n_south_in, n_south_out, n_stall);
    if (n_unicast == 0)    begin failures++; $display("FAIL no unicast"); end
    if (n_mcast_row == 0)  begin failures++; $display("FAIL no row multicast"); end
    if (n_mcast_col == 0)  begin failures++; $display("FAIL no column multicast"); end
    if (n_redsum_row == 0) begin failures++; $display("FAIL no row sum"); end
    if (n_redmax_row == 0) begin failures++; $display("FAIL no row max"); end
    if (n_redsum_col == 0) begin failures++; $display("FAIL no column sum"); end
    if (n_redmax_col == 0) begin failures++; $display("FAIL no column max"); end
    if (n_west_in == 0 || n_west_out == 0)   begin failures++; $display("FAIL west edge unused"); end
    if (n_south_in == 0 || n_south_out == 0) begin failures++; $display("FAIL south edge unused"); end
    if (n_stall == 0)      begin failures++; $display("FAIL no back-pressure stall"); end
    checks += 10;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
