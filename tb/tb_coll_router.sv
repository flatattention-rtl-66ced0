// tb_coll_router: one collective router at tile coordinate (3, 3) of a
// 5 x 5 mesh, driven on all five inputs by the testbench.
// Checks, against expectations worked out from the header alone:
//  * unicast to every direction, and to the west HBM edge (Y first);
//  * row multicast injected locally (copies to E and W, none to L), row
//    multicast arriving from W (copy to L and on to E, none beyond hi),
//    column multicast arriving from S at the top of its range (L only);
//  * row sum- and max-reduction: local contribution joined with the
//    partial result from E, forwarded W; the last contributor (x = hi)
//    forwarding its flit unchanged; the root (x = lo) handing the result
//    to the tile; a column sum joined with the N partial result;
//  * a reduction flit waits while its partner is missing;
//  * back-pressure: a stalled output holds its flit, nothing is lost;
//  * timing: two cycles per hop and one flit per cycle under streaming.
module tb_coll_router;
  import coll_pkg::*;
  `include "tb/fp16_ref.svh"

  logic   clk = 1'b0, rst_n = 1'b0;
  coord_t x_id = coord_t'(3), y_id = coord_t'(3);
  logic   iv [NumPorts];
  logic   ir [NumPorts];
  flit_t  ifl[NumPorts];
  logic   ov [NumPorts];
  logic   orr[NumPorts];
  flit_t  ofl[NumPorts];

  int checks = 0, failures = 0;
  int cycle = 0;

  coll_router dut (
    .clk_i(clk), .rst_ni(rst_n), .x_i(x_id), .y_i(y_id),
    .in_valid_i(iv), .in_ready_o(ir), .in_flit_i(ifl),
    .out_valid_o(ov), .out_ready_i(orr), .out_flit_o(ofl)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // Everything each output delivered, with the cycle it was accepted.
  flit_t got   [NumPorts][$];
  int    got_t [NumPorts][$];
  always @(posedge clk) begin
    for (int o = 0; o < NumPorts; o++)
      if (rst_n && ov[o] && orr[o]) begin
        got[o].push_back(ofl[o]);
        got_t[o].push_back(cycle);
      end
  end

  function automatic flit_t mk(coll_op_e op, int dx, int dy, int lo, int hi, int seed);
    flit_t f;
    f = '0;
    f.hdr.op    = op;
    f.hdr.dst_x = coord_t'(dx);
    f.hdr.dst_y = coord_t'(dy);
    f.hdr.lo    = coord_t'(lo);
    f.hdr.hi    = coord_t'(hi);
    for (int k = 0; k < Lanes; k++) f.data[16*k +: 16] = rand_fp16();
    f.data[15:0] = 16'(seed);
    return f;
  endfunction

  // Drive one flit into an input and wait until it is taken.
  task automatic send(int p, flit_t f);
    @(negedge clk);
    iv[p]  = 1'b1;
    ifl[p] = f;
    do @(posedge clk); while (!ir[p]);
    @(negedge clk);
    iv[p] = 1'b0;
  endtask

  task automatic expect_out(string what, int o, flit_t f);
    checks++;
    if (got[o].size() == 0) begin
      failures++;
      $display("FAIL %s: nothing on output %0d", what, o);
    end else begin
      flit_t g;
      g = got[o].pop_front();
      void'(got_t[o].pop_front());
      if (g !== f) begin
        failures++;
        $display("FAIL %s: output %0d got op %0d data %h, expected op %0d data %h",
                 what, o, g.hdr.op, g.data[63:0], f.hdr.op, f.data[63:0]);
      end
    end
  endtask

  task automatic expect_idle(string what);
    checks++;
    for (int o = 0; o < NumPorts; o++)
      if (got[o].size() != 0) begin
        failures++;
        $display("FAIL %s: %0d unexpected flit(s) on output %0d", what, got[o].size(), o);
        got[o].delete();
        got_t[o].delete();
      end
  endtask

  task automatic settle();
    repeat (6) @(posedge clk);
  endtask

  function automatic flit_t combine(flit_t loc, flit_t up, logic mx);
    flit_t r;
    r = loc;
    for (int k = 0; k < Lanes; k++)
      r.data[16*k +: 16] = mx ? ref_max(loc.data[16*k +: 16], up.data[16*k +: 16])
                              : ref_add(loc.data[16*k +: 16], up.data[16*k +: 16]);
    return r;
  endfunction

  flit_t f, g, h;
  int    t0;

  initial begin
    for (int p = 0; p < NumPorts; p++) begin
      iv[p] = 1'b0; ifl[p] = '0; orr[p] = 1'b1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- unicast routing, with the hop latency
    f = mk(OpUnicast, 5, 1, 0, 0, 1);
    t0 = cycle;
    send(PortL, f); settle();
    expect_out("unicast east", PortE, f);
    f = mk(OpUnicast, 1, 5, 0, 0, 2); send(PortN, f); settle(); expect_out("unicast west", PortW, f);
    f = mk(OpUnicast, 3, 5, 0, 0, 3); send(PortS, f); settle(); expect_out("unicast north", PortN, f);
    f = mk(OpUnicast, 3, 1, 0, 0, 4); send(PortE, f); settle(); expect_out("unicast south", PortS, f);
    f = mk(OpUnicast, 3, 3, 0, 0, 5); send(PortW, f); settle(); expect_out("unicast local", PortL, f);
    f = mk(OpUnicast, 0, 5, 0, 0, 6); send(PortL, f); settle(); expect_out("to west HBM, Y first", PortN, f);
    f = mk(OpUnicast, 0, 3, 0, 0, 7); send(PortE, f); settle(); expect_out("to west HBM, own row", PortW, f);
    expect_idle("unicast");

    // Latency: flit accepted at the input in cycle c leaves the output in c+2.
    @(negedge clk);
    iv[PortW] = 1'b1; ifl[PortW] = mk(OpUnicast, 5, 3, 0, 0, 8);
    @(posedge clk); t0 = cycle;
    @(negedge clk); iv[PortW] = 1'b0;
    settle();
    checks++;
    if (got_t[PortE].size() != 1 || got_t[PortE][0] != t0 + 2) begin
      failures++;
      $display("FAIL hop latency: accepted at %0d, left at %0d (expected %0d)",
               t0, got_t[PortE].size() ? got_t[PortE][0] : -1, t0 + 2);
    end
    got[PortE].delete(); got_t[PortE].delete();

    // ---- multicast
    f = mk(OpMcastRow, 0, 0, 1, 5, 10); send(PortL, f); settle();
    expect_out("row mcast from tile -> E", PortE, f);
    expect_out("row mcast from tile -> W", PortW, f);
    expect_idle("row mcast from tile");
    f = mk(OpMcastRow, 0, 0, 1, 5, 11); send(PortW, f); settle();
    expect_out("row mcast from W -> L", PortL, f);
    expect_out("row mcast from W -> E", PortE, f);
    expect_idle("row mcast from W");
    f = mk(OpMcastRow, 0, 0, 1, 3, 12); send(PortW, f); settle();
    expect_out("row mcast end of range -> L", PortL, f);
    expect_idle("row mcast end of range");
    f = mk(OpMcastCol, 0, 0, 1, 3, 13); send(PortS, f); settle();
    expect_out("col mcast top of range -> L", PortL, f);
    expect_idle("col mcast top of range");
    f = mk(OpMcastCol, 0, 0, 1, 5, 14); send(PortS, f); settle();
    expect_out("col mcast -> L", PortL, f);
    expect_out("col mcast -> N", PortN, f);
    expect_idle("col mcast");

    // Multicast waits until every output it needs is free.
    @(negedge clk); orr[PortE] = 1'b0;
    g = mk(OpUnicast, 5, 3, 0, 0, 16); send(PortL, g);   // parks in the E output register
    f = mk(OpMcastRow, 0, 0, 1, 5, 15); send(PortW, f); settle();
    checks++;
    if (got[PortL].size() != 0) begin
      failures++; $display("FAIL mcast fork went ahead with a blocked branch");
    end
    @(negedge clk); orr[PortE] = 1'b1; settle();
    expect_out("stalled unicast", PortE, g);
    expect_out("fork after stall -> L", PortL, f);
    expect_out("fork after stall -> E", PortE, f);
    expect_idle("fork after stall");

    // ---- reductions
    // Middle of the range: wait for the partner, then join and go west.
    f = mk(OpRedSumRow, 0, 0, 1, 5, 20);
    g = mk(OpRedSumRow, 0, 0, 1, 5, 21);
    send(PortL, f); settle();
    checks++;
    if (got[PortW].size() != 0) begin failures++; $display("FAIL reduction left without partner"); end
    send(PortE, g); settle();
    expect_out("row sum join", PortW, combine(f, g, 1'b0));
    expect_idle("row sum join");
    f = mk(OpRedMaxRow, 0, 0, 2, 4, 22);
    g = mk(OpRedMaxRow, 0, 0, 2, 4, 23);
    fork send(PortE, g); send(PortL, f); join
    settle();
    expect_out("row max join", PortW, combine(f, g, 1'b1));
    expect_idle("row max join");
    // Far end of the range: forward unchanged.
    f = mk(OpRedSumRow, 0, 0, 1, 3, 24); send(PortL, f); settle();
    expect_out("row sum start", PortW, f);
    expect_idle("row sum start");
    // Root of the range: join and hand to the tile.
    f = mk(OpRedMaxRow, 0, 0, 3, 6, 25);
    g = mk(OpRedMaxRow, 0, 0, 3, 6, 26);
    fork send(PortL, f); send(PortE, g); join
    settle();
    expect_out("row max root", PortL, combine(f, g, 1'b1));
    expect_idle("row max root");
    // Column sum, partner from north, result south.
    f = mk(OpRedSumCol, 0, 0, 1, 4, 27);
    g = mk(OpRedSumCol, 0, 0, 1, 4, 28);
    fork send(PortN, g); send(PortL, f); join
    settle();
    expect_out("col sum join", PortS, combine(f, g, 1'b0));
    expect_idle("col sum join");

    // ---- streaming throughput: 16 flits W -> E, one per cycle.
    fork
      begin
        for (int i = 0; i < 16; i++) begin
          @(negedge clk);
          iv[PortW]  = 1'b1;
          ifl[PortW] = mk(OpUnicast, 5, 3, 0, 0, 100 + i);
          do @(posedge clk); while (!ir[PortW]);
        end
        @(negedge clk); iv[PortW] = 1'b0;
      end
    join
    settle();
    checks++;
    if (got_t[PortE].size() != 16 || (got_t[PortE][15] - got_t[PortE][0]) != 15) begin
      failures++;
      $display("FAIL streaming: %0d flits, span %0d cycles", got_t[PortE].size(),
               got_t[PortE].size() ? got_t[PortE][$] - got_t[PortE][0] : -1);
    end
    for (int i = 0; i < 16 && got[PortE].size() > 0; i++) begin
      h = got[PortE].pop_front();
      checks++;
      if (h.data[15:0] != 16'(100 + i)) begin failures++; $display("FAIL stream order %0d", i); end
    end
    got_t[PortE].delete();

    // ---- back-pressure with random ready on the east output
    fork
      begin
        for (int i = 0; i < 20; i++) send(PortL, mk(OpUnicast, 5, 3, 0, 0, 200 + i));
      end
      begin
        repeat (80) begin @(negedge clk); orr[PortE] = ($urandom_range(2) != 0); end
        orr[PortE] = 1'b1;
      end
    join
    settle();
    checks++;
    if (got[PortE].size() != 20) begin failures++; $display("FAIL back-pressure: %0d of 20", got[PortE].size()); end
    for (int i = 0; i < 20 && got[PortE].size() > 0; i++) begin
      h = got[PortE].pop_front();
      checks++;
      if (h.data[15:0] != 16'(200 + i)) begin failures++; $display("FAIL back-pressure order %0d", i); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
