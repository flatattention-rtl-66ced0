// coll_fifo: small synchronous FIFO used as a router input buffer.
//
// Depth entries of Width bits, written when valid_i && ready_o and read when
// valid_o && ready_i. ready_o depends only on the fill level (a register),
// never on valid_i, and valid_o only on the fill level, so the link
// handshake has no combinational path through the buffer. A word written in
// one cycle can be read from the next. Reset (active low, synchronous to
// clk_i) empties it. Buffer depth is not given by the paper; two entries are
// this design's choice, the least that keeps a link busy every cycle.
module coll_fifo #(
  parameter int unsigned Width = 8,
  parameter int unsigned Depth = 2
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  output logic             ready_o,
  input  logic [Width-1:0] data_i,
  output logic             valid_o,
  input  logic             ready_i,
  output logic [Width-1:0] data_o
);

  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  logic [Width-1:0] mem_q [Depth];
  logic [PtrW-1:0]  rd_q, wr_q;
  logic [PtrW:0]    cnt_q;
  logic             push, pop;

  assign ready_o = (cnt_q < (PtrW+1)'(Depth));
  assign valid_o = (cnt_q != '0);
  assign data_o  = mem_q[rd_q];
  assign push    = valid_i && ready_o;
  assign pop     = valid_o && ready_i;

  function automatic logic [PtrW-1:0] incr(logic [PtrW-1:0] p);
    return (p == PtrW'(Depth - 1)) ? '0 : p + PtrW'(1);
  endfunction

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      cnt_q <= cnt_q + (PtrW+1)'(push) - (PtrW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= data_i;
  end

endmodule
