// fp16_add: combinational IEEE 754 binary16 adder, round to nearest even.
//
// Used lane by lane in the in-network sum-reduction. The operands are
// aligned with three extra bits (guard, round, sticky), added or subtracted
// in sign-magnitude form, normalised (a carry shifts right by one, a
// cancellation shifts left no further than the smallest exponent allows, so
// subnormal results come out exact) and rounded to nearest, ties to even.
// Overflow gives infinity, any NaN operand or inf - inf gives the quiet NaN
// 0x7E00, and x + (-x) gives +0. Purely combinational, no clock.
//
// FP16 is the datatype the paper gives for the engines; the adder itself is
// this design's own, the paper only says that the fabric can sum-reduce.
module fp16_add (
  input  logic [15:0] a_i,
  input  logic [15:0] b_i,
  output logic [15:0] y_o
);

  logic        a_nan, b_nan, a_inf, b_inf, swap;
  logic        sx, sy;
  logic [4:0]  ex, ey;
  logic [9:0]  fx, fy;
  logic [4:0]  ebx, eby, d;
  logic [13:0] mxe, mye, sh, mask;
  logic [14:0] s;
  logic [13:0] sn;
  logic [6:0]  e;
  logic [3:0]  lz, shl;
  logic        found, rnd_up;
  logic [11:0] m12;

  always_comb begin
    a_nan = (a_i[14:10] == 5'h1f) && (a_i[9:0] != '0);
    b_nan = (b_i[14:10] == 5'h1f) && (b_i[9:0] != '0);
    a_inf = (a_i[14:10] == 5'h1f) && (a_i[9:0] == '0);
    b_inf = (b_i[14:10] == 5'h1f) && (b_i[9:0] == '0);

    // Larger magnitude first.
    swap = b_i[14:0] > a_i[14:0];
    {sx, ex, fx} = swap ? b_i : a_i;
    {sy, ey, fy} = swap ? a_i : b_i;
    ebx = (ex == '0) ? 5'd1 : ex;
    eby = (ey == '0) ? 5'd1 : ey;
    d   = ebx - eby;
    mxe = {ex != '0, fx, 3'b000};
    mye = {ey != '0, fy, 3'b000};

    // Align the smaller operand, folding shifted-out bits into the sticky bit.
    mask = (d >= 5'd14) ? 14'h3fff : ((14'd1 << d) - 14'd1);
    sh   = (d >= 5'd14) ? 14'd0 : (mye >> d);
    sh   = {sh[13:1], sh[0] | (|(mye & mask))};

    s = (sx == sy) ? ({1'b0, mxe} + {1'b0, sh}) : ({1'b0, mxe} - {1'b0, sh});
    e = {2'b00, ebx};

    // Normalise.
    lz    = 4'd0;
    found = 1'b0;
    for (int i = 13; i >= 0; i--) begin
      if (!found && s[i]) found = 1'b1;
      else if (!found) lz = lz + 4'd1;
    end
    sn  = s[13:0];
    shl = 4'd0;
    if (s[14]) begin
      sn = {s[14:2], s[1] | s[0]};
      e  = e + 7'd1;
    end else begin
      shl = (7'(lz) < e - 7'd1) ? lz : 4'(e - 7'd1);
      sn  = s[13:0] << shl;
      e   = e - 7'(shl);
    end

    // Round to nearest, ties to even.
    rnd_up = sn[2] & (sn[1] | sn[0] | sn[3]);
    m12    = {1'b0, sn[13:3]} + 12'(rnd_up);
    if (m12[11]) begin
      m12 = m12 >> 1;
      e   = e + 7'd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (a_i[15] != b_i[15]))) begin
      y_o = 16'h7e00;
    end else if (a_inf) begin
      y_o = a_i;
    end else if (b_inf) begin
      y_o = b_i;
    end else if (s == '0) begin
      // Exact zero: -0 only when both operands are -0.
      y_o = {sx & sy, 15'd0};
    end else if (e >= 7'd31) begin
      y_o = {sx, 5'h1f, 10'd0};
    end else begin
      y_o = {sx, m12[10] ? e[4:0] : 5'd0, m12[9:0]};
    end
  end

endmodule
