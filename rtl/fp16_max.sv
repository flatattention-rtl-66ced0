// fp16_max: combinational IEEE 754 binary16 maximum (maxNum).
//
// Used lane by lane in the in-network max-reduction (the global row maxima of
// the Softmax). Each operand is mapped to an unsigned key that orders like
// the real numbers (positive values get the top bit set, negative values are
// inverted), and the larger key wins, so +0 beats -0. A NaN operand loses to
// a number; two NaNs give the quiet NaN 0x7E00. Purely combinational.
//
// The operation is the paper's (max-reduction); the encoding trick is this
// design's own choice.
module fp16_max (
  input  logic [15:0] a_i,
  input  logic [15:0] b_i,
  output logic [15:0] y_o
);

  logic        a_nan, b_nan;
  logic [15:0] ka, kb;

  always_comb begin
    a_nan = (a_i[14:10] == 5'h1f) && (a_i[9:0] != '0);
    b_nan = (b_i[14:10] == 5'h1f) && (b_i[9:0] != '0);
    ka    = a_i[15] ? ~a_i : {1'b1, a_i[14:0]};
    kb    = b_i[15] ? ~b_i : {1'b1, b_i[14:0]};
    if (a_nan && b_nan) y_o = 16'h7e00;
    else if (a_nan)     y_o = b_i;
    else if (b_nan)     y_o = a_i;
    else                y_o = (kb > ka) ? b_i : a_i;
  end

endmodule
