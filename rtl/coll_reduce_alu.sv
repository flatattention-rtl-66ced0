// coll_reduce_alu: lane-wise FP16 combine of two flit payloads.
//
// This is the arithmetic of the fabric's reduction collectives. A payload of
// W bits is read as W/16 independent FP16 lanes; lane k of the result is
// a_k + b_k (sum-reduction) or max(a_k, b_k) (max-reduction), selected by
// op_max_i. FlatAttention uses the max form for the global row maxima of the
// Softmax and the sum form for the Softmax denominators and the partial
// output rows. Purely combinational: the router registers the result in its
// output stage, so the combine adds no cycle to a hop.
//
// The two operations and the 1024-bit width are the paper's; the FP16 lane
// layout (lane k in bits 16k+15..16k) is this design's own.
module coll_reduce_alu #(
  parameter int unsigned W = coll_pkg::LinkWidth
) (
  input  logic         op_max_i,
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  output logic [W-1:0] y_o
);

  localparam int unsigned L = W / 16;

  for (genvar k = 0; k < L; k++) begin : g_lane
    logic [15:0] sum, mx;
    fp16_add i_add (.a_i(a_i[16*k +: 16]), .b_i(b_i[16*k +: 16]), .y_o(sum));
    fp16_max i_max (.a_i(a_i[16*k +: 16]), .b_i(b_i[16*k +: 16]), .y_o(mx));
    assign y_o[16*k +: 16] = op_max_i ? mx : sum;
  end

endmodule
