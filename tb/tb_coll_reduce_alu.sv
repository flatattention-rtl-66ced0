// tb_coll_reduce_alu: checks the lane-wise FP16 sum and max of the fabric's
// reduction unit at the full 1024-bit width against a double-precision
// reference rounded to nearest-even. Random finite operands (with
// subnormals, cancellations and near-overflow values) plus directed special
// cases (signed zeros, infinities, NaN, overflow to infinity).
module tb_coll_reduce_alu;
  `include "tb/fp16_ref.svh"

  localparam int unsigned W = 1024;
  localparam int unsigned L = W / 16;

  logic         op_max;
  logic [W-1:0] a, b, y;
  int           checks = 0, failures = 0;

  coll_reduce_alu #(.W(W)) dut (.op_max_i(op_max), .a_i(a), .b_i(b), .y_o(y));

  task automatic check_lane(int k);
    logic [15:0] ea, eb, got, exp_v;
    ea    = a[16*k +: 16];
    eb    = b[16*k +: 16];
    got   = y[16*k +: 16];
    exp_v = op_max ? ref_max(ea, eb) : ref_add(ea, eb);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s lane %0d: %h op %h = %h, expected %h",
                 op_max ? "max" : "add", k, ea, eb, got, exp_v);
    end
  endtask

  initial begin
    // Random vectors.
    for (int it = 0; it < 400; it++) begin
      op_max = it[0];
      for (int k = 0; k < L; k++) begin
        a[16*k +: 16] = rand_fp16();
        b[16*k +: 16] = rand_fp16();
        // Near-cancellation in some lanes.
        if (k % 8 == 1) b[16*k +: 16] = a[16*k +: 16] ^ 16'h8000 ^ 16'($urandom_range(3));
      end
      #1;
      for (int k = 0; k < L; k++) check_lane(k);
    end

    // Directed special cases (sum).
    op_max = 1'b0;
    a = '0; b = '0;
    a[15:0]   = 16'h8000; b[15:0]   = 16'h8000;   // -0 + -0 = -0
    a[31:16]  = 16'h3c00; b[31:16]  = 16'hbc00;   // 1 - 1 = +0
    a[47:32]  = 16'h7bff; b[47:32]  = 16'h7bff;   // overflow to +inf
    a[63:48]  = 16'h0001; b[63:48]  = 16'h03ff;   // subnormal -> normal
    a[79:64]  = 16'h3c00; b[79:64]  = 16'h1000;   // tie case
    #1;
    for (int k = 0; k < 5; k++) check_lane(k);
    a[15:0] = 16'h7c00; b[15:0] = 16'hfc00;       // inf - inf = NaN
    a[31:16] = 16'h7c00; b[31:16] = 16'h3c00;     // inf + 1 = inf
    #1;
    checks += 2;
    if (y[15:0] !== 16'h7e00) begin failures++; $display("FAIL inf-inf: %h", y[15:0]); end
    if (y[31:16] !== 16'h7c00) begin failures++; $display("FAIL inf+1: %h", y[31:16]); end
    // Max with NaN and signed zeros.
    op_max = 1'b1;
    a[15:0] = 16'h7e00; b[15:0] = 16'hc000;       // max(NaN, -2) = -2
    a[31:16] = 16'h8000; b[31:16] = 16'h0000;     // max(-0, +0) = +0
    #1;
    checks += 2;
    if (y[15:0] !== 16'hc000) begin failures++; $display("FAIL max NaN: %h", y[15:0]); end
    if (y[31:16] !== 16'h0000) begin failures++; $display("FAIL max zeros: %h", y[31:16]); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
