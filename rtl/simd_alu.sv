// simd_alu: the FP32 ALU of one SIMD core.
//
// The SIMD array handles the non-convolutional layers (e.g. batch
// normalisation, activation functions) and the element-wise work of the
// gradient and weight-update steps, all in FP32.  The paper gives the ALU's
// format (FP32) and its role but no operation list; the set here is this
// design's choice and covers what those layers need: ADD, SUB, MUL (exact
// FP32), MAX, MIN, RELU (max(a, 0)) and MOV (copy a).  NOP, HALT and unknown
// opcodes give 0 and are never written back by the sequencer.
// Interface: combinational, op/a/b in, y out.
module simd_alu
  import accel_pkg::*;
(
  input  simd_op_e op,
  input  fp32_t    a,
  input  fp32_t    b,
  output fp32_t    y
);

  fp32_t b_add, sum, prod;

  assign b_add = (op == OP_SUB) ? {~b[31], b[30:0]} : b;

  fp32_add u_add (.a(a), .b(b_add), .y(sum));
  fp_mult #(.MANT_W(23), .APPROX(1'b0)) u_mul (.a(a), .b(b), .y(prod));

  always_comb begin
    unique case (op)
      OP_ADD, OP_SUB: y = sum;
      OP_MUL:         y = prod;
      OP_MAX:         y = fp32_lt(a, b) ? b : a;
      OP_MIN:         y = fp32_lt(a, b) ? a : b;
      OP_RELU:        y = (a[31] || fp32_is_zero(a)) ? 32'd0 : a;
      OP_MOV:         y = a;
      default:        y = 32'd0;
    endcase
  end

endmodule
