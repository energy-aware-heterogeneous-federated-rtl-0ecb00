// tb_fp_mult: checks the compressed floating-point multiplier in five
// configurations (the paper's C1-C5 MAC formats): FP32 exact, bfloat16 exact,
// bfloat16 MBM, bfloat12 MBM and bfloat10 MBM.  Random normal operands are
// compared with an exact double-precision product rounded to FP32, or with the
// MBM formula; zero operands, exponent overflow and underflow are also checked.
// Combinational block: no cycle counts.
module tb_fp_mult;
  import tb_fp_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [31:0] a32, b32;
  logic [31:0] y_c1, y_c2, y_c3, y_c4, y_c5;

  fp_mult #(.MANT_W(23), .APPROX(1'b0)) u_c1 (.a(a32),        .b(b32),        .y(y_c1));
  fp_mult #(.MANT_W(7),  .APPROX(1'b0)) u_c2 (.a(a32[31:16]), .b(b32[31:16]), .y(y_c2));
  fp_mult #(.MANT_W(7),  .APPROX(1'b1)) u_c3 (.a(a32[31:16]), .b(b32[31:16]), .y(y_c3));
  fp_mult #(.MANT_W(3),  .APPROX(1'b1)) u_c4 (.a(a32[31:20]), .b(b32[31:20]), .y(y_c4));
  fp_mult #(.MANT_W(1),  .APPROX(1'b1)) u_c5 (.a(a32[31:22]), .b(b32[31:22]), .y(y_c5));

  localparam real C = 21.0 / 256.0;

  task automatic chk(string tag, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s a=%h b=%h got=%h exp=%h", tag, a32, b32, got, exp);
    end
  endtask

  task automatic check_all();
    #1;
    chk("C1", y_c1, ref_mul_exact(a32, b32));
    chk("C2", y_c2, ref_mul_exact(trunc_fp32(a32, 7), trunc_fp32(b32, 7)));
    chk("C3", y_c3, ref_mul_mbm(a32, b32, 7, C));
    chk("C4", y_c4, ref_mul_mbm(a32, b32, 3, C));
    chk("C5", y_c5, ref_mul_mbm(a32, b32, 1, C));
  endtask

  initial begin
    for (int i = 0; i < 4000; i++) begin
      a32 = rand_fp32(80, 170);
      b32 = rand_fp32(80, 170);
      check_all();
    end
    // zero operand
    a32 = 32'h0000_0000; b32 = rand_fp32(100, 150); check_all();
    a32 = rand_fp32(100, 150); b32 = 32'h8000_0000; check_all();
    // overflow to infinity and underflow to zero
    a32 = 32'h7e00_0000; b32 = 32'h7e00_0000; check_all();
    chk("ovf", y_c3, 32'h7f80_0000);
    a32 = 32'h0200_0000; b32 = 32'h0200_0000; check_all();
    chk("unf", y_c3, 32'h0000_0000);
    // a worked example: 1.5 x 1.5 exact = 2.25, MBM = 2^1 (0.5 + 0.5 + c/2)
    a32 = 32'h3fc0_0000; b32 = 32'h3fc0_0000; #1;
    chk("ex2", y_c2, 32'h4010_0000);
    chk("mbm", y_c3, real_to_fp32(2.0 * (1.0 + C / 2.0)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
