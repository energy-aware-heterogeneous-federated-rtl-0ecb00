// tb_simd_alu: checks every operation of the FP32 SIMD ALU on random
// operands against the reference model: ADD and SUB (exact FP32 sum), MUL
// (exact FP32 product), MAX, MIN, RELU, MOV, and 0 for NOP/HALT.  MAX/MIN are
// also checked on operands of mixed sign and on zeros.
module tb_simd_alu;
  import accel_pkg::*;
  import tb_fp_ref_pkg::*;
  int checks = 0, failures = 0;

  simd_op_e op;
  fp32_t a, b, y;
  simd_alu dut (.*);

  function automatic real v(fp32_t x);
    return fp32_to_real(x);
  endfunction

  function automatic fp32_t expect_y(simd_op_e o, fp32_t x, fp32_t z);
    case (o)
      OP_ADD:  return ref_add(x, z);
      OP_SUB:  return ref_add(x, {~z[31], z[30:0]});
      OP_MUL:  return ref_mul_exact(x, z);
      OP_MAX:  return (v(x) >= v(z)) ? x : z;
      OP_MIN:  return (v(x) <= v(z)) ? x : z;
      OP_RELU: return (v(x) > 0.0) ? x : 32'd0;
      OP_MOV:  return x;
      default: return 32'd0;
    endcase
  endfunction

  task automatic chk();
    fp32_t e;
    #1;
    e = expect_y(op, a, b);
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 12) $display("FAIL op=%s a=%h b=%h got=%h exp=%h", op.name(), a, b, y, e);
    end
  endtask

  initial begin
    simd_op_e ops [9] = '{OP_ADD, OP_SUB, OP_MUL, OP_MAX, OP_MIN, OP_RELU, OP_MOV, OP_NOP, OP_HALT};
    for (int i = 0; i < 9000; i++) begin
      op = ops[i % 9];
      a = rand_fp32(90, 160);
      b = (i % 5 == 0) ? {~a[31], a[30:0] ^ 31'($urandom % 8)} : rand_fp32(90, 160);
      chk();
    end
    op = OP_MAX; a = 32'h0000_0000; b = 32'hbf80_0000; chk();
    op = OP_MIN; a = 32'h0000_0000; b = 32'hbf80_0000; chk();
    op = OP_MAX; a = 32'hc000_0000; b = 32'hbf80_0000; chk();
    op = OP_RELU; a = 32'hbf80_0000; b = 0; chk();
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
