// tb_fp32_add: checks the exact FP32 adder against double-precision sums
// rounded once to FP32 (nearest even).  Covers random operands with small and
// large exponent differences, both signs (so effective subtraction and
// cancellation), exact cancellation to +0, zero operands, rounding carries
// and overflow.  Combinational block: no cycle counts.
module tb_fp32_add;
  import tb_fp_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [31:0] a, b, y;
  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic chk();
    logic [31:0] exp;
    #1;
    exp = ref_add(a, b);
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL a=%h b=%h got=%h exp=%h", a, b, y, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 20000; i++) begin
      int e;
      a = rand_fp32(60, 190);
      e = int'(a[30:23]) + int'($urandom % 7) - 3;   // close exponents: cancellation
      b = rand_fp32(e, e);
      if (i % 3 == 0) b = rand_fp32(60, 190);          // anything
      chk();
    end
    a = 32'h3f80_0000; b = 32'hbf80_0000; chk();             // 1 + -1 = +0
    a = 32'h0000_0000; b = 32'h4049_0fdb; chk();             // 0 + pi
    a = 32'hc049_0fdb; b = 32'h0000_0000; chk();             // -pi + 0
    a = 32'h3f80_0000; b = 32'h3380_0000; chk();             // 1 + 2^-24: tie, stays 1
    a = 32'h3f80_0001; b = 32'h3380_0000; chk();             // tie, rounds up to even
    a = 32'h3fff_ffff; b = 32'h3400_0000; chk();             // mantissa carry
    a = 32'h7f7f_ffff; b = 32'h7f7f_ffff; chk();             // overflow
    a = 32'h3f80_0000; b = 32'hb380_0001; chk();             // 1 - just over half an ulp
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
