// tb_mbm_mant_mult: exhaustive check of the MBM approximate multiplier.
// All operand pairs of an 8-bit and a 4-bit instance are compared with the
// two-case Mitchell/MBM formula evaluated in real arithmetic (leading-one
// positions found by a loop, c = 21/256).  Combinational block, so no cycle
// counts apply; the watchdog still bounds the run.
module tb_mbm_mant_mult;
  int checks = 0, failures = 0;

  localparam int N8 = 8, N4 = 4, CFRAC = 8, C = 21;
  localparam int FW8 = ((N8 - 1) > (CFRAC + 1)) ? (N8 - 1) : (CFRAC + 1);
  localparam int FW4 = ((N4 - 1) > (CFRAC + 1)) ? (N4 - 1) : (CFRAC + 1);

  logic [N8-1:0] a8, b8;
  logic [2*N8+FW8:0] p8;
  logic [N4-1:0] a4, b4;
  logic [2*N4+FW4:0] p4;

  mbm_mant_mult #(.N(N8), .CFRAC(CFRAC), .C_CORR(C)) dut8 (.a(a8), .b(b8), .p(p8));
  mbm_mant_mult #(.N(N4), .CFRAC(CFRAC), .C_CORR(C)) dut4 (.a(a4), .b(b4), .p(p4));

  import tb_fp_ref_pkg::pow2;

  function automatic real mbm_ref(int a, int b);
    int k1, k2;
    real x1, x2, c;
    if (a == 0 || b == 0) return 0.0;
    k1 = 0; k2 = 0;
    for (int i = 0; i < 31; i++) begin
      if ((a >> i) & 1) k1 = i;
      if ((b >> i) & 1) k2 = i;
    end
    x1 = $itor(a) / pow2(k1) - 1.0;
    x2 = $itor(b) / pow2(k2) - 1.0;
    c  = $itor(C) / 256.0;
    if (x1 + x2 < 1.0) return pow2((k1 + k2)) * (1.0 + x1 + x2 + c);
    return pow2((k1 + k2 + 1)) * (x1 + x2 + c / 2.0);
  endfunction

  initial begin
    real exp8, exp4, got;
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a8 = 8'(i); b8 = 8'(j);
        #1;
        exp8 = mbm_ref(i, j);
        got  = $itor(p8) / pow2(FW8);
        checks++;
        if (got != exp8) begin
          failures++;
          if (failures < 10) $display("FAIL n8 a=%0d b=%0d got=%f exp=%f", i, j, got, exp8);
        end
      end
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a4 = 4'(i); b4 = 4'(j);
        #1;
        exp4 = mbm_ref(i, j);
        got  = $itor(p4) / pow2(FW4);
        checks++;
        if (got != exp4) begin
          failures++;
          if (failures < 10) $display("FAIL n4 a=%0d b=%0d got=%f exp=%f", i, j, got, exp4);
        end
      end
    // 3 x 3: k = 1, x1 = x2 = 0.5, second branch: 2^3 (1 + c/2)
    a4 = 4'd3; b4 = 4'd3; #1;
    checks++;
    if ($itor(p4) / pow2(FW4) != 8.0 * (1.0 + 21.0 / 512.0)) failures++;
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
