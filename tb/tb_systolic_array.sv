// tb_systolic_array: runs a 16x16 array (bfloat16, MBM multiplier, C3) on a
// random weight tile and M = 24 input vectors streamed back to back, with a
// gap and a second burst of 8 vectors.  Each output vector is compared with
// sum_r in[r] * W[r][j] computed in the reference model in the same order as
// the array (row 0 first, exact FP32 adds of MBM products); the latency from
// an input vector to its output vector must be ROWS + COLS - 1 cycles and the
// throughput one vector per cycle.
module tb_systolic_array;
  import tb_fp_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int R = 16, K = 16, MW = 7, CW = 16, M = 32;
  localparam real C = 21.0 / 256.0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_load, in_valid, out_valid;
  logic [CW-1:0] w_top [K];
  logic [CW-1:0] in_row [R];
  logic [31:0] out_row [K];

  systolic_array #(.ROWS(R), .COLS(K), .MANT_W(MW), .APPROX(1'b1)) dut (.*);

  always #5 clk = ~clk;

  logic [CW-1:0] W [R][K];
  logic [CW-1:0] X [M][R];
  int in_cycle [M];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [31:0] ref_out(int t, int j);
    logic [31:0] acc = 32'd0;
    for (int r = 0; r < R; r++)
      acc = ref_add(acc, ref_mul_mbm({X[t][r], 16'd0}, {W[r][j], 16'd0}, MW, C));
    return acc;
  endfunction

  // output checker
  int n_out = 0;
  always @(negedge clk) if (rst_n && out_valid) begin
    for (int j = 0; j < K; j++) begin
      logic [31:0] e;
      e = ref_out(n_out, j);
      checks++;
      if (out_row[j] !== e) begin
        failures++;
        if (failures < 12) $display("FAIL t=%0d j=%0d got=%h exp=%h", n_out, j, out_row[j], e);
      end
    end
    checks++;
    if (cyc - in_cycle[n_out] != R + K - 1) begin
      failures++;
      $display("FAIL latency t=%0d %0d", n_out, cyc - in_cycle[n_out]);
    end
    n_out++;
  end

  initial begin
    for (int r = 0; r < R; r++)
      for (int j = 0; j < K; j++) W[r][j] = 16'(rand_fp32(120, 130) >> 16);
    for (int t = 0; t < M; t++)
      for (int r = 0; r < R; r++) X[t][r] = ($urandom % 9 == 0) ? '0 : 16'(rand_fp32(120, 130) >> 16);
    w_load = 0; in_valid = 0;
    for (int j = 0; j < K; j++) w_top[j] = '0;
    for (int r = 0; r < R; r++) in_row[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // weight load: bottom row first
    for (int k = 0; k < R; k++) begin
      @(negedge clk);
      w_load = 1;
      for (int j = 0; j < K; j++) w_top[j] = W[R-1-k][j];
    end
    @(negedge clk);
    w_load = 0;
    for (int t = 0; t < M; t++) begin
      if (t == 24) begin
        in_valid = 0;
        repeat (5) @(negedge clk);
      end
      in_valid = 1;
      for (int r = 0; r < R; r++) in_row[r] = X[t][r];
      in_cycle[t] = cyc;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (R + K + 4) @(negedge clk);
    checks++;
    if (n_out != M) begin
      failures++;
      $display("FAIL %0d outputs, expected %0d", n_out, M);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
