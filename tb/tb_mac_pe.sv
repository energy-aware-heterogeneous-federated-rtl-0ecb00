// tb_mac_pe: checks one processing element (bfloat16 operands, MBM
// multiplier, configuration C3).  Loads a weight through the shift path,
// checks that it stays while w_load is low and is passed on through w_out,
// then drives random activations and partial sums and checks, one cycle later,
// psum_out = psum_in + a_in * w (MBM product, exact FP32 sum) and a_out = a_in.
module tb_mac_pe;
  import tb_fp_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int MW = 7, CW = 16;
  localparam real C = 21.0 / 256.0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_load;
  logic [CW-1:0] w_in, w_out, a_in, a_out;
  logic [31:0] psum_in, psum_out;

  mac_pe #(.MANT_W(MW), .APPROX(1'b1)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string tag, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got=%h exp=%h", tag, got, exp);
    end
  endtask

  initial begin
    logic [CW-1:0] w, w2, a;
    logic [31:0] p;
    w_load = 0; w_in = '0; a_in = '0; psum_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    w = 16'(rand_fp32(110, 140) >> 16);
    @(negedge clk); w_load = 1; w_in = w;
    @(negedge clk); w_load = 0; w_in = 16'h1234;
    chk("w_out", 32'(w_out), 32'(w));
    for (int i = 0; i < 500; i++) begin
      a = 16'(rand_fp32(110, 140) >> 16);
      p = rand_fp32(100, 150);
      if (i % 7 == 0) a = '0;              // zero activation leaves the sum alone
      a_in = a; psum_in = p;
      @(negedge clk);
      chk("psum", psum_out, ref_add(p, ref_mul_mbm({a, 16'd0}, {w, 16'd0}, MW, C)));
      chk("a_out", 32'(a_out), 32'(a));
    end
    chk("w_hold", 32'(w_out), 32'(w));
    // second weight shifted in: the old one leaves through w_out one cycle later
    w2 = 16'(rand_fp32(110, 140) >> 16);
    w_load = 1; w_in = w2;
    @(negedge clk);
    w_load = 0;
    chk("w_new", 32'(w_out), 32'(w2));
    a = 16'h3f80;                          // 1.0 x w2 + 0 = w2 (mantissa of 1.0 is 0)
    a_in = a; psum_in = 32'd0;
    @(negedge clk);
    chk("one", psum_out, ref_mul_mbm({a, 16'd0}, {w2, 16'd0}, MW, C));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
