// tb_compressed_buffer: checks the compressed SRAM buffer in the bfloat10 /
// 60-bit configuration (6 values per word, C5) and the bfloat16 / 64-bit one
// (4 values per word, C3).  Random FP32 values are written through the DRAM
// port; streams of several lengths and start words are read back and every
// value must equal the FP32 input with its mantissa truncated to MANT_W bits,
// bank by bank and in order.  Also checked: the first value arrives 2 cycles
// after st_start, values come one per cycle, and the SRAM is read once per
// word (ceil(count / ELEMS) reads per stream).
module tb_compressed_buffer;
  import tb_fp_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int NB = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // C5: bfloat10 in 60-bit words
  localparam int MW5 = 1, CW5 = 10, E5 = 6, D5 = 546;
  logic wr_en5; logic [3:0] wr_bank5; logic [9:0] wr_word5; logic [2:0] wr_elem5; logic [31:0] wr_data5;
  logic st_start5, st_busy5, st_valid5, st_rd5; logic [9:0] st_word5; logic [15:0] st_count5;
  logic [CW5-1:0] st_data5 [NB];
  compressed_buffer #(.NBANK(NB), .MANT_W(MW5), .BUS_W(60), .BYTES(65536)) dut5 (
    .clk, .rst_n, .wr_en(wr_en5), .wr_bank(wr_bank5), .wr_word(wr_word5), .wr_elem(wr_elem5),
    .wr_data(wr_data5), .st_start(st_start5), .st_word(st_word5), .st_count(st_count5),
    .st_busy(st_busy5), .st_valid(st_valid5), .st_data(st_data5), .st_rd_strobe(st_rd5));

  // C3: bfloat16 in 64-bit words
  localparam int MW3 = 7, CW3 = 16, E3 = 4;
  logic wr_en3; logic [3:0] wr_bank3; logic [9:0] wr_word3; logic [1:0] wr_elem3; logic [31:0] wr_data3;
  logic st_start3, st_busy3, st_valid3, st_rd3; logic [9:0] st_word3; logic [15:0] st_count3;
  logic [CW3-1:0] st_data3 [NB];
  compressed_buffer #(.NBANK(NB), .MANT_W(MW3), .BUS_W(64), .BYTES(65536)) dut3 (
    .clk, .rst_n, .wr_en(wr_en3), .wr_bank(wr_bank3), .wr_word(wr_word3), .wr_elem(wr_elem3),
    .wr_data(wr_data3), .st_start(st_start3), .st_word(st_word3), .st_count(st_count3),
    .st_busy(st_busy3), .st_valid(st_valid3), .st_data(st_data3), .st_rd_strobe(st_rd3));

  logic [31:0] img5 [NB][64];   // element index = word * ELEMS + elem (first 64 elements)
  logic [31:0] img3 [NB][64];

  task automatic chk(string tag, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got=%h exp=%h at %0t", tag, got, exp, $time);
    end
  endtask

  task automatic run5(int word, int count);
    int t0, got, rd;
    @(negedge clk);
    st_start5 = 1; st_word5 = 10'(word); st_count5 = 16'(count);
    t0 = 0;
    @(negedge clk);
    st_start5 = 0;
    got = 0; rd = 0;
    for (int c = 1; c < count + 8; c++) begin
      if (st_rd5) rd++;
      if (st_valid5) begin
        if (got == 0) chk("C5 first-valid delay", 32'(c), 32'd2);
        for (int b = 0; b < NB; b++)
          chk("C5 data", {st_data5[b], 22'd0}, trunc_fp32(img5[b][word*E5 + got], MW5));
        got++;
      end else if (got > 0 && got < count) chk("C5 gap", 32'(got), 32'(count));
      @(negedge clk);
    end
    chk("C5 count", 32'(got), 32'(count));
    chk("C5 word reads", 32'(rd), 32'((count + E5 - 1) / E5));
  endtask

  task automatic run3(int word, int count);
    int got, rd;
    @(negedge clk);
    st_start3 = 1; st_word3 = 10'(word); st_count3 = 16'(count);
    @(negedge clk);
    st_start3 = 0;
    got = 0; rd = 0;
    for (int c = 1; c < count + 8; c++) begin
      if (st_rd3) rd++;
      if (st_valid3) begin
        if (got == 0) chk("C3 first-valid delay", 32'(c), 32'd2);
        for (int b = 0; b < NB; b++)
          chk("C3 data", {st_data3[b], 16'd0}, trunc_fp32(img3[b][word*E3 + got], MW3));
        got++;
      end
      @(negedge clk);
    end
    chk("C3 count", 32'(got), 32'(count));
    chk("C3 word reads", 32'(rd), 32'((count + E3 - 1) / E3));
  endtask

  initial begin
    wr_en5 = 0; wr_en3 = 0; st_start5 = 0; st_start3 = 0;
    wr_bank5 = 0; wr_word5 = 0; wr_elem5 = 0; wr_data5 = 0; st_word5 = 0; st_count5 = 0;
    wr_bank3 = 0; wr_word3 = 0; wr_elem3 = 0; wr_data3 = 0; st_word3 = 0; st_count3 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < 60; i++) begin
        img5[b][i] = rand_fp32(100, 150);
        img3[b][i] = rand_fp32(100, 150);
        @(negedge clk);
        wr_en5 = 1; wr_bank5 = 4'(b); wr_word5 = 10'(i / E5); wr_elem5 = 3'(i % E5); wr_data5 = img5[b][i];
        wr_en3 = 1; wr_bank3 = 4'(b); wr_word3 = 10'(i / E3); wr_elem3 = 2'(i % E3); wr_data3 = img3[b][i];
      end
    @(negedge clk);
    wr_en5 = 0; wr_en3 = 0;
    run5(0, 16);
    run5(2, 13);
    run5(1, 1);
    run5(3, 36);
    run3(0, 16);
    run3(5, 9);
    run3(2, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
