// tb_vector_mem: checks VMem (16 lanes x 1024 FP32 words).  Vector writes and
// reads from the SIMD side, single-word writes and reads from the DRAM side,
// and the arbitration: a DRAM write in a cycle with a SIMD write (or a DRAM
// read with a SIMD read) must see dram_ready low and must not change memory;
// accesses of different kinds in one cycle both proceed.
module tb_vector_mem;
  int checks = 0, failures = 0;

  localparam int NL = 16, AW = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic v_rd_en, v_wr_en, dram_wr_en, dram_rd_en, dram_ready;
  logic [AW-1:0] v_rd_addr, v_wr_addr, dram_addr;
  logic [31:0] v_rd_data [NL];
  logic [31:0] v_wr_data [NL];
  logic [3:0] dram_lane;
  logic [31:0] dram_wr_data, dram_rd_data;

  vector_mem #(.NLANE(NL), .BYTES(65536)) dut (.*);

  logic [31:0] model [NL][64];
  int stalls = 0;

  task automatic chk(string tag, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got=%h exp=%h", tag, got, exp);
    end
  endtask

  initial begin
    v_rd_en = 0; v_wr_en = 0; dram_wr_en = 0; dram_rd_en = 0;
    v_rd_addr = 0; v_wr_addr = 0; dram_addr = 0; dram_lane = 0; dram_wr_data = 0;
    for (int l = 0; l < NL; l++) v_wr_data[l] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // vector writes of addresses 0..31
    for (int a = 0; a < 32; a++) begin
      v_wr_en = 1; v_wr_addr = AW'(a);
      for (int l = 0; l < NL; l++) begin v_wr_data[l] = $urandom; model[l][a] = v_wr_data[l]; end
      // a colliding DRAM write in every fourth cycle must be refused
      dram_wr_en = (a % 4 == 0); dram_lane = 4'(a % NL); dram_addr = AW'(a); dram_wr_data = 32'hdead_beef;
      #1;
      if (dram_wr_en) begin
        chk("refused write", 32'(dram_ready), 32'd0);
        if (!dram_ready) stalls++;
      end
      @(negedge clk);
    end
    v_wr_en = 0; dram_wr_en = 0;
    // DRAM single-word writes of addresses 32..47 while the SIMD side reads
    for (int a = 32; a < 48; a++)
      for (int l = 0; l < NL; l++) begin
        dram_wr_en = 1; dram_lane = 4'(l); dram_addr = AW'(a); dram_wr_data = $urandom;
        model[l][a] = dram_wr_data;
        v_rd_en = 1; v_rd_addr = AW'(a - 32);
        #1;
        chk("write taken", 32'(dram_ready), 32'd1);
        @(negedge clk);
        v_rd_en = 0;
        for (int k = 0; k < NL; k++) chk("vector read", v_rd_data[k], model[k][a - 32]);
      end
    dram_wr_en = 0;
    // vector reads of everything
    for (int a = 0; a < 48; a++) begin
      v_rd_en = 1; v_rd_addr = AW'(a);
      @(negedge clk);
      v_rd_en = 0;
      for (int l = 0; l < NL; l++) chk("vector readback", v_rd_data[l], model[l][a]);
    end
    // DRAM reads, one colliding with a SIMD read
    for (int a = 0; a < 48; a += 5) begin
      dram_rd_en = 1; dram_lane = 4'(a % NL); dram_addr = AW'(a);
      #1;
      chk("read ready", 32'(dram_ready), 32'd1);
      @(negedge clk);
      dram_rd_en = 0;
      chk("dram read", dram_rd_data, model[a % NL][a]);
    end
    dram_rd_en = 1; v_rd_en = 1; v_rd_addr = 10'd7;
    #1;
    chk("read refused", 32'(dram_ready), 32'd0);
    @(negedge clk);
    dram_rd_en = 0; v_rd_en = 0;
    chk("simd read wins", v_rd_data[3], model[3][7]);
    checks++;
    if (stalls == 0) failures++;
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
