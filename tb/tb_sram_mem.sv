// tb_sram_mem: checks the InMem SRAM at its default size (8192 x 64 bit).
// Writes random words to random addresses (kept in a reference array), reads
// them back one cycle after rd_en, checks that rd_data holds between reads and
// that a read and a write of the same address in one cycle return the old word.
module tb_sram_mem;
  int checks = 0, failures = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [12:0] wr_addr, rd_addr;
  logic [63:0] wr_data, rd_data;

  sram_mem #(.WIDTH(64), .BYTES(65536)) dut (.*);

  logic [63:0] model [int];

  task automatic chk(string tag, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got=%h exp=%h", tag, got, exp);
    end
  endtask

  initial begin
    int addrs [300];
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      addrs[i] = (i < 2) ? (i * 8191) : int'($urandom % 8192);
      wr_en = 1; wr_addr = 13'(addrs[i]); wr_data = {$urandom, $urandom};
      model[addrs[i]] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      rd_en = 1; rd_addr = 13'(addrs[i]);
      @(negedge clk);
      rd_en = 0;
      chk("read", rd_data, model[addrs[i]]);
      @(negedge clk);
      chk("hold", rd_data, model[addrs[i]]);
    end
    // read during write of the same address: old data
    rd_en = 1; rd_addr = 13'(addrs[5]); wr_en = 1; wr_addr = 13'(addrs[5]); wr_data = ~model[addrs[5]];
    @(negedge clk);
    rd_en = 0; wr_en = 0;
    chk("read-during-write", rd_data, model[addrs[5]]);
    rd_en = 1;
    @(negedge clk);
    chk("new data", rd_data, ~model[addrs[5]]);
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
