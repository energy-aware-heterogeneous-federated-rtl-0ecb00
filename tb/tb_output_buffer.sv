// tb_output_buffer: checks OBuf.  Writes rows of 16 FP32 values back to back
// (one per cycle), accumulates further rows onto some of them (row_acc), also
// back to back and onto an address written in the previous cycle, preloads
// words through the DRAM port and accumulates onto them, and reads every word
// back through the DRAM port (data one cycle after the read).  Expected values
// come from the reference FP32 adder.
module tb_output_buffer;
  import tb_fp_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int NB = 16, AW = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic row_valid, row_acc, row_busy;
  logic [AW-1:0] row_addr;
  logic [31:0] row_data [NB];
  logic dram_wr_en, dram_rd_en;
  logic [3:0] dram_wr_bank, dram_rd_bank;
  logic [AW-1:0] dram_wr_addr, dram_rd_addr;
  logic [31:0] dram_wr_data, dram_rd_data;

  output_buffer #(.NBANK(NB), .BYTES(65536)) dut (.*);

  logic [31:0] model [NB][32];

  task automatic chk(string tag, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got=%h exp=%h", tag, got, exp);
    end
  endtask

  task automatic send_row(int addr, bit acc);
    row_valid = 1; row_acc = acc; row_addr = AW'(addr);
    for (int b = 0; b < NB; b++) begin
      row_data[b] = rand_fp32(120, 130);
      model[b][addr] = acc ? ref_add(model[b][addr], row_data[b]) : row_data[b];
    end
    @(negedge clk);
    row_valid = 0;
  endtask

  initial begin
    row_valid = 0; row_acc = 0; row_addr = 0; dram_wr_en = 0; dram_rd_en = 0;
    dram_wr_bank = 0; dram_rd_bank = 0; dram_wr_addr = 0; dram_rd_addr = 0; dram_wr_data = 0;
    for (int b = 0; b < NB; b++) row_data[b] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int a = 0; a < 20; a++) send_row(a, 0);          // plain writes, back to back
    for (int a = 0; a < 20; a++) send_row(a, 1);          // accumulate, back to back
    send_row(3, 1); send_row(3, 1); send_row(4, 1);       // same address two cycles running
    // DRAM preload of rows 24..27 once the array path is idle, then accumulate onto them
    @(negedge clk);
    for (int a = 24; a < 28; a++)
      for (int b = 0; b < NB; b++) begin
        dram_wr_en = 1; dram_wr_bank = 4'(b); dram_wr_addr = AW'(a);
        dram_wr_data = rand_fp32(110, 140); model[b][a] = dram_wr_data;
        @(negedge clk);
      end
    dram_wr_en = 0;
    for (int a = 24; a < 28; a++) send_row(a, 1);
    checks++;
    if (!row_busy) begin failures++; $display("FAIL row_busy"); end
    @(negedge clk);
    // read everything back through the DRAM port
    for (int a = 0; a < 28; a++) begin
      if (a >= 20 && a < 24) continue;
      for (int b = 0; b < NB; b++) begin
        dram_rd_en = 1; dram_rd_bank = 4'(b); dram_rd_addr = AW'(a);
        @(negedge clk);
        dram_rd_en = 0;
        chk("readback", dram_rd_data, model[b][a]);
      end
    end
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
