// tb_simd_array: runs a small SIMD program on the 16-lane array with a real
// InMem (sram_mem) and VMem (vector_mem).  The program uses every operation,
// a NOP, a result that feeds a later instruction, and ends with HALT; it is
// started at a non-zero pc.  Every lane of every destination vector is
// compared with the reference model, and the run time must be 4 cycles per
// arithmetic instruction, 2 per NOP and 2 for the HALT.
module tb_simd_array;
  import accel_pkg::*;
  import tb_fp_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int NL = 16, IAW = 13;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [IAW-1:0] start_pc;
  logic im_rd_en; logic [IAW-1:0] im_rd_addr; logic [63:0] im_rd_data;
  logic v_rd_en, v_wr_en; logic [9:0] v_rd_addr, v_wr_addr;
  fp32_t v_rd_data [NL];
  fp32_t v_wr_data [NL];

  logic tb_im_we; logic [IAW-1:0] tb_im_addr; logic [63:0] tb_im_data;
  logic tb_vm_we, tb_vm_re, tb_vm_ready; logic [3:0] tb_vm_lane; logic [9:0] tb_vm_addr; logic [31:0] tb_vm_data, tb_vm_q;

  simd_array #(.NLANE(NL), .IAW(IAW)) dut (.*);
  sram_mem #(.WIDTH(64), .BYTES(65536)) u_inmem (
    .clk, .wr_en(tb_im_we), .wr_addr(tb_im_addr), .wr_data(tb_im_data),
    .rd_en(im_rd_en), .rd_addr(im_rd_addr), .rd_data(im_rd_data));
  vector_mem #(.NLANE(NL), .BYTES(65536)) u_vmem (
    .clk, .rst_n, .v_rd_en, .v_rd_addr, .v_rd_data, .v_wr_en, .v_wr_addr, .v_wr_data,
    .dram_wr_en(tb_vm_we), .dram_rd_en(tb_vm_re), .dram_ready(tb_vm_ready), .dram_lane(tb_vm_lane),
    .dram_addr(tb_vm_addr), .dram_wr_data(tb_vm_data), .dram_rd_data(tb_vm_q));

  fp32_t vm [NL][1024];   // reference VMem

  function automatic simd_instr_t ins(simd_op_e o, int d, int a, int b);
    simd_instr_t i;
    i = '0;
    i.op = o; i.dst = 10'(d); i.src_a = 10'(a); i.src_b = 10'(b);
    return i;
  endfunction

  function automatic fp32_t alu_ref(simd_op_e o, fp32_t x, fp32_t z);
    case (o)
      OP_ADD:  return ref_add(x, z);
      OP_SUB:  return ref_add(x, {~z[31], z[30:0]});
      OP_MUL:  return ref_mul_exact(x, z);
      OP_MAX:  return (fp32_to_real(x) >= fp32_to_real(z)) ? x : z;
      OP_MIN:  return (fp32_to_real(x) <= fp32_to_real(z)) ? x : z;
      OP_RELU: return (fp32_to_real(x) > 0.0) ? x : 32'd0;
      OP_MOV:  return x;
      default: return 32'd0;
    endcase
  endfunction

  initial begin
    simd_instr_t prog [11];
    int n_arith, n_nop, cycles;
    prog = '{ins(OP_ADD, 100, 0, 1), ins(OP_SUB, 101, 0, 1), ins(OP_MUL, 102, 0, 1),
             ins(OP_NOP, 0, 0, 0),   ins(OP_MAX, 103, 0, 1), ins(OP_MIN, 104, 0, 1),
             ins(OP_RELU, 105, 0, 0), ins(OP_MOV, 106, 1, 0), ins(OP_ADD, 107, 100, 102),
             ins(OP_MUL, 0, 107, 1), ins(OP_HALT, 0, 0, 0)};
    start = 0; start_pc = 0; tb_im_we = 0; tb_vm_we = 0; tb_vm_re = 0;
    tb_im_addr = 0; tb_im_data = 0; tb_vm_lane = 0; tb_vm_addr = 0; tb_vm_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 11; i++) begin
      tb_im_we = 1; tb_im_addr = IAW'(40 + i); tb_im_data = prog[i];
      @(negedge clk);
    end
    tb_im_we = 0;
    for (int l = 0; l < NL; l++)
      for (int a = 0; a < 2; a++) begin
        vm[l][a] = rand_fp32(110, 140);
        tb_vm_we = 1; tb_vm_lane = 4'(l); tb_vm_addr = 10'(a); tb_vm_data = vm[l][a];
        @(negedge clk);
      end
    tb_vm_we = 0;
    // reference execution
    n_arith = 0; n_nop = 0;
    foreach (prog[i]) begin
      if (prog[i].op == OP_HALT) break;
      if (prog[i].op == OP_NOP) begin n_nop++; continue; end
      n_arith++;
      for (int l = 0; l < NL; l++)
        vm[l][prog[i].dst] = alu_ref(prog[i].op, vm[l][prog[i].src_a], vm[l][prog[i].src_b]);
    end
    start = 1; start_pc = IAW'(40);
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy"); end
    cycles = 1;
    while (!done && cycles < 1000) begin
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (cycles != 4 * n_arith + 2 * n_nop + 3) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", cycles, 4 * n_arith + 2 * n_nop + 3);
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
    // read back every lane through VMem's DRAM-side port (the array is idle now)
    foreach (prog[i]) begin
      if (prog[i].op == OP_HALT || prog[i].op == OP_NOP) continue;
      for (int l = 0; l < NL; l++) begin
        tb_vm_re = 1; tb_vm_lane = 4'(l); tb_vm_addr = prog[i].dst;
        @(negedge clk);
        tb_vm_re = 0;
        checks++;
        if (tb_vm_q !== vm[l][prog[i].dst]) begin
          failures++;
          if (failures < 12) $display("FAIL v[%0d] lane %0d got=%h exp=%h", prog[i].dst, l, tb_vm_q, vm[l][prog[i].dst]);
        end
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
