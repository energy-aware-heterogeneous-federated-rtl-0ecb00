// tb_fl_accel_top: end-to-end test of the accelerator at its default
// parameters (16x16 array, 16 SIMD lanes, bfloat10 storage, MBM multiplier,
// 60-bit SRAM words, 64 KB buffers).  The testbench plays the DRAM side.
//   A  forward tile: load weight tile W1 into WBuf and 40 input vectors into
//      IBuf (FP32 values whose low mantissa bits are non-zero, so compression
//      really truncates), run with load_w, results to OBuf rows 0..39.
//   B  second reduction tile: W2 and 40 new vectors, accumulated onto rows 0..39.
//   C  weight reuse: 80 vectors through the W2 already in the array (rows 100..),
//   D  weight reuse again with 40 vectors: C and D differ by exactly 40 cycles,
//      i.e. one input vector per cycle.
//   E  SIMD: OBuf rows are moved to VMem over the DRAM ports, then a program
//      with every ALU operation (including an SGD step w - lr * g) runs while
//      the DRAM side keeps writing VMem, which must stall at least once.
// All OBuf and VMem results are read back and compared with the reference
// model (MBM products on truncated operands, exact FP32 sums in row order).
// Every mechanism (weight load, weight reuse, accumulation, truncation, both
// MBM branches, SRAM word batching, VMem stall, each SIMD op) is counted and
// a failure is counted for any that never happened.
module tb_fl_accel_top;
  import accel_pkg::*;
  import tb_fp_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int N = 16, MW = 1, ELEMS = 6;
  localparam real C = 21.0 / 256.0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic dram_wr_en, dram_wr_ready, dram_rd_en, dram_rd_ready, dram_rd_valid;
  buf_sel_e dram_wr_sel, dram_rd_sel;
  logic [3:0] dram_wr_bank, dram_rd_bank;
  logic [15:0] dram_wr_addr, dram_rd_addr;
  logic [2:0] dram_wr_elem;
  logic [63:0] dram_wr_data;
  logic [31:0] dram_rd_data;
  logic sa_cmd_valid, sa_cmd_ready, sa_done;
  sa_cmd_t sa_cmd;
  logic simd_start, simd_busy, simd_done;
  logic [15:0] simd_pc;
  logic ibuf_word_rd, wbuf_word_rd;

  fl_accel_top dut (.*);

  // mechanism counters
  int n_wload = 0, n_reuse = 0, n_acc = 0, n_trunc = 0, n_mbm1 = 0, n_mbm2 = 0;
  int n_stall = 0, n_ops [16];
  int ibuf_reads = 0;
  always @(posedge clk) if (ibuf_word_rd) ibuf_reads++;

  task automatic chk(string tag, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got=%h exp=%h", tag, got, exp);
    end
  endtask

  task automatic dwrite(buf_sel_e sel, int bank, int addr, int elem, logic [63:0] data);
    dram_wr_en = 1; dram_wr_sel = sel; dram_wr_bank = 4'(bank);
    dram_wr_addr = 16'(addr); dram_wr_elem = 3'(elem); dram_wr_data = data;
    #1;
    while (!dram_wr_ready) begin
      n_stall++;
      @(negedge clk);
    end
    @(negedge clk);
    dram_wr_en = 0;
  endtask

  task automatic dread(buf_sel_e sel, int bank, int addr, output logic [31:0] data);
    dram_rd_en = 1; dram_rd_sel = sel; dram_rd_bank = 4'(bank); dram_rd_addr = 16'(addr);
    #1;
    while (!dram_rd_ready) @(negedge clk);
    @(negedge clk);
    dram_rd_en = 0;
    checks++;
    if (!dram_rd_valid) begin failures++; $display("FAIL rd_valid"); end
    data = dram_rd_data;
  endtask

  // reference MBM product on the compressed (truncated) operands
  function automatic logic [31:0] pmul(logic [31:0] x, logic [31:0] w);
    logic [31:0] xt, wt;
    xt = trunc_fp32(x, MW); wt = trunc_fp32(w, MW);
    if (xt[30:23] != 0 && wt[30:23] != 0) begin
      if (xt[22] & wt[22]) n_mbm2++; else n_mbm1++;
    end
    return ref_mul_mbm(xt, wt, MW, C);
  endfunction

  logic [31:0] W1 [N][N], W2 [N][N];
  logic [31:0] X1 [40][N], X2 [40][N], X3 [80][N];
  logic [31:0] R [256][N];      // reference OBuf

  task automatic load_w(logic [31:0] W [N][N], int base_word);
    for (int j = 0; j < N; j++)
      for (int k = 0; k < N; k++)   // column j, bottom row first
        dwrite(BUF_WBUF, j, base_word + k / ELEMS, k % ELEMS, 64'(W[N-1-k][j]));
  endtask

  task automatic load_x(logic [31:0] X [][N], int base_word, int m);
    for (int r = 0; r < N; r++)
      for (int t = 0; t < m; t++)
        dwrite(BUF_IBUF, r, base_word + t / ELEMS, t % ELEMS, 64'(X[t][r]));
  endtask

  task automatic run_sa(bit lw, int ww, int iw, int rows, int oa, bit acc, output int cycles);
    int t0;
    sa_cmd = '0;
    sa_cmd.load_w = lw; sa_cmd.w_word = 16'(ww); sa_cmd.i_word = 16'(iw);
    sa_cmd.rows = 16'(rows); sa_cmd.o_addr = 16'(oa); sa_cmd.acc = acc;
    while (!sa_cmd_ready) @(negedge clk);
    sa_cmd_valid = 1;
    t0 = cyc;
    @(negedge clk);
    sa_cmd_valid = 0;
    while (!sa_done && cyc - t0 < 5000) @(negedge clk);
    cycles = cyc - t0;
    if (lw) n_wload++; else n_reuse++;
    if (acc) n_acc++;
  endtask

  function automatic logic [31:0] dot(logic [31:0] x [N], logic [31:0] W [N][N], int j);
    logic [31:0] a = 32'd0;
    for (int r = 0; r < N; r++) a = ref_add(a, pmul(x[r], W[r][j]));
    return a;
  endfunction

  function automatic logic [31:0] rnd();
    logic [31:0] v;
    v = rand_fp32(122, 132);
    if ($urandom % 11 == 0) v = 32'd0;
    return v;
  endfunction

  function automatic simd_instr_t ins(simd_op_e o, int d, int a, int b);
    simd_instr_t i;
    i = '0;
    i.op = o; i.dst = 10'(d); i.src_a = 10'(a); i.src_b = 10'(b);
    return i;
  endfunction

  initial begin
    int cA, cB, cC, cD, reads_before;
    logic [31:0] q;
    logic [31:0] vm [N][1024];
    simd_instr_t prog [10];
    foreach (n_ops[i]) n_ops[i] = 0;
    dram_wr_en = 0; dram_rd_en = 0; dram_wr_sel = BUF_IBUF; dram_rd_sel = BUF_OBUF;
    dram_wr_bank = 0; dram_rd_bank = 0; dram_wr_addr = 0; dram_rd_addr = 0;
    dram_wr_elem = 0; dram_wr_data = 0; sa_cmd_valid = 0; sa_cmd = '0;
    simd_start = 0; simd_pc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int r = 0; r < N; r++)
      for (int j = 0; j < N; j++) begin W1[r][j] = rnd(); W2[r][j] = rnd(); end
    for (int t = 0; t < 80; t++)
      for (int r = 0; r < N; r++) begin
        if (t < 40) begin X1[t][r] = rnd(); X2[t][r] = rnd(); end
        X3[t][r] = rnd();
        if (X3[t][r][21:0] != 0) n_trunc++;
      end

    // ---- A: forward tile with weight load ----
    load_w(W1, 0);
    load_w(W2, 3);
    load_x(X1, 0, 40);
    load_x(X2, 20, 40);
    load_x(X3, 40, 80);
    reads_before = ibuf_reads;
    run_sa(1, 0, 0, 40, 0, 0, cA);
    checks++;
    if (ibuf_reads - reads_before != (40 + ELEMS - 1) / ELEMS) begin
      failures++; $display("FAIL ibuf word reads %0d", ibuf_reads - reads_before);
    end
    for (int t = 0; t < 40; t++) for (int j = 0; j < N; j++) R[t][j] = dot(X1[t], W1, j);
    // ---- B: accumulate a second reduction tile ----
    run_sa(1, 3, 20, 40, 0, 1, cB);
    for (int t = 0; t < 40; t++) for (int j = 0; j < N; j++) R[t][j] = ref_add(R[t][j], dot(X2[t], W2, j));
    // ---- C, D: weight reuse, rate ----
    run_sa(0, 0, 40, 80, 100, 0, cC);
    for (int t = 0; t < 80; t++) for (int j = 0; j < N; j++) R[100 + t][j] = dot(X3[t], W2, j);
    run_sa(0, 0, 40, 40, 200, 0, cD);
    checks++;
    if (cC - cD != 40) begin failures++; $display("FAIL rate: %0d vs %0d cycles", cC, cD); end
    $display("tile cycles: A=%0d (load + 40 vectors) B=%0d C=%0d (80) D=%0d (40)", cA, cB, cC, cD);
    // ---- read back OBuf ----
    for (int t = 0; t < 40; t++)
      for (int j = 0; j < N; j++) begin
        dread(BUF_OBUF, j, t, q);
        chk("obuf A+B", q, R[t][j]);
      end
    for (int t = 0; t < 80; t += 3)
      for (int j = 0; j < N; j++) begin
        dread(BUF_OBUF, j, 100 + t, q);
        chk("obuf C", q, R[100 + t][j]);
      end
    for (int t = 0; t < 40; t += 7)
      for (int j = 0; j < N; j++) begin
        dread(BUF_OBUF, j, 200 + t, q);
        chk("obuf D", q, R[100 + t][j]);
      end

    // ---- E: SIMD on OBuf results moved into VMem ----
    // v0 = out row 0 (gradient g), v1 = out row 1 (weights w), v2 = lr (0.125)
    for (int l = 0; l < N; l++) begin
      vm[l][0] = R[0][l]; vm[l][1] = R[1][l]; vm[l][2] = 32'h3e00_0000;
      dwrite(BUF_VMEM, l, 0, 0, 64'(vm[l][0]));
      dwrite(BUF_VMEM, l, 1, 0, 64'(vm[l][1]));
      dwrite(BUF_VMEM, l, 2, 0, 64'(vm[l][2]));
    end
    prog = '{ins(OP_MUL, 10, 2, 0), ins(OP_SUB, 11, 1, 10), ins(OP_RELU, 12, 0, 0),
             ins(OP_MAX, 13, 0, 1), ins(OP_NOP, 0, 0, 0),   ins(OP_MIN, 14, 0, 1),
             ins(OP_ADD, 15, 11, 12), ins(OP_MOV, 16, 15, 0), ins(OP_HALT, 0, 0, 0),
             ins(OP_HALT, 0, 0, 0)};
    for (int i = 0; i < 10; i++) dwrite(BUF_INMEM, 0, 64 + i, 0, prog[i]);
    for (int i = 0; i < 9; i++) begin
      simd_instr_t p;
      p = prog[i];
      if (p.op == OP_HALT) break;
      n_ops[p.op]++;
      if (p.op == OP_NOP) continue;
      for (int l = 0; l < N; l++)
        case (p.op)
          OP_MUL:  vm[l][p.dst] = ref_mul_exact(vm[l][p.src_a], vm[l][p.src_b]);
          OP_SUB:  vm[l][p.dst] = ref_add(vm[l][p.src_a], {~vm[l][p.src_b][31], vm[l][p.src_b][30:0]});
          OP_ADD:  vm[l][p.dst] = ref_add(vm[l][p.src_a], vm[l][p.src_b]);
          OP_RELU: vm[l][p.dst] = (fp32_to_real(vm[l][p.src_a]) > 0.0) ? vm[l][p.src_a] : 32'd0;
          OP_MAX:  vm[l][p.dst] = (fp32_to_real(vm[l][p.src_a]) >= fp32_to_real(vm[l][p.src_b])) ? vm[l][p.src_a] : vm[l][p.src_b];
          OP_MIN:  vm[l][p.dst] = (fp32_to_real(vm[l][p.src_a]) <= fp32_to_real(vm[l][p.src_b])) ? vm[l][p.src_a] : vm[l][p.src_b];
          OP_MOV:  vm[l][p.dst] = vm[l][p.src_a];
          default: ;
        endcase
    end
    simd_start = 1; simd_pc = 16'd64;
    @(negedge clk);
    simd_start = 0;
    // keep the DRAM side busy on VMem while the program runs
    for (int i = 0; simd_busy; i++) begin
      vm[i % N][500 + i] = rnd();
      dwrite(BUF_VMEM, i % N, 500 + i, 0, 64'(vm[i % N][500 + i]));
    end
    for (int a = 10; a <= 16; a++)
      for (int l = 0; l < N; l++) begin
        dread(BUF_VMEM, l, a, q);
        chk("vmem result", q, vm[l][a]);
      end
    for (int i = 0; i < 8; i++) begin
      dread(BUF_VMEM, i % N, 500 + i, q);
      chk("vmem dram write", q, vm[i % N][500 + i]);
    end

    // ---- mechanisms ----
    $display("mechanisms: wload=%0d reuse=%0d acc=%0d trunc=%0d mbm_case1=%0d mbm_case2=%0d vmem_stall=%0d",
             n_wload, n_reuse, n_acc, n_trunc, n_mbm1, n_mbm2, n_stall);
    foreach (n_ops[i]) if (i inside {OP_ADD, OP_SUB, OP_MUL, OP_MAX, OP_MIN, OP_RELU, OP_MOV, OP_NOP}) begin
      checks++;
      if (n_ops[i] == 0) begin failures++; $display("FAIL op %0d never used", i); end
    end
    checks++; if (n_wload == 0) begin failures++; $display("FAIL no weight load"); end
    checks++; if (n_reuse == 0) begin failures++; $display("FAIL no weight reuse"); end
    checks++; if (n_acc == 0)   begin failures++; $display("FAIL no accumulation"); end
    checks++; if (n_trunc == 0) begin failures++; $display("FAIL no truncation"); end
    checks++; if (n_mbm1 == 0)  begin failures++; $display("FAIL no MBM case 1"); end
    checks++; if (n_mbm2 == 0)  begin failures++; $display("FAIL no MBM case 2"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no VMem stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
