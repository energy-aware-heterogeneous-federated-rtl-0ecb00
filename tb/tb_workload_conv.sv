// tb_workload_conv: one training step of a ResNet20 first-stage convolution
// layer (16 -> 16 channels, 3x3 kernel, stride 1, zero padding 1, 32x32
// feature map, one image) run on the accelerator at its default parameters
// (C5: bfloat10 storage, MBM multiplier, 16x16 array, 64 KB buffers).
// The testbench plays the DRAM side and the host that cuts the layer into
// 16x16 weight-stationary tiles:
//   FWD  Y[o][p]  = sum_{c,kh,kw} X[c][p + (kh,kw) - 1] * K[o][c][kh][kw]
//        9 tiles (one per kernel position), W[r=c][j=o] = K[o][c][kh][kw],
//        1024 input vectors each (one per output pixel), accumulated in OBuf.
//   BWD  dX[c][p] = sum_{o,u,v} dY[o][p + (u,v) - 1] * K[o][c][2-u][2-v]
//        the same 9-tile scheme with the kernel rotated by 180 degrees within
//        a channel and transposed across channels (W[r=o][j=c]); the
//        re-ordering is done only by the order the tiles are written to WBuf.
//   WGRAD dK[o][c][1][1] = sum_p X[c][p] * dY[o][p], a 1024-long reduction
//        split into 64 tiles of 16 pixels: the output gradients of 16 pixels
//        are the stationary tile (W[r=p][j=o]), the inputs are streamed (one
//        vector per input channel c), partial results accumulate in OBuf row
//        c, column o.  The finished gradients go back over the DRAM ports.
//   SGD  K[o][c][1][1] - lr * dK on the SIMD array (MUL, SUB), after moving
//        dK and the weights to VMem over the DRAM ports.
// Every OBuf and VMem result is compared with the reference model (MBM
// products of truncated operands, exact FP32 sums in tile and row order).
// The cycle count of each 1024-vector tile is checked against one vector
// per cycle plus the fixed array and controller latency.
module tb_workload_conv;
  import accel_pkg::*;
  import tb_fp_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int N = 16, MW = 1, ELEMS = 6, HW = 32, NPIX = HW * HW;
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
    while (!dram_wr_ready) @(negedge clk);
    @(negedge clk);
    dram_wr_en = 0;
  endtask

  task automatic dread(buf_sel_e sel, int bank, int addr, output logic [31:0] data);
    dram_rd_en = 1; dram_rd_sel = sel; dram_rd_bank = 4'(bank); dram_rd_addr = 16'(addr);
    #1;
    while (!dram_rd_ready) @(negedge clk);
    @(negedge clk);
    dram_rd_en = 0;
    data = dram_rd_data;
  endtask

  function automatic logic [31:0] pmul(logic [31:0] x, logic [31:0] w);
    return ref_mul_mbm(trunc_fp32(x, MW), trunc_fp32(w, MW), MW, C);
  endfunction

  // layer tensors
  logic [31:0] X  [N][HW][HW];     // input activations
  logic [31:0] DY [N][HW][HW];     // output gradients
  logic [31:0] K  [N][N][3][3];    // K[o][c][kh][kw]
  logic [31:0] R  [NPIX][N];       // reference OBuf contents
  logic [31:0] T  [N][N];          // current weight tile
  logic [31:0] V  [NPIX][N];       // current input vectors

  function automatic logic [31:0] xpad(int c, int y, int x);
    return (y < 0 || y >= HW || x < 0 || x >= HW) ? 32'd0 : X[c][y][x];
  endfunction
  function automatic logic [31:0] dypad(int o, int y, int x);
    return (y < 0 || y >= HW || x < 0 || x >= HW) ? 32'd0 : DY[o][y][x];
  endfunction

  task automatic write_tile();
    for (int j = 0; j < N; j++)
      for (int k = 0; k < N; k++)   // column j, bottom row first
        dwrite(BUF_WBUF, j, k / ELEMS, k % ELEMS, 64'(T[N-1-k][j]));
  endtask

  task automatic write_vectors(int m);
    for (int r = 0; r < N; r++)
      for (int t = 0; t < m; t++)
        dwrite(BUF_IBUF, r, t / ELEMS, t % ELEMS, 64'(V[t][r]));
  endtask

  task automatic run_sa(int rows, bit acc, output int cycles);
    int t0;
    sa_cmd = '0;
    sa_cmd.load_w = 1'b1; sa_cmd.rows = 16'(rows); sa_cmd.acc = acc;
    while (!sa_cmd_ready) @(negedge clk);
    sa_cmd_valid = 1;
    t0 = cyc;
    @(negedge clk);
    sa_cmd_valid = 0;
    while (!sa_done && cyc - t0 < 5000) @(negedge clk);
    cycles = cyc - t0;
  endtask

  // run the current tile T on the current vectors V and update R the same way
  task automatic tile(int m, bit acc);
    int cycles;
    write_tile();
    write_vectors(m);
    run_sa(m, acc, cycles);
    if (m == NPIX) begin
      checks++;
      if (cycles != m + 55) begin failures++; $display("FAIL tile of %0d vectors took %0d cycles", m, cycles); end
    end
    for (int t = 0; t < m; t++)
      for (int j = 0; j < N; j++) begin
        logic [31:0] a = 32'd0;
        for (int r = 0; r < N; r++) a = ref_add(a, pmul(V[t][r], T[r][j]));
        R[t][j] = acc ? ref_add(R[t][j], a) : a;
      end
  endtask

  task automatic check_obuf(string tag, int m);
    logic [31:0] q;
    for (int t = 0; t < m; t++)
      for (int j = 0; j < N; j++) begin
        dread(BUF_OBUF, j, t, q);
        chk(tag, q, R[t][j]);
      end
  endtask

  function automatic simd_instr_t ins(simd_op_e o, int d, int a, int b);
    simd_instr_t i;
    i = '0;
    i.op = o; i.dst = 10'(d); i.src_a = 10'(a); i.src_b = 10'(b);
    return i;
  endfunction

  initial begin
    logic [31:0] q, step;
    logic [31:0] dk [N][N];
    dram_wr_en = 0; dram_rd_en = 0; dram_wr_sel = BUF_IBUF; dram_rd_sel = BUF_OBUF;
    dram_wr_bank = 0; dram_rd_bank = 0; dram_wr_addr = 0; dram_rd_addr = 0;
    dram_wr_elem = 0; dram_wr_data = 0; sa_cmd_valid = 0; sa_cmd = '0;
    simd_start = 0; simd_pc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // post-ReLU activations (about a third zero), signed weights and gradients
    for (int c = 0; c < N; c++)
      for (int y = 0; y < HW; y++)
        for (int x = 0; x < HW; x++) begin
          X[c][y][x] = ($urandom % 3 == 0) ? 32'd0 : rand_fp32(124, 129);
          X[c][y][x][31] = 1'b0;
          DY[c][y][x] = rand_fp32(118, 123);
        end
    for (int o = 0; o < N; o++)
      for (int c = 0; c < N; c++)
        for (int kh = 0; kh < 3; kh++)
          for (int kw = 0; kw < 3; kw++) K[o][c][kh][kw] = rand_fp32(120, 125);

    // ---- forward pass ----
    for (int kp = 0; kp < 9; kp++) begin
      int kh = kp / 3, kw = kp % 3;
      for (int r = 0; r < N; r++) for (int j = 0; j < N; j++) T[r][j] = K[j][r][kh][kw];
      for (int y = 0; y < HW; y++)
        for (int x = 0; x < HW; x++)
          for (int r = 0; r < N; r++) V[y * HW + x][r] = xpad(r, y + kh - 1, x + kw - 1);
      tile(NPIX, kp != 0);
    end
    check_obuf("fwd Y", NPIX);
    $display("forward pass done at cycle %0d, checks=%0d failures=%0d", cyc, checks, failures);

    // ---- input-gradient pass: rotated, transposed kernel ----
    for (int kp = 0; kp < 9; kp++) begin
      int u = kp / 3, v = kp % 3;
      for (int r = 0; r < N; r++) for (int j = 0; j < N; j++) T[r][j] = K[r][j][2-u][2-v];
      for (int y = 0; y < HW; y++)
        for (int x = 0; x < HW; x++)
          for (int r = 0; r < N; r++) V[y * HW + x][r] = dypad(r, y + u - 1, x + v - 1);
      tile(NPIX, kp != 0);
    end
    check_obuf("bwd dX", NPIX);
    $display("input-gradient pass done at cycle %0d, checks=%0d failures=%0d", cyc, checks, failures);

    // ---- weight gradient, centre tap: 64 tiles of 16 pixels ----
    for (int b = 0; b < NPIX / N; b++) begin
      for (int r = 0; r < N; r++) begin
        int p = b * N + r;
        for (int j = 0; j < N; j++) T[r][j] = DY[j][p / HW][p % HW];
        for (int t = 0; t < N; t++) V[t][r] = X[t][p / HW][p % HW];
      end
      tile(N, b != 0);
    end
    check_obuf("wgrad dK", N);
    $display("weight-gradient pass done at cycle %0d, checks=%0d failures=%0d", cyc, checks, failures);

    // ---- SGD on the SIMD array: lane c, word o: K - lr * dK ----
    for (int o = 0; o < N; o++)
      for (int c = 0; c < N; c++) begin
        dread(BUF_OBUF, o, c, q);              // OBuf row c, column o
        dwrite(BUF_VMEM, c, o, 0, 64'(q));
        dwrite(BUF_VMEM, c, 16 + o, 0, 64'(K[o][c][1][1]));
        dk[o][c] = R[c][o];
      end
    for (int c = 0; c < N; c++) dwrite(BUF_VMEM, c, 40, 0, 64'(32'h3c23_d70a));  // lr = 0.01
    for (int o = 0; o < N; o++) begin
      dwrite(BUF_INMEM, 0, 2 * o,     0, ins(OP_MUL, 48 + o, 40, o));
      dwrite(BUF_INMEM, 0, 2 * o + 1, 0, ins(OP_SUB, 64 + o, 16 + o, 48 + o));
    end
    dwrite(BUF_INMEM, 0, 2 * N, 0, ins(OP_HALT, 0, 0, 0));
    simd_start = 1; simd_pc = 16'd0;
    @(negedge clk);
    simd_start = 0;
    while (!simd_done) @(negedge clk);
    for (int o = 0; o < N; o++)
      for (int c = 0; c < N; c++) begin
        dread(BUF_VMEM, c, 64 + o, q);
        step = ref_mul_exact(32'h3c23_d70a, dk[o][c]);
        step[31] = ~step[31];
        chk("sgd K", q, ref_add(K[o][c][1][1], step));
      end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
