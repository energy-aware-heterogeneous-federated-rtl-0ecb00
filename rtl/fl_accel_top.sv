// fl_accel_top: training-capable DNN accelerator with compressed storage and
// approximate MAC units, for energy-constrained federated-learning devices.
//
// Blocks: a ROWS x COLS weight-stationary systolic array (16x16) of MAC PEs,
// fed from the compressed input buffer IBuf and weight buffer WBuf and
// writing FP32 results to OBuf, sequenced by sa_controller; and a 1-D SIMD
// array of LANES (16) FP32 ALU cores running instructions from InMem on data
// in VMem.  Every buffer has its own link to the off-chip DRAM, brought out
// here as one DRAM-side write port and one DRAM-side read port with a buffer
// selector; the DRAM itself and whatever moves data over these ports are
// outside this design.
//
// Configuration (paper's C1-C5):  MANT_W / APPROX / BUS_W
//   C1 FP32      23 / 0 / 64     C2 bfloat16  7 / 0 / 64
//   C3 bfloat16   7 / 1 / 64     C4 bfloat12  3 / 1 / 60
//   C5 bfloat10   1 / 1 / 60     (default: C5, the most energy-saving design)
// MANT_W sets the storage and multiplier format of IBuf/WBuf and the PEs,
// APPROX selects the MBM approximate mantissa multiplier, BUS_W the SRAM word.
// OBuf, VMem, the SIMD ALUs and the PE adders stay FP32, as in the paper.
//
// DRAM write port: dram_wr_sel picks the buffer; bank is the IBuf row bank,
// WBuf column bank, OBuf column bank or VMem lane; addr is the word address
// (plus dram_wr_elem, the element within a compressed IBuf/WBuf word); data
// is FP32 in bits [31:0] except for InMem (64-bit instruction).  A write is
// taken when dram_wr_ready is high (only VMem can refuse it, while the SIMD
// array writes).  DRAM read port: OBuf or VMem, one FP32 word, dram_rd_valid
// and dram_rd_data one cycle after a read is taken (dram_rd_ready).
// Control: sa_cmd_valid/sa_cmd_ready/sa_done run one array tile operation;
// simd_start/simd_pc/simd_done run a SIMD program up to its HALT.
// ibuf_word_rd/wbuf_word_rd pulse once per compressed SRAM word read, so the
// access counts of an energy model can be taken from the running design.
module fl_accel_top
  import accel_pkg::*;
#(
  parameter int unsigned ROWS      = 16,
  parameter int unsigned COLS      = 16,
  parameter int unsigned LANES     = 16,
  parameter int unsigned MANT_W    = 1,
  parameter bit          APPROX    = 1'b1,
  parameter int unsigned BUS_W     = 60,
  parameter int unsigned BUF_BYTES = 65536,
  localparam int unsigned CW       = 9 + MANT_W
) (
  input  logic        clk,
  input  logic        rst_n,
  // DRAM -> on-chip buffers
  input  logic        dram_wr_en,
  input  buf_sel_e    dram_wr_sel,
  input  logic [3:0]  dram_wr_bank,
  input  logic [15:0] dram_wr_addr,
  input  logic [2:0]  dram_wr_elem,
  input  logic [63:0] dram_wr_data,
  output logic        dram_wr_ready,
  // on-chip buffers (OBuf, VMem) -> DRAM
  input  logic        dram_rd_en,
  input  buf_sel_e    dram_rd_sel,
  input  logic [3:0]  dram_rd_bank,
  input  logic [15:0] dram_rd_addr,
  output logic        dram_rd_ready,
  output logic        dram_rd_valid,
  output logic [31:0] dram_rd_data,
  // systolic-array tile commands
  input  logic        sa_cmd_valid,
  input  sa_cmd_t     sa_cmd,
  output logic        sa_cmd_ready,
  output logic        sa_done,
  // SIMD programs
  input  logic        simd_start,
  input  logic [15:0] simd_pc,
  output logic        simd_busy,
  output logic        simd_done,
  // SRAM word reads of IBuf / WBuf (one pulse per compressed word fetched)
  output logic        ibuf_word_rd,
  output logic        wbuf_word_rd
);

  localparam int unsigned ELEMS = BUS_W / CW;
  localparam int unsigned IDEP  = (BUF_BYTES * 8) / (ROWS * BUS_W);
  localparam int unsigned WDEP  = (BUF_BYTES * 8) / (COLS * BUS_W);
  localparam int unsigned IAW   = $clog2(IDEP);
  localparam int unsigned WAW   = $clog2(WDEP);
  localparam int unsigned EW    = (ELEMS > 1) ? $clog2(ELEMS) : 1;
  localparam int unsigned OAW   = $clog2(BUF_BYTES / (COLS * 4));
  localparam int unsigned VAW   = $clog2(BUF_BYTES / (LANES * 4));
  localparam int unsigned IMAW  = $clog2(BUF_BYTES / 8);
  localparam int unsigned RBW   = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CBW   = (COLS > 1) ? $clog2(COLS) : 1;
  localparam int unsigned LBW   = (LANES > 1) ? $clog2(LANES) : 1;

  // ---------------- systolic-array side ----------------
  logic          w_st_start, w_st_busy, w_st_valid, w_rd;
  logic [WAW-1:0] w_st_word;
  logic [15:0]   w_st_count;
  logic [CW-1:0] w_data [COLS];
  logic          i_st_start, i_st_busy, i_st_valid, i_rd;
  logic [IAW-1:0] i_st_word;
  logic [15:0]   i_st_count;
  logic [CW-1:0] i_data [ROWS];
  logic          sa_out_valid;
  logic [31:0]   sa_out [COLS];
  logic          ob_acc, ob_busy;
  logic [OAW-1:0] ob_addr;
  logic [31:0]   ob_rd_data;

  compressed_buffer #(.NBANK(ROWS), .MANT_W(MANT_W), .BUS_W(BUS_W), .BYTES(BUF_BYTES)) u_ibuf (
    .clk, .rst_n,
    .wr_en   (dram_wr_en && dram_wr_sel == BUF_IBUF),
    .wr_bank (dram_wr_bank[RBW-1:0]),
    .wr_word (dram_wr_addr[IAW-1:0]),
    .wr_elem (dram_wr_elem[EW-1:0]),
    .wr_data (dram_wr_data[31:0]),
    .st_start(i_st_start), .st_word(i_st_word), .st_count(i_st_count),
    .st_busy (i_st_busy), .st_valid(i_st_valid), .st_data(i_data), .st_rd_strobe(i_rd)
  );

  compressed_buffer #(.NBANK(COLS), .MANT_W(MANT_W), .BUS_W(BUS_W), .BYTES(BUF_BYTES)) u_wbuf (
    .clk, .rst_n,
    .wr_en   (dram_wr_en && dram_wr_sel == BUF_WBUF),
    .wr_bank (dram_wr_bank[CBW-1:0]),
    .wr_word (dram_wr_addr[WAW-1:0]),
    .wr_elem (dram_wr_elem[EW-1:0]),
    .wr_data (dram_wr_data[31:0]),
    .st_start(w_st_start), .st_word(w_st_word), .st_count(w_st_count),
    .st_busy (w_st_busy), .st_valid(w_st_valid), .st_data(w_data), .st_rd_strobe(w_rd)
  );

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .MANT_W(MANT_W), .APPROX(APPROX)) u_sa (
    .clk, .rst_n,
    .w_load   (w_st_valid),
    .w_top    (w_data),
    .in_valid (i_st_valid),
    .in_row   (i_data),
    .out_valid(sa_out_valid),
    .out_row  (sa_out)
  );

  sa_controller #(.ROWS(ROWS), .WAW(WAW), .IAW(IAW), .OAW(OAW)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid (sa_cmd_valid), .cmd(sa_cmd), .cmd_ready(sa_cmd_ready), .done(sa_done),
    .w_st_start, .w_st_word, .w_st_count, .w_st_busy,
    .i_st_start, .i_st_word, .i_st_count, .i_st_busy,
    .sa_out_valid, .ob_row_acc(ob_acc), .ob_row_addr(ob_addr), .ob_busy
  );

  output_buffer #(.NBANK(COLS), .BYTES(BUF_BYTES)) u_obuf (
    .clk, .rst_n,
    .row_valid   (sa_out_valid),
    .row_acc     (ob_acc),
    .row_addr    (ob_addr),
    .row_data    (sa_out),
    .row_busy    (ob_busy),
    .dram_wr_en  (dram_wr_en && dram_wr_sel == BUF_OBUF),
    .dram_wr_bank(dram_wr_bank[CBW-1:0]),
    .dram_wr_addr(dram_wr_addr[OAW-1:0]),
    .dram_wr_data(dram_wr_data[31:0]),
    .dram_rd_en  (dram_rd_en && dram_rd_sel == BUF_OBUF),
    .dram_rd_bank(dram_rd_bank[CBW-1:0]),
    .dram_rd_addr(dram_rd_addr[OAW-1:0]),
    .dram_rd_data(ob_rd_data)
  );

  // ---------------- SIMD side ----------------
  logic            im_rd_en;
  logic [IMAW-1:0] im_rd_addr;
  logic [63:0]     im_rd_data;
  logic            v_rd_en, v_wr_en;
  logic [VAW-1:0]  v_rd_addr, v_wr_addr;
  fp32_t           v_rd_data [LANES];
  fp32_t           v_wr_data [LANES];
  logic            vm_ready, vm_dwr, vm_drd;
  logic [31:0]     vm_rd_data;

  sram_mem #(.WIDTH(64), .BYTES(BUF_BYTES)) u_inmem (
    .clk,
    .wr_en   (dram_wr_en && dram_wr_sel == BUF_INMEM),
    .wr_addr (dram_wr_addr[IMAW-1:0]),
    .wr_data (dram_wr_data),
    .rd_en   (im_rd_en),
    .rd_addr (im_rd_addr),
    .rd_data (im_rd_data)
  );

  assign vm_dwr = dram_wr_en && dram_wr_sel == BUF_VMEM;
  assign vm_drd = dram_rd_en && dram_rd_sel == BUF_VMEM;

  vector_mem #(.NLANE(LANES), .BYTES(BUF_BYTES)) u_vmem (
    .clk, .rst_n,
    .v_rd_en, .v_rd_addr, .v_rd_data, .v_wr_en, .v_wr_addr, .v_wr_data,
    .dram_wr_en  (vm_dwr),
    .dram_rd_en  (vm_drd),
    .dram_ready  (vm_ready),
    .dram_lane   (vm_dwr ? dram_wr_bank[LBW-1:0] : dram_rd_bank[LBW-1:0]),
    .dram_addr   (vm_dwr ? dram_wr_addr[VAW-1:0] : dram_rd_addr[VAW-1:0]),
    .dram_wr_data(dram_wr_data[31:0]),
    .dram_rd_data(vm_rd_data)
  );

  simd_array #(.NLANE(LANES), .IAW(IMAW)) u_simd (
    .clk, .rst_n,
    .start    (simd_start),
    .start_pc (simd_pc[IMAW-1:0]),
    .busy     (simd_busy),
    .done     (simd_done),
    .im_rd_en, .im_rd_addr, .im_rd_data,
    .v_rd_en, .v_rd_addr, .v_rd_data, .v_wr_en, .v_wr_addr, .v_wr_data
  );

  assign ibuf_word_rd = i_rd;
  assign wbuf_word_rd = w_rd;

  // ---------------- DRAM-side handshakes ----------------
  logic rd_take;
  buf_sel_e rd_sel_q;

  assign dram_wr_ready = (dram_wr_sel == BUF_VMEM) ? vm_ready : 1'b1;
  assign dram_rd_ready = (dram_rd_sel == BUF_VMEM) ? vm_ready : 1'b1;
  assign rd_take = dram_rd_en && dram_rd_ready &&
                   (dram_rd_sel == BUF_OBUF || dram_rd_sel == BUF_VMEM);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dram_rd_valid <= 1'b0;
      rd_sel_q      <= BUF_OBUF;
    end else begin
      dram_rd_valid <= rd_take;
      if (rd_take) rd_sel_q <= dram_rd_sel;
    end
  end

  assign dram_rd_data = (rd_sel_q == BUF_VMEM) ? vm_rd_data : ob_rd_data;

endmodule
